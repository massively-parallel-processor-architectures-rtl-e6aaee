// interconnect_wrapper: circuit-switched switch box that encloses one PE.
//
// The paper's PEs are linked by a circuit-switched mesh; a wrapper around
// each PE decides which signals pass where, so that a neighbour can use a
// value one cycle after a PE produced it. Two separate networks run through
// the wrapper: a data network of D_CH channels of DATA_W bits per direction
// and a control network of C_CH 1-bit channels per direction (the paper's
// example: two 16-bit and one 1-bit channel).
//
// Every output of the wrapper -- each channel towards N, E, S and W, and each
// PE input port -- has a configuration register that selects one source: a
// channel arriving from N/E/S/W or one of the PE's output ports. A select
// value beyond the sources drives 0 (unconnected; the reset value). The
// switch itself is combinational, so routing through several wrappers adds
// no cycle; only the PE output registers do. The select-register scheme and
// the configuration port are this design's choices.
// Data source numbering: dir*D_CH + ch (dir 0..3 = N,E,S,W), then
// 4*D_CH + k for PE output port k. Data sink numbering: dir*D_CH + ch for the
// outgoing channels, then 4*D_CH + k for PE input port k. The control network
// is numbered the same way with C_CH, N_COUT and N_CIN.
//   cfg_we, cfg_ctrl (0 data, 1 control network), cfg_sink, cfg_src : rising edge
// Because nb_in -> nb_out is combinational, neighbouring wrappers wired
// together form structural loops; a route must never be configured to come
// back to the wrapper it left (see the array top for the lint note).
module interconnect_wrapper
  import tcpa_pkg::*;
(
  input  logic               clk,
  input  logic               rst_n,
  input  logic               cfg_we,
  input  logic               cfg_ctrl,
  input  logic [3:0]         cfg_sink,
  input  logic [3:0]         cfg_src,
  // data network
  input  word_t              nb_in   [N_DIR][D_CH],
  output word_t              nb_out  [N_DIR][D_CH],
  input  word_t              pe_out  [N_OUT],
  output word_t              pe_in   [N_IN],
  // control network
  input  logic               nbc_in  [N_DIR][C_CH],
  output logic               nbc_out [N_DIR][C_CH],
  input  logic [N_COUT-1:0]  pec_out,
  output logic [N_CIN-1:0]   pec_in
);
  localparam int unsigned DSRC  = N_DIR*D_CH + N_OUT;
  localparam int unsigned DSINK = N_DIR*D_CH + N_IN;
  localparam int unsigned CSRC  = N_DIR*C_CH + N_COUT;
  localparam int unsigned CSINK = N_DIR*C_CH + N_CIN;
  localparam int unsigned CIW   = $clog2(CSINK > CSRC ? CSINK : CSRC);  // control index width

  logic [3:0] dsel [DSINK];
  logic [3:0] csel [CSINK];
  word_t      dsrc [DSRC];
  logic       csrc [CSRC];
  word_t      dsink[DSINK];
  logic       csink[CSINK];

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      for (int i = 0; i < DSINK; i++) dsel[i] <= 4'hF;
      for (int i = 0; i < CSINK; i++) csel[i] <= 4'hF;
    end else if (cfg_we) begin
      if (!cfg_ctrl && cfg_sink < 4'(DSINK)) dsel[cfg_sink] <= cfg_src;
      if ( cfg_ctrl && cfg_sink < 4'(CSINK)) csel[CIW'(cfg_sink)] <= cfg_src;
    end
  end

  always_comb begin
    for (int d = 0; d < N_DIR; d++) begin
      for (int c = 0; c < D_CH; c++) dsrc[d*D_CH + c] = nb_in[d][c];
      for (int c = 0; c < C_CH; c++) csrc[d*C_CH + c] = nbc_in[d][c];
    end
    for (int k = 0; k < N_OUT;  k++) dsrc[N_DIR*D_CH + k] = pe_out[k];
    for (int k = 0; k < N_COUT; k++) csrc[N_DIR*C_CH + k] = pec_out[k];

    for (int s = 0; s < DSINK; s++)
      dsink[s] = (dsel[s] < 4'(DSRC)) ? dsrc[dsel[s]] : '0;
    for (int s = 0; s < CSINK; s++)
      csink[s] = (csel[s] < 4'(CSRC)) ? csrc[CIW'(csel[s])] : 1'b0;

    for (int d = 0; d < N_DIR; d++) begin
      for (int c = 0; c < D_CH; c++) nb_out[d][c]  = dsink[d*D_CH + c];
      for (int c = 0; c < C_CH; c++) nbc_out[d][c] = csink[d*C_CH + c];
    end
    for (int k = 0; k < N_IN;  k++) pe_in[k]  = dsink[N_DIR*D_CH + k];
    for (int k = 0; k < N_CIN; k++) pec_in[k] = csink[N_DIR*C_CH + k];
  end
endmodule

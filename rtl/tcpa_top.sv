// tcpa_top: invasive tightly coupled processor array (TCPA), ROWS x COLS PEs.
//
// The array of the paper's Fig. 1: a mesh of VLIW processing elements, each
// enclosed by an interconnect wrapper and paired with an invasion controller
// (iCtrl), surrounded by I/O buffers -- one per border PE and side, 16 for
// the 4x4 array. Power management units gate the iCtrl and PE power domains
// from the invasion state (Fig. 2: PMU_SIDE = 1 gives one iCtrl per domain,
// PMU_SIDE = 2 groups the iCtrls of each 2x2 block into one domain).
//
// Use: the control processor (outside this RTL) places an invade request on
// one of the four corner PEs, the invasion seeds (seed 0..3 = NW, NE, SW,
// SE corner). The region grows PE by PE; the seed answers with the number of
// PEs claimed. Claimed PEs get their PE domain powered. The control
// processor then loads instructions and wrapper routes into the claimed PEs
// through the cfg_* port (writes to PEs whose domain is off are dropped),
// fills the I/O buffers through the buf_* port and sets `run`. A retreat
// request on the same seed releases the region and powers it down.
//
// Networks: the data network (D_CH x DATA_W bits per direction) and the
// 1-bit control network (C_CH per direction) pass through the wrappers;
// border channels end in the I/O buffers (data both ways, the control bit out
// of the array strobes the buffer, the one into the array is its `avail`).
// The invasion network is a separate mesh of iCtrl links.
//
// Own choices: corner seeds, which parts are power gated (the PE with its
// instruction memory and register file; wrappers and I/O buffers stay on),
// the configuration and host ports, buffer depth.
// cfg_target: 0 instruction word, 1 wrapper select, 2 run bit.
//
// Lint note: the wrappers are combinational switches wired to each other in
// both directions, so the nb_out/nbc_out nets form structural loops through
// neighbouring wrappers (verilator reports them as UNOPTFLAT). The loops are
// real in the netlist but only close combinationally if the select registers
// route a channel back on itself (A -> B -> A); configurations that do that
// are invalid, as in any circuit-switched mesh. Valid routes always start at a
// PE output register or an I/O buffer, so the warning stands.
module tcpa_top
  import tcpa_pkg::*;
#(
  parameter int unsigned ROWS      = 4,
  parameter int unsigned COLS      = 4,
  parameter int unsigned PMU_SIDE  = 1,
  parameter int unsigned BUF_DEPTH = 256,
  parameter int unsigned NBUF      = 2*(ROWS+COLS),
  parameter int unsigned BAW       = $clog2(D_CH*BUF_DEPTH),
  parameter int unsigned RW        = (ROWS > 1) ? $clog2(ROWS) : 1,
  parameter int unsigned CLW       = (COLS > 1) ? $clog2(COLS) : 1,
  parameter int unsigned NGRP      = (ROWS/PMU_SIDE)*(COLS/PMU_SIDE)
) (
  input  logic              clk,
  input  logic              rst_n,
  // invasion seeds (control processor side)
  input  logic              seed_req_valid [4],
  input  inv_req_t          seed_req       [4],
  output logic              seed_req_ready [4],
  output logic              seed_rsp_valid [4],
  output inv_rsp_t          seed_rsp       [4],
  // configuration of PEs and wrappers
  input  logic              cfg_we,
  input  logic [RW-1:0]     cfg_row,
  input  logic [CLW-1:0]    cfg_col,
  input  logic [1:0]        cfg_target,
  input  logic [PC_W-1:0]   cfg_imem_addr,
  input  instr_t            cfg_imem_data,
  input  logic              cfg_wr_ctrl,
  input  logic [3:0]        cfg_wr_sink,
  input  logic [3:0]        cfg_wr_src,
  input  logic              cfg_run,
  // I/O buffers (host side)
  input  logic [$clog2(NBUF)-1:0] buf_sel,
  input  logic              buf_cfg_we,
  input  logic [3:0]        buf_cfg_addr,
  input  logic [BAW:0]      buf_cfg_wdata,
  input  logic              buf_we,
  input  logic              buf_re,
  input  logic              buf_chan,
  input  logic [BAW-1:0]    buf_addr,
  input  word_t             buf_wdata,
  output word_t             buf_rdata,
  output logic [BAW:0]      buf_level,
  // status and power switch enables
  output logic              pe_busy    [ROWS][COLS],
  output logic              pe_claimed [ROWS][COLS],
  output logic              pe_halted  [ROWS][COLS],
  output logic              pe_verr    [ROWS][COLS],
  output logic              pe_pwr_en  [ROWS][COLS],
  output logic              ictrl_pwr_en [NGRP]
);
  localparam int unsigned G  = PMU_SIDE*PMU_SIDE;
  localparam int unsigned GC = COLS/PMU_SIDE;

  // ---------------- nets ----------------
  word_t      nb_in   [ROWS][COLS][N_DIR][D_CH];
  word_t      nb_out  [ROWS][COLS][N_DIR][D_CH];
  logic       nbc_in  [ROWS][COLS][N_DIR][C_CH];
  logic       nbc_out [ROWS][COLS][N_DIR][C_CH];
  word_t      pe_od   [ROWS][COLS][N_OUT];
  word_t      pe_id   [ROWS][COLS][N_IN];
  logic [N_COUT-1:0] pe_oc [ROWS][COLS];
  logic [N_CIN-1:0]  pe_ic [ROWS][COLS];

  logic       rq_in_v  [ROWS][COLS][N_LNK];
  inv_req_t   rq_in    [ROWS][COLS][N_LNK];
  logic       rq_in_r  [ROWS][COLS][N_LNK];
  logic       rs_in_v  [ROWS][COLS][N_LNK];
  inv_rsp_t   rs_in    [ROWS][COLS][N_LNK];
  logic       rq_out_v [ROWS][COLS][N_LNK];
  inv_req_t   rq_out   [ROWS][COLS][N_LNK];
  logic       rq_out_r [ROWS][COLS][N_LNK];
  logic       rs_out_v [ROWS][COLS][N_LNK];
  inv_rsp_t   rs_out   [ROWS][COLS][N_LNK];

  logic       ic_pwr_ok [ROWS][COLS];
  logic       pe_pwr_ok [ROWS][COLS];
  logic       run_q     [ROWS][COLS];
  logic       wake      [ROWS][COLS];

  word_t      b_rd    [NBUF][D_CH];
  word_t      b_wd    [NBUF][D_CH];
  logic       b_strobe[NBUF];
  logic       b_avail [NBUF];
  word_t      b_hrd   [NBUF];
  logic [BAW:0] b_lvl [NBUF];

  function automatic int seed_of(int r, int c);
    if (r == 0      && c == 0)      return 0;
    if (r == 0      && c == COLS-1) return 1;
    if (r == ROWS-1 && c == 0)      return 2;
    if (r == ROWS-1 && c == COLS-1) return 3;
    return -1;
  endfunction

  // buffer on side d of border PE (r,c)
  function automatic int buf_of(int r, int c, int d);
    case (d)
      0:       return c;
      1:       return COLS + r;
      2:       return COLS + ROWS + c;
      default: return 2*COLS + ROWS + r;
    endcase
  endfunction

  for (genvar r = 0; r < ROWS; r++) begin : g_r
    for (genvar c = 0; c < COLS; c++) begin : g_c
      localparam int SEED = seed_of(r, c);
      localparam logic [3:0] PRESENT = {c > 0, r < ROWS-1, c < COLS-1, r > 0}; // W S E N

      // -------- neighbour wiring, per direction --------
      for (genvar d = 0; d < N_DIR; d++) begin : g_d
        localparam int NR = (d == 0) ? r-1 : (d == 2) ? r+1 : r;
        localparam int NC = (d == 1) ? c+1 : (d == 3) ? c-1 : c;
        localparam int OD = (d + 2) % 4;
        if (PRESENT[d]) begin : g_in
          for (genvar k = 0; k < D_CH; k++) begin : g_dk
            assign nb_in[r][c][d][k] = nb_out[NR][NC][OD][k];
          end
          for (genvar k = 0; k < C_CH; k++) begin : g_ck
            assign nbc_in[r][c][d][k] = nbc_out[NR][NC][OD][k];
          end
          assign rq_in_v[r][c][d]  = rq_out_v[NR][NC][OD];
          assign rq_in[r][c][d]    = rq_out[NR][NC][OD];
          assign rq_out_r[r][c][d] = rq_in_r[NR][NC][OD];
          assign rs_in_v[r][c][d]  = rs_out_v[NR][NC][OD];
          assign rs_in[r][c][d]    = rs_out[NR][NC][OD];
        end else begin : g_border
          localparam int B = buf_of(r, c, d);
          for (genvar k = 0; k < D_CH; k++) begin : g_dk
            assign nb_in[r][c][d][k] = b_rd[B][k];
            assign b_wd[B][k]        = nb_out[r][c][d][k];
          end
          assign nbc_in[r][c][d][0] = b_avail[B];
          assign b_strobe[B]        = nbc_out[r][c][d][0];
          for (genvar k = 1; k < C_CH; k++) begin : g_ck
            assign nbc_in[r][c][d][k] = 1'b0;
          end
          assign rq_in_v[r][c][d]  = 1'b0;
          assign rq_in[r][c][d]    = '0;
          assign rq_out_r[r][c][d] = 1'b0;
          assign rs_in_v[r][c][d]  = 1'b0;
          assign rs_in[r][c][d]    = '0;
        end
      end

      // -------- control processor link of the seeds --------
      if (SEED >= 0) begin : g_seed
        assign rq_in_v[r][c][LNK_HOST]  = seed_req_valid[SEED];
        assign rq_in[r][c][LNK_HOST]    = seed_req[SEED];
        assign seed_req_ready[SEED]     = rq_in_r[r][c][LNK_HOST];
        assign seed_rsp_valid[SEED]     = rs_out_v[r][c][LNK_HOST];
        assign seed_rsp[SEED]           = rs_out[r][c][LNK_HOST];
      end else begin : g_noseed
        assign rq_in_v[r][c][LNK_HOST]  = 1'b0;
        assign rq_in[r][c][LNK_HOST]    = '0;
      end
      assign rq_out_r[r][c][LNK_HOST] = 1'b1;
      assign rs_in_v[r][c][LNK_HOST]  = 1'b0;
      assign rs_in[r][c][LNK_HOST]    = '0;

      always_comb begin
        wake[r][c] = 1'b0;
        for (int l = 0; l < N_LNK; l++) wake[r][c] |= rq_in_v[r][c][l];
      end

      // -------- invasion controller --------
      ictrl u_ictrl (
        .clk           (clk),
        .rst_n         (rst_n),
        .pwr_on        (ic_pwr_ok[r][c]),
        .nbr_present   (PRESENT),
        .req_in_valid  (rq_in_v[r][c]),
        .req_in        (rq_in[r][c]),
        .req_in_ready  (rq_in_r[r][c]),
        .rsp_in_valid  (rs_in_v[r][c]),
        .rsp_in        (rs_in[r][c]),
        .req_out_valid (rq_out_v[r][c]),
        .req_out       (rq_out[r][c]),
        .req_out_ready (rq_out_r[r][c]),
        .rsp_out_valid (rs_out_v[r][c]),
        .rsp_out       (rs_out[r][c]),
        .busy          (pe_busy[r][c]),
        .claimed       (pe_claimed[r][c])
      );

      // -------- configuration --------
      logic sel_me;
      assign sel_me = cfg_we && cfg_row == RW'(r) && cfg_col == CLW'(c);

      always_ff @(posedge clk) begin
        if (!rst_n || !pe_pwr_ok[r][c])             run_q[r][c] <= 1'b0;
        else if (sel_me && cfg_target == 2'd2)      run_q[r][c] <= cfg_run;
      end

      // -------- processing element (own power domain) --------
      processing_element u_pe (
        .clk        (clk),
        .rst_n      (rst_n && pe_pwr_ok[r][c]),
        .run        (run_q[r][c]),
        .imem_we    (sel_me && cfg_target == 2'd0 && pe_pwr_ok[r][c]),
        .imem_waddr (cfg_imem_addr),
        .imem_wdata (cfg_imem_data),
        .id_in      (pe_id[r][c]),
        .ic_in      (pe_ic[r][c]),
        .od_out     (pe_od[r][c]),
        .oc_out     (pe_oc[r][c]),
        .pc         (),
        .halted     (pe_halted[r][c]),
        .verr       (pe_verr[r][c])
      );

      interconnect_wrapper u_wrap (
        .clk      (clk),
        .rst_n    (rst_n),
        .cfg_we   (sel_me && cfg_target == 2'd1),
        .cfg_ctrl (cfg_wr_ctrl),
        .cfg_sink (cfg_wr_sink),
        .cfg_src  (cfg_wr_src),
        .nb_in    (nb_in[r][c]),
        .nb_out   (nb_out[r][c]),
        .pe_out   (pe_od[r][c]),
        .pe_in    (pe_id[r][c]),
        .nbc_in   (nbc_in[r][c]),
        .nbc_out  (nbc_out[r][c]),
        .pec_out  (pe_oc[r][c]),
        .pec_in   (pe_ic[r][c])
      );
    end
  end

  // ---------------- power management ----------------
  for (genvar gi = 0; gi < NGRP; gi++) begin : g_pmu
    localparam int GR = (gi / GC) * PMU_SIDE;
    localparam int GCOL = (gi % GC) * PMU_SIDE;
    logic         g_wake;
    logic [G-1:0] g_busy, g_claimed, g_pe_en, g_pe_ok;
    logic         g_ok;

    always_comb begin
      g_wake = 1'b0;
      for (int m = 0; m < G; m++) begin
        g_wake       |= wake[GR + m/PMU_SIDE][GCOL + m%PMU_SIDE];
        g_busy[m]    = pe_busy[GR + m/PMU_SIDE][GCOL + m%PMU_SIDE];
        g_claimed[m] = pe_claimed[GR + m/PMU_SIDE][GCOL + m%PMU_SIDE];
      end
    end

    pmu #(.G(G)) u_pmu (
      .clk           (clk),
      .rst_n         (rst_n),
      .wake_req      (g_wake),
      .ictrl_busy    (g_busy),
      .ictrl_claimed (g_claimed),
      .ictrl_pwr_en  (ictrl_pwr_en[gi]),
      .ictrl_pwr_ok  (g_ok),
      .pe_pwr_en     (g_pe_en),
      .pe_pwr_ok     (g_pe_ok)
    );

    for (genvar m = 0; m < G; m++) begin : g_m
      assign ic_pwr_ok[GR + m/PMU_SIDE][GCOL + m%PMU_SIDE] = g_ok;
      assign pe_pwr_ok[GR + m/PMU_SIDE][GCOL + m%PMU_SIDE] = g_pe_ok[m];
      assign pe_pwr_en[GR + m/PMU_SIDE][GCOL + m%PMU_SIDE] = g_pe_en[m];
    end
  end

  // ---------------- I/O buffers ----------------
  for (genvar b = 0; b < NBUF; b++) begin : g_buf
    logic sel_b;
    assign sel_b = (buf_sel == $clog2(NBUF)'(b));
    io_buffer #(.DEPTH(BUF_DEPTH)) u_buf (
      .clk        (clk),
      .rst_n      (rst_n),
      .cfg_we     (buf_cfg_we && sel_b),
      .cfg_addr   (buf_cfg_addr),
      .cfg_wdata  (buf_cfg_wdata),
      .h_we       (buf_we && sel_b),
      .h_re       (buf_re && sel_b),
      .h_chan     (buf_chan),
      .h_addr     (buf_addr),
      .h_wdata    (buf_wdata),
      .h_rdata    (b_hrd[b]),
      .h_level    (b_lvl[b]),
      .arr_strobe (b_strobe[b]),
      .arr_wd     (b_wd[b]),
      .arr_rd     (b_rd[b]),
      .arr_avail  (b_avail[b])
    );
  end

  assign buf_rdata = b_hrd[buf_sel];
  assign buf_level = b_lvl[buf_sel];
endmodule

// interconnect_wrapper_tb: programs random routes for every sink of the data
// and control networks (including unconnected ones) and compares all
// outputs with a model of the select registers over random inputs.
module interconnect_wrapper_tb;
  import tcpa_pkg::*;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0, cfg_we = 0, cfg_ctrl = 0;
  logic [3:0] cfg_sink, cfg_src;
  word_t nb_in [N_DIR][D_CH], nb_out [N_DIR][D_CH];
  word_t pe_out [N_OUT], pe_in [N_IN];
  logic  nbc_in [N_DIR][C_CH], nbc_out [N_DIR][C_CH];
  logic [N_COUT-1:0] pec_out;
  logic [N_CIN-1:0]  pec_in;

  interconnect_wrapper dut (.*);
  always #5 clk = ~clk;

  localparam int DSRC = N_DIR*D_CH + N_OUT, DSINK = N_DIR*D_CH + N_IN;
  localparam int CSRC = N_DIR*C_CH + N_COUT, CSINK = N_DIR*C_CH + N_CIN;
  int dsel [DSINK], csel [CSINK];

  initial begin
    #2000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic word_t dsrc(int s);
    if (s < N_DIR*D_CH) return nb_in[s / D_CH][s % D_CH];
    if (s < DSRC)       return pe_out[s - N_DIR*D_CH];
    return '0;
  endfunction
  function automatic logic csrc(int s);
    if (s < N_DIR*C_CH) return nbc_in[s / C_CH][s % C_CH];
    if (s < CSRC)       return pec_out[s - N_DIR*C_CH];
    return 1'b0;
  endfunction

  task automatic compare();
    for (int d = 0; d < N_DIR; d++) begin
      for (int c = 0; c < D_CH; c++) begin
        checks++;
        if (nb_out[d][c] !== dsrc(dsel[d*D_CH+c])) begin failures++; $display("FAIL data out %0d/%0d", d, c); end
      end
      for (int c = 0; c < C_CH; c++) begin
        checks++;
        if (nbc_out[d][c] !== csrc(csel[d*C_CH+c])) begin failures++; $display("FAIL ctrl out %0d/%0d", d, c); end
      end
    end
    for (int k = 0; k < N_IN; k++) begin
      checks++;
      if (pe_in[k] !== dsrc(dsel[N_DIR*D_CH+k])) begin failures++; $display("FAIL pe_in %0d", k); end
    end
    for (int k = 0; k < N_CIN; k++) begin
      checks++;
      if (pec_in[k] !== csrc(csel[N_DIR*C_CH+k])) begin failures++; $display("FAIL pec_in %0d", k); end
    end
  endtask

  task automatic randomize_inputs();
    for (int d = 0; d < N_DIR; d++) begin
      for (int c = 0; c < D_CH; c++) nb_in[d][c] = word_t'($urandom);
      for (int c = 0; c < C_CH; c++) nbc_in[d][c] = 1'($urandom);
    end
    for (int k = 0; k < N_OUT; k++) pe_out[k] = word_t'($urandom);
    pec_out = N_COUT'($urandom);
  endtask

  initial begin
    for (int s = 0; s < DSINK; s++) dsel[s] = 15;
    for (int s = 0; s < CSINK; s++) csel[s] = 15;
    cfg_sink = '0; cfg_src = '0;
    randomize_inputs();
    repeat (2) @(negedge clk);
    rst_n = 1;
    #1 compare();                           // reset: everything unconnected
    repeat (400) begin
      @(negedge clk);
      cfg_we   = 1;
      cfg_ctrl = 1'($urandom);
      cfg_sink = 4'($urandom_range(0, 13));
      cfg_src  = 4'($urandom);
      if (!cfg_ctrl && cfg_sink < DSINK) dsel[cfg_sink] = cfg_src;
      if ( cfg_ctrl && cfg_sink < CSINK) csel[cfg_sink] = cfg_src;
      @(negedge clk);
      cfg_we = 0;
      repeat (3) begin
        randomize_inputs();
        #1 compare();
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

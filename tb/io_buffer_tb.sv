// io_buffer_tb: I/O buffer with 2 banks of 8 words. Checks FIFO mode in both
// directions (order, levels, full and empty), RAM mode with AGU addressing in
// both directions, and two banks concatenated into one 16-word FIFO.
module io_buffer_tb;
  import tcpa_pkg::*;
  int checks = 0, failures = 0;
  localparam int DEPTH = 8, BANKS = 2, AW = 4;
  logic clk = 0, rst_n = 0;
  logic cfg_we = 0; logic [3:0] cfg_addr = '0; logic [AW:0] cfg_wdata = '0;
  logic h_we = 0, h_re = 0; logic [0:0] h_chan = '0; logic [AW-1:0] h_addr = '0;
  word_t h_wdata = '0, h_rdata; logic [AW:0] h_level;
  logic arr_strobe = 0; word_t arr_wd [BANKS]; word_t arr_rd [BANKS]; logic arr_avail;

  io_buffer #(.DEPTH(DEPTH), .BANKS(BANKS)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(logic ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s (t=%0t)", what, $time); end
  endtask
  task automatic cfg(int a, int v);
    @(negedge clk); cfg_we = 1; cfg_addr = 4'(a); cfg_wdata = (AW+1)'(v);
    @(negedge clk); cfg_we = 0;
  endtask
  task automatic push(int ch, word_t v);
    @(negedge clk); h_we = 1; h_chan = 1'(ch); h_wdata = v;
    @(negedge clk); h_we = 0;
  endtask
  task automatic hwrite(int ch, int a, word_t v);
    @(negedge clk); h_we = 1; h_chan = 1'(ch); h_addr = AW'(a); h_wdata = v;
    @(negedge clk); h_we = 0;
  endtask
  task automatic strobe();
    @(negedge clk); arr_strobe = 1;
    @(negedge clk); arr_strobe = 0;
  endtask

  initial begin
    word_t q0 [$], q1 [$], v;
    arr_wd[0] = '0; arr_wd[1] = '0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    // ---- 1. both channels FIFO towards the array (reset configuration) ----
    cfg(0, 0);
    chk(!arr_avail, "empty FIFO: nothing available");
    for (int i = 0; i < 5; i++) begin v = word_t'($urandom); q0.push_back(v); push(0, v); end
    for (int i = 0; i < 3; i++) begin v = word_t'($urandom); q1.push_back(v); push(1, v); end
    h_chan = 0; #1 chk(h_level == 5, "level ch0");
    chk(arr_avail, "available");
    for (int i = 0; i < 5; i++) begin
      #1 chk(arr_rd[0] == q0[0], $sformatf("ch0 head %0d", i));
      if (q1.size() != 0) chk(arr_rd[1] == q1[0], $sformatf("ch1 head %0d", i));
      strobe();
      void'(q0.pop_front());
      if (q1.size() != 0) void'(q1.pop_front());
    end
    #1 chk(!arr_avail && h_level == 0, "ch0 drained");
    // full: 8 pushes fill, the 9th is refused
    for (int i = 0; i < 9; i++) push(0, word_t'(100 + i));
    h_chan = 0; #1 chk(h_level == 8, "full at DEPTH");
    for (int i = 0; i < 8; i++) begin #1 chk(arr_rd[0] == word_t'(100 + i), "order after wrap"); strobe(); end

    // ---- 2. ch0 FIFO from the array, ch1 RAM towards the array ----
    // ctrl = {concat, dir[1:0], mode[1:0]}: dir0 = 1, mode1 = 1
    cfg(1 + 3, 2);  // ch1 AGU base 2
    cfg(2 + 3, 3);  // ch1 stride 3
    cfg(3 + 3, 2);  // ch1 length 2: addresses 2, 5, 2, 5 ...
    cfg(0, 5'b0_01_10);
    for (int a = 0; a < DEPTH; a++) hwrite(1, a, word_t'(16'h700 + a));
    for (int i = 0; i < 6; i++) begin
      arr_wd[0] = word_t'(16'h500 + i);
      #1 chk(arr_rd[1] == word_t'(16'h700 + ((i % 2) ? 5 : 2)), $sformatf("RAM read via AGU %0d", i));
      strobe();
    end
    h_chan = 0; #1 chk(h_level == 6, "ch0 collected 6 words from the array");
    for (int i = 0; i < 6; i++) begin
      h_chan = 0; #1 chk(h_rdata == word_t'(16'h500 + i), "host pops array words in order");
      @(negedge clk); h_re = 1; @(negedge clk); h_re = 0;
    end
    #1 chk(h_level == 0, "ch0 empty after host pops");

    // ---- 3. ch1 RAM from the array ----
    cfg(1 + 3, 1); cfg(2 + 3, 2); cfg(3 + 3, 0);   // base 1, stride 2, whole channel
    cfg(0, 5'b0_10_10);
    for (int i = 0; i < 3; i++) begin arr_wd[1] = word_t'(16'h900 + i); strobe(); end
    for (int i = 0; i < 3; i++) begin
      h_chan = 1; h_addr = AW'(1 + 2*i); #1 chk(h_rdata == word_t'(16'h900 + i), "array wrote RAM at AGU addresses");
    end

    // ---- 4. concatenated: one 16-word FIFO on channel 0 ----
    cfg(0, 5'b1_00_00);
    for (int i = 0; i < 17; i++) push(0, word_t'(16'h300 + i));
    h_chan = 0; #1 chk(h_level == 16, "concatenated capacity 2*DEPTH");
    chk(arr_rd[1] == '0, "channel 1 idle when concatenated");
    for (int i = 0; i < 16; i++) begin #1 chk(arr_rd[0] == word_t'(16'h300 + i), "concatenated order"); strobe(); end
    #1 chk(!arr_avail, "concatenated FIFO empty");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

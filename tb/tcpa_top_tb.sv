// tcpa_top_tb: end-to-end run of the 4x4 array at its default parameters.
//
//  1. Two applications invade at once: a linear chain of 4 PEs from the
//     north-west seed and a 2x2 rectangle from the south-east seed. Every
//     iCtrl starts unpowered, so each hop waits for its power domain.
//  2. A third application asks the south-west seed for 16 PEs in a linear
//     chain; it meanders through the free PEs, is rejected by the busy ones
//     and ends with the 8 that are left (the seed reports 8).
//  3. The third application retreats: its 8 PEs and iCtrls are powered off.
//  4. The chain runs a 4-stage streaming pipeline: 300 samples leave the
//     west I/O buffer (two banks concatenated, FIFO mode), each PE adds its
//     constant and passes the value east one hop per cycle, the east buffer
//     (concatenated FIFO) collects the results. Checks values, order and
//     the throughput of one sample per cycle.
//  5. The rectangle runs triple modular redundancy: two PEs compute a
//     replica each and pass it to the corner PE, which computes the third,
//     votes with its voter FU and writes the result into a RAM-mode buffer
//     at its AGU address. One replica is made faulty: the vote must mask it
//     and raise the voter error flag.
//  6. Both applications retreat; all domains are off at the end.
// Each mechanism is counted; one that never happened counts as a failure.
module tcpa_top_tb;
  import tcpa_pkg::*;
  localparam int ROWS = 4, COLS = 4, NBUF = 16, BAW = 9, NSAMP = 300;
  int checks = 0, failures = 0;

  logic clk = 0, rst_n = 0;
  logic seed_req_valid [4]; inv_req_t seed_req [4]; logic seed_req_ready [4];
  logic seed_rsp_valid [4]; inv_rsp_t seed_rsp [4];
  logic cfg_we = 0; logic [1:0] cfg_row = 0, cfg_col = 0, cfg_target = 0;
  logic [PC_W-1:0] cfg_imem_addr = 0; instr_t cfg_imem_data;
  logic cfg_wr_ctrl = 0; logic [3:0] cfg_wr_sink = 0, cfg_wr_src = 0; logic cfg_run = 0;
  logic [3:0] buf_sel = 0; logic buf_cfg_we = 0; logic [3:0] buf_cfg_addr = 0;
  logic [BAW:0] buf_cfg_wdata = 0; logic buf_we = 0, buf_re = 0, buf_chan = 0;
  logic [BAW-1:0] buf_addr = 0; word_t buf_wdata = 0, buf_rdata; logic [BAW:0] buf_level;
  logic pe_busy [ROWS][COLS], pe_claimed [ROWS][COLS], pe_halted [ROWS][COLS];
  logic pe_verr [ROWS][COLS], pe_pwr_en [ROWS][COLS];
  logic ictrl_pwr_en [16];

  tcpa_top dut (.*);
  always #5 clk = ~clk;

  // ---------------- mechanism counters ----------------
  int n_lin = 0, n_rect = 0, n_partial = 0, n_retreat = 0, n_ic_on = 0, n_ic_off = 0;
  int n_pe_on = 0, n_pe_off = 0, n_wait_pwr = 0, n_fifo_in = 0, n_fifo_out = 0;
  int n_concat = 0, n_ram = 0, n_vote_mask = 0, n_vote_err = 0, n_halt = 0;
  logic ic_prev [16]; logic pe_prev [ROWS][COLS];
  int cyc = 0;
  inv_rsp_t rsp_q [4][$];

  initial begin
    #20ms;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) begin
    cyc <= cyc + 1;
    for (int s = 0; s < 4; s++) begin
      if (rst_n && seed_rsp_valid[s]) rsp_q[s].push_back(seed_rsp[s]);
      if (seed_req_valid[s] && !seed_req_ready[s] && !ictrl_pwr_en[s == 0 ? 0 : s == 1 ? 3 : s == 2 ? 12 : 15])
        n_wait_pwr <= n_wait_pwr + 1;
    end
    for (int g = 0; g < 16; g++) begin
      if (rst_n && ictrl_pwr_en[g] && !ic_prev[g]) n_ic_on  <= n_ic_on + 1;
      if (rst_n && !ictrl_pwr_en[g] && ic_prev[g]) n_ic_off <= n_ic_off + 1;
      ic_prev[g] <= ictrl_pwr_en[g];
    end
    for (int r = 0; r < ROWS; r++) for (int c = 0; c < COLS; c++) begin
      if (rst_n && pe_pwr_en[r][c] && !pe_prev[r][c]) n_pe_on  <= n_pe_on + 1;
      if (rst_n && !pe_pwr_en[r][c] && pe_prev[r][c]) n_pe_off <= n_pe_off + 1;
      pe_prev[r][c] <= pe_pwr_en[r][c];
    end
  end

  task automatic chk(logic ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s (t=%0t)", what, $time); end
  endtask

  // ---------------- control processor side ----------------
  function automatic inv_req_t mk(req_kind_e k, int n, int h, logic dxw, logic dyn);
    inv_req_t r;
    r.kind = k; r.n = CNT_W'(n); r.h = CNT_W'(h); r.col_only = 0; r.dx_w = dxw; r.dy_n = dyn;
    return r;
  endfunction

  task automatic offer(int s, inv_req_t r);
    @(negedge clk);
    seed_req_valid[s] = 1; seed_req[s] = r;
    do @(posedge clk); while (!seed_req_ready[s]);
    @(negedge clk) seed_req_valid[s] = 0;
  endtask

  task automatic answer(int s, rsp_kind_e k, int cnt, string what);
    int t = 0;
    inv_rsp_t r;
    while (rsp_q[s].size() == 0 && t < 2000) begin @(negedge clk); t++; end
    chk(rsp_q[s].size() != 0, {what, ": seed answered"});
    if (rsp_q[s].size() != 0) begin
      r = rsp_q[s].pop_front();
      chk(r.kind == k && r.cnt == CNT_W'(cnt),
          $sformatf("%s: answer %s/%0d, expected %s/%0d", what, r.kind.name(), r.cnt, k.name(), cnt));
    end
  endtask

  // ---------------- configuration ----------------
  function automatic instr_t nop();
    instr_t i;
    i = '0;
    i.alu_op = ALU_NOP; i.mul_op = MUL_NOP; i.vot_op = VOT_NOP; i.br_op = BR_NEXT;
    return i;
  endfunction
  task automatic load(int r, int c, int a, instr_t w);
    @(negedge clk);
    cfg_we = 1; cfg_row = 2'(r); cfg_col = 2'(c); cfg_target = 2'd0; cfg_imem_addr = PC_W'(a); cfg_imem_data = w;
    @(negedge clk) cfg_we = 0;
  endtask
  task automatic route(int r, int c, logic ctl, int sink, int src);
    @(negedge clk);
    cfg_we = 1; cfg_row = 2'(r); cfg_col = 2'(c); cfg_target = 2'd1;
    cfg_wr_ctrl = ctl; cfg_wr_sink = 4'(sink); cfg_wr_src = 4'(src);
    @(negedge clk) cfg_we = 0;
  endtask
  task automatic set_run(int r, int c, logic v);
    @(negedge clk);
    cfg_we = 1; cfg_row = 2'(r); cfg_col = 2'(c); cfg_target = 2'd2; cfg_run = v;
    @(negedge clk) cfg_we = 0;
  endtask
  task automatic buf_cfg(int b, int a, int v);
    @(negedge clk);
    buf_sel = 4'(b); buf_cfg_we = 1; buf_cfg_addr = 4'(a); buf_cfg_wdata = (BAW+1)'(v);
    @(negedge clk) buf_cfg_we = 0;
  endtask

  // data sinks / sources of a wrapper: dir*2 + ch (N,E,S,W), PE port 8 + k
  // control sinks / sources: dir (N,E,S,W), PE port 4 + k
  localparam int D_E0 = 2, D_S0 = 4, D_W0 = 6, D_N0 = 0, D_PE0 = 8, D_PE1 = 9;
  localparam int C_N = 0, C_E = 1, C_W = 3, C_PE0 = 4, C_PE1 = 5;
  localparam int BUF_W0 = 12, BUF_E0 = 4, BUF_E3 = 7;

  int claimed_cnt;
  function automatic int count_claimed();
    int n = 0;
    for (int r = 0; r < ROWS; r++) for (int c = 0; c < COLS; c++) n += pe_claimed[r][c];
    return n;
  endfunction

  initial begin
    instr_t w;
    word_t samples [NSAMP];
    int k_sum, t0, t;
    for (int s = 0; s < 4; s++) begin seed_req_valid[s] = 0; seed_req[s] = '0; end
    cfg_imem_data = nop();
    repeat (3) @(negedge clk);
    rst_n = 1;
    repeat (2) @(negedge clk);
    chk(count_claimed() == 0, "nothing claimed after reset");

    // ---- 1. two invasions at once ----
    fork
      begin offer(0, mk(REQ_INV_LIN, 4, 0, 0, 0)); answer(0, RSP_CONFIRM, 4, "linear 4 from NW"); n_lin++; end
      begin offer(3, mk(REQ_INV_RECT, 2, 2, 1, 1)); answer(3, RSP_CONFIRM, 4, "rectangle 2x2 from SE"); n_rect++; end
    join
    repeat (10) @(negedge clk);
    chk(pe_claimed[0][0] && pe_claimed[0][1] && pe_claimed[0][2] && pe_claimed[0][3], "row 0 claimed");
    chk(pe_claimed[3][3] && pe_claimed[3][2] && pe_claimed[2][3] && pe_claimed[2][2], "SE 2x2 claimed");
    chk(count_claimed() == 8, "exactly 8 claimed");
    chk(pe_pwr_en[0][2] && pe_pwr_en[2][2] && !pe_pwr_en[1][1], "PE domains follow the claims");
    chk(!ictrl_pwr_en[5], "untouched iCtrl stays off");

    // ---- 2. linear 16 from SW gets what is left ----
    offer(2, mk(REQ_INV_LIN, 16, 0, 0, 1));
    answer(2, RSP_CONFIRM, 8, "linear 16 from SW, 8 left");
    n_lin++; n_partial++;
    repeat (10) @(negedge clk);
    chk(count_claimed() == 16, "whole array claimed");

    // ---- 3. retreat of the third application ----
    offer(2, mk(REQ_RETREAT, 0, 0, 0, 0));
    answer(2, RSP_RET_ACK, 0, "retreat SW");
    n_retreat++;
    repeat (10) @(negedge clk);
    chk(count_claimed() == 8 && !pe_pwr_en[1][1] && !pe_pwr_en[3][0], "SW region released and powered off");
    chk(!ictrl_pwr_en[12] && !ictrl_pwr_en[5] && ictrl_pwr_en[0], "iCtrl domains of the released region off");

    // ---- 4. streaming pipeline on the chain ----
    buf_cfg(BUF_W0, 0, 5'b1_00_00);          // concatenated FIFO towards the array
    buf_cfg(BUF_E0, 0, 5'b1_01_00);          // concatenated FIFO from the array
    for (int i = 0; i < NSAMP; i++) begin
      samples[i] = word_t'($urandom);
      @(negedge clk); buf_sel = 4'(BUF_W0); buf_we = 1; buf_chan = 0; buf_wdata = samples[i];
    end
    @(negedge clk) buf_we = 0;
    buf_sel = 4'(BUF_W0); #1 chk(buf_level == NSAMP, "input buffer holds all samples (two banks)");
    if (NSAMP > 256 && buf_level == NSAMP) n_concat++;
    k_sum = 0;
    for (int c = 0; c < COLS; c++) begin
      route(0, c, 0, D_PE0, D_W0);           // ID0 <- west
      route(0, c, 0, D_E0, 8);               // east <- OD0
      route(0, c, 1, C_PE0, C_W);            // IC0 <- west control
      route(0, c, 1, C_E, c == 0 ? C_PE1 : C_PE0);   // valid east
      w = nop();
      w.alu_op = ALU_ADD; w.alu_dst = RA_OUT; w.alu_a = RA_IN; w.alu_b = RA_IMM; w.imm = word_t'(c + 1);
      w.mul_op = MUL_LO;  w.mul_dst = (c == 0) ? RA_COUT + 5'd1 : RA_COUT; w.mul_a = RA_CIN; w.mul_b = RA_CIN;
      w.br_op  = BR_JMP;  w.br_target = (c == 0) ? 5'd1 : 5'd0;
      k_sum += c + 1;
      if (c == 0) begin
        route(0, 0, 1, C_W, C_PE0);          // strobe of the input buffer
        load(0, 0, 1, w);
        w = nop(); w.alu_op = ALU_MOV; w.alu_dst = RA_COUT; w.alu_a = RA_IMM; w.imm = 16'd1;
        load(0, 0, 0, w);
      end else begin
        load(0, c, 0, w);
      end
    end
    for (int c = COLS-1; c >= 0; c--) set_run(0, c, 1);
    t0 = cyc;
    buf_sel = 4'(BUF_E0);
    t = 0;
    while (buf_level < NSAMP && t < 2*NSAMP) begin @(negedge clk); t++; end
    chk(buf_level == NSAMP, $sformatf("all samples arrived (%0d)", buf_level));
    chk(cyc - t0 <= NSAMP + 8, $sformatf("one sample per cycle: %0d cycles for %0d samples", cyc - t0, NSAMP));
    n_fifo_in += NSAMP;
    for (int i = 0; i < NSAMP; i++) begin
      buf_sel = 4'(BUF_E0); buf_chan = 0; #1;
      chk(buf_rdata == word_t'(samples[i] + k_sum), $sformatf("sample %0d: %h expected %h", i, buf_rdata, word_t'(samples[i] + k_sum)));
      n_fifo_out++;
      @(negedge clk) buf_re = 1; @(negedge clk) buf_re = 0;
    end
    for (int c = 0; c < COLS; c++) set_run(0, c, 0);

    // ---- 5. TMR on the rectangle ----
    buf_cfg(BUF_E3, 1, 5);                    // AGU base 5
    buf_cfg(BUF_E3, 0, 5'b0_01_01);           // channel 0 RAM from the array
    // replicas: (3,2) correct, (2,3) hit by an upset
    w = nop(); w.mul_op = MUL_LO; w.mul_dst = RA_OUT; w.mul_a = RA_IMM; w.mul_b = RA_IMM; w.imm = 16'd7;
    w.br_op = BR_HALT;
    load(3, 2, 0, w); route(3, 2, 0, D_E0, 8);
    w.imm = 16'd7 ^ 16'h0100; w.br_op = BR_NEXT;   // faulty replica
    load(2, 3, 0, w); route(2, 3, 0, D_S0, 8);
    w = nop(); w.alu_op = ALU_MOV; w.alu_dst = RA_COUT; w.alu_a = RA_IMM; w.imm = 16'd1; w.br_op = BR_HALT;
    load(2, 3, 1, w);                         // go bit raised after the replica is out
    route(2, 3, 1, 2, C_PE0);                 // (2,3) control south <- its OC0
    // voter PE (3,3)
    w = nop(); w.mul_op = MUL_LO; w.mul_dst = 5'd0; w.mul_a = RA_IMM; w.mul_b = RA_IMM; w.imm = 16'd7;
    load(3, 3, 0, w);
    w = nop(); w.br_op = BR_IFN; w.br_cond = CND_IC0; w.br_target = 5'd1;   // wait for the go bit
    load(3, 3, 1, w);
    w = nop(); w.vot_op = VOT_TMR; w.vot_dst = RA_OUT; w.vot_a = 5'd0; w.vot_b = RA_IN; w.vot_c = RA_IN + 5'd1;
    w.alu_op = ALU_MOV; w.alu_dst = RA_COUT; w.alu_a = RA_IMM; w.imm = 16'd1;
    load(3, 3, 2, w);
    w = nop(); w.alu_op = ALU_MOV; w.alu_dst = RA_COUT; w.alu_a = RA_IMM; w.imm = 16'd0; w.br_op = BR_HALT;
    load(3, 3, 3, w);
    route(3, 3, 0, D_PE0, D_W0);
    route(3, 3, 0, D_PE1, D_N0);
    route(3, 3, 0, D_E0, 8);
    route(3, 3, 1, C_E, C_PE0);
    route(3, 3, 1, C_PE0, C_N);              // go bit: control from (2,3)
    set_run(3, 3, 1);
    set_run(3, 2, 1);
    set_run(2, 3, 1);
    t = 0;
    while (!pe_halted[3][3] && t < 100) begin @(negedge clk); t++; end
    chk(pe_halted[3][3] && pe_halted[3][2] && pe_halted[2][3], "TMR programs halted");
    n_halt += pe_halted[3][3];
    buf_sel = 4'(BUF_E3); buf_chan = 0; buf_addr = 9'd5; #1;
    chk(buf_rdata == 16'd49, $sformatf("voted result %0d at RAM address 5", buf_rdata));
    if (buf_rdata == 16'd49) begin n_vote_mask++; n_ram++; end
    chk(pe_verr[3][3], "voter error flag raised by the faulty replica");
    n_vote_err += pe_verr[3][3];
    for (int c = 2; c < 4; c++) begin set_run(3, c, 0); set_run(2, c, 0); end

    // ---- 6. retreat both ----
    fork
      begin offer(0, mk(REQ_RETREAT, 0, 0, 0, 0)); answer(0, RSP_RET_ACK, 0, "retreat NW"); n_retreat++; end
      begin offer(3, mk(REQ_RETREAT, 0, 0, 0, 0)); answer(3, RSP_RET_ACK, 0, "retreat SE"); n_retreat++; end
    join
    repeat (10) @(negedge clk);
    chk(count_claimed() == 0, "all released");
    begin
      int on = 0;
      for (int g = 0; g < 16; g++) on += ictrl_pwr_en[g];
      for (int r = 0; r < ROWS; r++) for (int c = 0; c < COLS; c++) on += pe_pwr_en[r][c];
      chk(on == 0, "all power domains off");
    end

    // ---- mechanisms ----
    $display("mechanisms: linear=%0d rect=%0d partial=%0d retreat=%0d ictrl_on=%0d ictrl_off=%0d pe_on=%0d pe_off=%0d wait_for_power=%0d fifo_in=%0d fifo_out=%0d concat=%0d ram=%0d vote_mask=%0d vote_err=%0d halt=%0d",
             n_lin, n_rect, n_partial, n_retreat, n_ic_on, n_ic_off, n_pe_on, n_pe_off, n_wait_pwr,
             n_fifo_in, n_fifo_out, n_concat, n_ram, n_vote_mask, n_vote_err, n_halt);
    chk(n_lin > 0, "linear invasion happened");        chk(n_rect > 0, "rectangular invasion happened");
    chk(n_partial > 0, "partial invasion happened");   chk(n_retreat > 0, "retreat happened");
    chk(n_ic_on > 0 && n_ic_off > 0, "iCtrl power switching happened");
    chk(n_pe_on > 0 && n_pe_off > 0, "PE power switching happened");
    chk(n_wait_pwr > 0, "request waited for power");   chk(n_fifo_in > 0 && n_fifo_out > 0, "FIFO streaming happened");
    chk(n_concat > 0, "bank concatenation happened");  chk(n_ram > 0, "RAM mode happened");
    chk(n_vote_mask > 0 && n_vote_err > 0, "TMR vote happened");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

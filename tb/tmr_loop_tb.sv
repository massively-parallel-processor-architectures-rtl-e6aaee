// tmr_loop_tb: the triple-modular-redundant loop of the paper's Fig. 4(a),
// run on the 4x4 array with the iCtrls grouped in 2x2 power domains (Fig. 2(b)).
//
// First a one-PE invasion from the south-east seed shows the grouped power
// domain: only the south-east group's iCtrl domain and the one PE domain come
// on. Then a 3x3 rectangle is invaded from the north-west seed. Each of its
// three rows is one replica of the loop y[j1] = y[j1-1] (j1 > 0), y[0] = Y:
// the first PE of a row takes Y from its west I/O buffer and every PE passes
// y one hop east per cycle. The last PEs of rows 0 and 2 send their y to the
// last PE of the middle row, whose voter FU votes over the three replicas
// (the loop's "v = Vote(y, y1, y2) if j1 == N1-1") and streams the voted value
// to the east I/O buffer of its row (through the wrapper of the
// fourth, unclaimed PE of the row, which passes it on). The last sample of row 2's input is corrupted
// (a single bit upset): every voted output must still equal Y and the
// voter error flag must be set. Checks throughput (one sample per cycle).
module tmr_loop_tb;
  import tcpa_pkg::*;
  localparam int ROWS = 4, COLS = 4, BAW = 9, NSAMP = 64;
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
  logic ictrl_pwr_en [4];

  tcpa_top #(.PMU_SIDE(2)) dut (.*);
  always #5 clk = ~clk;

  int cyc = 0;
  inv_rsp_t rsp_q [4][$];
  always @(posedge clk) begin
    cyc <= cyc + 1;
    for (int s = 0; s < 4; s++) if (rst_n && seed_rsp_valid[s]) rsp_q[s].push_back(seed_rsp[s]);
  end

  initial begin
    #20ms;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(logic ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s (t=%0t)", what, $time); end
  endtask
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
      chk(r.kind == k && r.cnt == CNT_W'(cnt), $sformatf("%s: answer %s/%0d", what, r.kind.name(), r.cnt));
    end
  endtask
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

  localparam int D_N0 = 0, D_E0 = 2, D_S0 = 4, D_W0 = 6, D_PE0 = 8, D_PE1 = 9, D_PE2 = 10;
  localparam int C_E = 1, C_W = 3, C_PE0 = 4, C_PE1 = 5;

  int npe, ngrp;

  initial begin
    instr_t w;
    word_t y [NSAMP];
    int t0, t;
    for (int s = 0; s < 4; s++) begin seed_req_valid[s] = 0; seed_req[s] = '0; end
    cfg_imem_data = nop();
    repeat (3) @(negedge clk);
    rst_n = 1;
    repeat (2) @(negedge clk);

    // ---- grouped power domain ----
    offer(3, mk(REQ_INV_LIN, 1, 0, 1, 1));
    answer(3, RSP_CONFIRM, 1, "one PE from SE");
    repeat (8) @(negedge clk);
    chk(ictrl_pwr_en[3] && !ictrl_pwr_en[0] && !ictrl_pwr_en[1] && !ictrl_pwr_en[2], "only the SE group iCtrl domain on");
    npe = 0;
    for (int r = 0; r < ROWS; r++) for (int c = 0; c < COLS; c++) npe += pe_pwr_en[r][c];
    chk(npe == 1 && pe_pwr_en[3][3], "only the claimed PE domain on");
    offer(3, mk(REQ_RETREAT, 0, 0, 0, 0));
    answer(3, RSP_RET_ACK, 0, "retreat SE");
    repeat (4) @(negedge clk);
    chk(!ictrl_pwr_en[3] && !pe_pwr_en[3][3], "SE group off again");

    // ---- 3x3 rectangle for the three replicas ----
    offer(0, mk(REQ_INV_RECT, 3, 3, 0, 0));
    answer(0, RSP_CONFIRM, 9, "3x3 rectangle from NW");
    repeat (8) @(negedge clk);
    ngrp = 0;
    for (int g = 0; g < 4; g++) ngrp += ictrl_pwr_en[g];
    chk(ngrp == 4, "all four groups have a claimed member and are on");
    chk(pe_pwr_en[2][2] && !pe_pwr_en[3][3] && !pe_pwr_en[0][3], "PE domains only inside the rectangle");

    // inputs: Y on the west buffers of rows 0..2, the last sample of row 2 upset
    for (int i = 0; i < NSAMP; i++) y[i] = word_t'($urandom);
    buf_cfg(5, 0, 5'b0_01_00);                    // east buffer of row 1: FIFO from the array
    for (int r = 0; r < 3; r++) begin
      buf_cfg(12 + r, 0, 0);                      // FIFO towards the array
      for (int i = 0; i < NSAMP; i++) begin
        @(negedge clk); buf_sel = 4'(12 + r); buf_we = 1; buf_chan = 0;
        buf_wdata = (r == 2 && i == NSAMP-1) ? (y[i] ^ 16'h0020) : y[i];
      end
      @(negedge clk) buf_we = 0;
    end

    // programs and routes
    for (int r = 0; r < 3; r++) begin
      for (int c = 0; c < 3; c++) begin
        route(r, c, 0, D_PE0, D_W0);  route(r, c, 1, C_PE0, C_W);
        w = nop();
        if (r == 1 && c == 2) begin
          // own replica delayed one cycle in RD0 to meet the replicas of rows 0 and 2,
          // which arrive one hop later; their valid bit (from the north) is forwarded
          w.alu_op = ALU_MOV; w.alu_dst = 5'd0; w.alu_a = RA_IN;
          w.vot_op = VOT_TMR; w.vot_dst = RA_OUT; w.vot_a = 5'd0; w.vot_b = RA_IN + 5'd1; w.vot_c = RA_IN + 5'd2;
          route(r, c, 0, D_PE1, D_N0); route(r, c, 0, D_PE2, D_S0); route(r, c, 1, C_PE1, 0);
        end else begin
          w.alu_op = ALU_MOV; w.alu_dst = RA_OUT; w.alu_a = RA_IN;
        end
        w.mul_op = MUL_LO; w.mul_dst = (c == 0) ? RA_COUT + 5'd1 : RA_COUT;
        w.mul_a = (r == 1 && c == 2) ? RA_CIN + 5'd1 : RA_CIN; w.mul_b = w.mul_a;
        // y and valid leave east, except the last PEs of rows 0 and 2
        if (c < 2 || r == 1) begin
          route(r, c, 0, D_E0, 8); route(r, c, 1, C_E, (c == 0) ? C_PE1 : C_PE0);
        end else begin
          route(r, c, 0, (r == 0) ? D_S0 : D_N0, 8);
          if (r == 0) route(r, c, 1, 2, C_PE0);   // valid south
        end
        if (c == 0) begin
          // start pads align the three rows, which are started 2 cycles apart
          for (int p = 0; p < 2*(2-r); p++) load(r, c, p, nop());
          w.br_op = BR_JMP; w.br_target = PC_W'(2*(2-r) + 1);
          load(r, c, 2*(2-r) + 1, w);
          w = nop(); w.alu_op = ALU_MOV; w.alu_dst = RA_COUT; w.alu_a = RA_IMM; w.imm = 16'd1;
          load(r, c, 2*(2-r), w);
          route(r, c, 1, C_W, C_PE0);             // strobe of the west buffer
        end else begin
          w.br_op = BR_JMP; w.br_target = 5'd0;
          load(r, c, 0, w);
        end
      end
    end
    // the wrapper of (1,3), outside the region, passes the voted stream to the border
    route(1, 3, 0, D_E0, D_W0); route(1, 3, 1, C_E, C_W);
    for (int r = 0; r < 3; r++) for (int c = 1; c < 3; c++) set_run(r, c, 1);
    for (int r = 0; r < 3; r++) set_run(r, 0, 1);
    t0 = cyc;
    buf_sel = 4'(5);
    t = 0;
    while (buf_level < NSAMP && t < 4*NSAMP) begin @(negedge clk); t++; end
    chk(buf_level == NSAMP, $sformatf("all voted samples arrived (%0d)", buf_level));
    chk(cyc - t0 <= NSAMP + 12, $sformatf("%0d cycles for %0d samples", cyc - t0, NSAMP));
    for (int i = 0; i < NSAMP; i++) begin
      buf_sel = 4'(5); buf_chan = 0; #1;
      chk(buf_rdata == y[i], $sformatf("voted y %0d: %h expected %h", i, buf_rdata, y[i]));
      @(negedge clk) buf_re = 1; @(negedge clk) buf_re = 0;
    end
    chk(pe_verr[1][2], "voter flagged the upset replica");
    for (int r = 0; r < 3; r++) for (int c = 0; c < 3; c++) set_run(r, c, 0);
    offer(0, mk(REQ_RETREAT, 0, 0, 0, 0));
    answer(0, RSP_RET_ACK, 0, "retreat NW");
    repeat (6) @(negedge clk);
    ngrp = 0;
    for (int g = 0; g < 4; g++) ngrp += ictrl_pwr_en[g];
    chk(ngrp == 0, "all groups off after the retreat");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

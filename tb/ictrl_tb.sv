// ictrl_tb: one invasion controller with the testbench playing its four
// neighbours and the control processor. Covers: leaf confirm, linear
// forwarding and turn after a reject, rectangular forwarding to row and
// column, reject while busy, retreat along the recorded path with
// acknowledgement, a request held while the controller is unpowered, a
// request held by a neighbour that is not ready, a rectangle shrunk by a
// busy neighbour (smaller count, retreat skips it), and the one-cycle-per-hop
// latency.
module ictrl_tb;
  import tcpa_pkg::*;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0, pwr_on = 0;
  logic [3:0] nbr_present = 4'b1111;
  logic     req_in_valid [N_LNK];
  inv_req_t req_in       [N_LNK];
  logic     req_in_ready [N_LNK];
  logic     rsp_in_valid [N_LNK];
  inv_rsp_t rsp_in       [N_LNK];
  logic     req_out_valid[N_LNK];
  inv_req_t req_out      [N_LNK];
  logic     req_out_ready[N_LNK];
  logic     rsp_out_valid[N_LNK];
  inv_rsp_t rsp_out      [N_LNK];
  logic     busy, claimed;

  ictrl dut (.*);
  always #5 clk = ~clk;

  inv_req_t got_req [N_LNK][$];
  inv_rsp_t got_rsp [N_LNK][$];
  int       req_cycle [N_LNK][$];
  int       rsp_cycle [N_LNK][$];
  logic     hold_ready = 0;
  int       cyc = 0;

  initial begin
    #2000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) begin
    cyc <= cyc + 1;
    for (int l = 0; l < N_LNK; l++) begin
      if (req_out_valid[l] && req_out_ready[l]) begin got_req[l].push_back(req_out[l]); req_cycle[l].push_back(cyc); end
      if (rsp_out_valid[l]) begin got_rsp[l].push_back(rsp_out[l]); rsp_cycle[l].push_back(cyc); end
    end
  end
  always_comb for (int l = 0; l < N_LNK; l++) req_out_ready[l] = !hold_ready;

  task automatic chk(logic ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s (t=%0t)", what, $time); end
  endtask

  function automatic inv_req_t mk(req_kind_e k, int n, int h, logic col, logic dxw, logic dyn);
    inv_req_t r;
    r.kind = k; r.n = CNT_W'(n); r.h = CNT_W'(h); r.col_only = col; r.dx_w = dxw; r.dy_n = dyn;
    return r;
  endfunction

  // offer a request on link l until it is taken; returns the cycle it was taken
  task automatic send_req(int l, inv_req_t r, output int taken);
    @(negedge clk);
    req_in_valid[l] = 1; req_in[l] = r;
    do @(posedge clk); while (!req_in_ready[l]);
    taken = cyc;
    @(negedge clk);
    req_in_valid[l] = 0;
  endtask

  task automatic send_rsp(int l, rsp_kind_e k, int cnt);
    @(negedge clk);
    rsp_in_valid[l] = 1; rsp_in[l].kind = k; rsp_in[l].cnt = CNT_W'(cnt);
    @(negedge clk);
    rsp_in_valid[l] = 0;
  endtask

  task automatic wait_req(int l, output inv_req_t r);
    int t = 0;
    while (got_req[l].size() == 0 && t < 50) begin @(negedge clk); t++; end
    chk(got_req[l].size() != 0, $sformatf("request expected on link %0d", l));
    r = (got_req[l].size() != 0) ? got_req[l].pop_front() : '0;
    if (req_cycle[l].size() != 0) void'(req_cycle[l].pop_front());
  endtask

  task automatic wait_rsp(int l, rsp_kind_e k, int cnt, output int at);
    inv_rsp_t r;
    int t = 0;
    at = -1;
    while (got_rsp[l].size() == 0 && t < 50) begin @(negedge clk); t++; end
    chk(got_rsp[l].size() != 0, $sformatf("response expected on link %0d", l));
    if (got_rsp[l].size() != 0) begin
      r  = got_rsp[l].pop_front();
      at = rsp_cycle[l].pop_front();
      chk(r.kind == k && r.cnt == CNT_W'(cnt),
          $sformatf("link %0d response %s/%0d, expected %s/%0d", l, r.kind.name(), r.cnt, k.name(), cnt));
    end
  endtask

  task automatic no_traffic(string what);
    int n = 0;
    repeat (5) @(negedge clk);
    for (int l = 0; l < N_LNK; l++) n += got_req[l].size() + got_rsp[l].size();
    chk(n == 0, $sformatf("no other traffic: %s", what));
    for (int l = 0; l < N_LNK; l++) begin got_req[l].delete(); got_rsp[l].delete(); req_cycle[l].delete(); rsp_cycle[l].delete(); end
  endtask

  initial begin
    inv_req_t r;
    int taken, at;
    for (int l = 0; l < N_LNK; l++) begin
      req_in_valid[l] = 0; req_in[l] = '0; rsp_in_valid[l] = 0; rsp_in[l] = '0;
    end
    repeat (2) @(negedge clk);
    rst_n = 1;

    // unpowered: a request waits until power is on
    @(negedge clk);
    req_in_valid[LNK_HOST] = 1; req_in[LNK_HOST] = mk(REQ_INV_LIN, 1, 0, 0, 0, 0);
    repeat (4) begin @(posedge clk); chk(!req_in_ready[LNK_HOST], "not ready while unpowered"); end
    @(negedge clk) pwr_on = 1;
    do @(posedge clk); while (!req_in_ready[LNK_HOST]);
    taken = cyc;
    @(negedge clk) req_in_valid[LNK_HOST] = 0;
    // 1. leaf: n = 1 is confirmed at once, one cycle after being taken
    wait_rsp(LNK_HOST, RSP_CONFIRM, 1, at);
    chk(at == taken + 1, $sformatf("leaf confirm latency %0d", at - taken));
    chk(claimed && busy, "claimed after confirm");
    no_traffic("leaf");
    // retreat of a leaf
    send_req(LNK_HOST, mk(REQ_RETREAT, 0, 0, 0, 0, 0), taken);
    wait_rsp(LNK_HOST, RSP_RET_ACK, 0, at);
    @(negedge clk);
    chk(!busy && !claimed, "free after retreat");
    no_traffic("leaf retreat");

    // 2. linear, n = 3, heading east: forwarded east with n = 2
    send_req(LNK_HOST, mk(REQ_INV_LIN, 3, 0, 0, 0, 0), taken);
    wait_req(DIR_E, r);
    chk(r.kind == REQ_INV_LIN && r.n == 2 && r.dx_w == 0, "linear forwarded east, n-1");
    chk(busy && !claimed, "reserved, not yet claimed");
    // a second invader from the west is rejected while busy
    send_req(DIR_W, mk(REQ_INV_LIN, 2, 0, 0, 0, 0), taken);
    wait_rsp(DIR_W, RSP_REJECT, 0, at);
    send_rsp(DIR_E, RSP_CONFIRM, 2);
    wait_rsp(LNK_HOST, RSP_CONFIRM, 3, at);
    chk(claimed, "claimed");
    no_traffic("linear");
    // retreat follows the path: east, then acknowledgement
    send_req(LNK_HOST, mk(REQ_RETREAT, 0, 0, 0, 0, 0), taken);
    wait_req(DIR_E, r);
    chk(r.kind == REQ_RETREAT, "retreat forwarded to the child");
    chk(busy, "still busy until the child acknowledges");
    send_rsp(DIR_E, RSP_RET_ACK, 0);
    wait_rsp(LNK_HOST, RSP_RET_ACK, 0, at);
    no_traffic("linear retreat");

    // 3. linear, east rejects: turn south, row direction reversed
    send_req(LNK_HOST, mk(REQ_INV_LIN, 4, 0, 0, 0, 0), taken);
    wait_req(DIR_E, r);
    send_rsp(DIR_E, RSP_REJECT, 0);
    wait_req(DIR_S, r);
    chk(r.kind == REQ_INV_LIN && r.n == 3 && r.dx_w == 1, "turned south with row direction west");
    send_rsp(DIR_S, RSP_CONFIRM, 3);
    wait_rsp(LNK_HOST, RSP_CONFIRM, 4, at);
    no_traffic("linear turn");
    send_req(LNK_HOST, mk(REQ_RETREAT, 0, 0, 0, 0, 0), taken);
    wait_req(DIR_S, r);
    chk(r.kind == REQ_RETREAT, "retreat only to the confirmed child (south)");
    send_rsp(DIR_S, RSP_RET_ACK, 0);
    wait_rsp(LNK_HOST, RSP_RET_ACK, 0, at);
    no_traffic("linear turn retreat");

    // 4. linear at a dead end (only the parent link exists): confirm 1
    nbr_present = 4'b1000;   // only west
    send_req(DIR_W, mk(REQ_INV_LIN, 5, 0, 0, 0, 0), taken);
    wait_rsp(DIR_W, RSP_CONFIRM, 1, at);
    send_req(DIR_W, mk(REQ_RETREAT, 0, 0, 0, 0, 0), taken);
    wait_rsp(DIR_W, RSP_RET_ACK, 0, at);
    no_traffic("dead end");
    nbr_present = 4'b1111;

    // 5. rectangle 3 x 2 from the north-west corner: row east, column south
    hold_ready = 1;          // neighbours not ready at first: the requests must wait
    send_req(LNK_HOST, mk(REQ_INV_RECT, 3, 2, 0, 0, 0), taken);
    repeat (3) @(negedge clk);
    chk(req_out_valid[DIR_E] && req_out_valid[DIR_S], "requests held while not taken");
    hold_ready = 0;
    wait_req(DIR_E, r);
    chk(r.kind == REQ_INV_RECT && r.n == 2 && r.h == 2 && !r.col_only, "row forward");
    wait_req(DIR_S, r);
    chk(r.kind == REQ_INV_RECT && r.n == 1 && r.h == 1 && r.col_only, "column forward");
    send_rsp(DIR_E, RSP_CONFIRM, 4);
    repeat (2) @(negedge clk);
    chk(got_rsp[LNK_HOST].size() == 0 && !claimed, "waits for all children");
    send_rsp(DIR_S, RSP_CONFIRM, 1);
    wait_rsp(LNK_HOST, RSP_CONFIRM, 6, at);
    send_req(LNK_HOST, mk(REQ_RETREAT, 0, 0, 0, 0, 0), taken);
    wait_req(DIR_E, r);
    wait_req(DIR_S, r);
    send_rsp(DIR_S, RSP_RET_ACK, 0);
    send_rsp(DIR_E, RSP_RET_ACK, 0);
    wait_rsp(LNK_HOST, RSP_RET_ACK, 0, at);
    no_traffic("rectangle");

    // 6. rectangle 2 x 2 whose row neighbour is busy: the grant shrinks to
    //    the column (count 2) and the retreat only goes down the column
    send_req(LNK_HOST, mk(REQ_INV_RECT, 2, 2, 0, 0, 0), taken);
    wait_req(DIR_E, r);
    wait_req(DIR_S, r);
    send_rsp(DIR_E, RSP_REJECT, 0);
    send_rsp(DIR_S, RSP_CONFIRM, 1);
    wait_rsp(LNK_HOST, RSP_CONFIRM, 2, at);
    chk(claimed, "partial rectangle claimed");
    send_req(LNK_HOST, mk(REQ_RETREAT, 0, 0, 0, 0, 0), taken);
    wait_req(DIR_S, r);
    chk(r.kind == REQ_RETREAT, "retreat down the column");
    repeat (2) @(negedge clk);
    chk(!req_out_valid[DIR_E], "no retreat to the rejecting neighbour");
    send_rsp(DIR_S, RSP_RET_ACK, 0);
    wait_rsp(LNK_HOST, RSP_RET_ACK, 0, at);
    no_traffic("partial rectangle");

    // 7. column-only request at the bottom of a column: leaf
    send_req(DIR_N, mk(REQ_INV_RECT, 1, 1, 1, 0, 0), taken);
    wait_rsp(DIR_N, RSP_CONFIRM, 1, at);
    no_traffic("column leaf");

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

// ictrl: invasion controller (iCtrl) of one TCPA processing element.
//
// Invasive computing lets an application claim ("invade") a region of PEs,
// run on it ("infect") and release it ("retreat"). The paper does this in a
// distributed way: every PE has an iCtrl that talks only to its four
// neighbours over a dedicated control network, so a region grows by one PE
// per hop, cycle by cycle, with no central resource manager.
//
// Protocol (the phases are the paper's; the message format is this
// design's own):
//  * An invade request enters a seed PE from the control processor (link 4,
//    LNK_HOST) or a PE from a neighbour. A free PE reserves itself, records
//    the link it came from as its parent and forwards the invasion:
//      - linear: n = PEs still wanted. The request goes to one neighbour,
//        first choice along the row direction, then the column direction
//        (the chain turns and reverses its row direction, giving a
//        serpentine chain), then the two opposite directions. A neighbour
//        that is busy rejects it and the next direction is tried.
//      - rectangular: n = width still wanted, h = height still wanted. A PE
//        of the first row forwards along the row (n-1) and down its column
//        (h-1); PEs below only forward down the column.
//  * A PE whose invasion ends there (nothing more wanted, or no neighbour
//    can be claimed) answers CONFIRM(1). A PE that waited for its children
//    answers CONFIRM(1 + sum of their counts) once all have answered, so the
//    confirmations flow back from the last PE to the initiator and the seed
//    tells the control processor how many PEs were claimed. When a PE sends
//    its confirmation it is claimed: `claimed` goes high (the PE may be
//    powered and loaded).
//  * A busy PE answers an invade request with REJECT.
//  * RETREAT from the parent is forwarded to all confirmed children along
//    the path the invasion took; leaves answer RET_ACK, inner PEs answer
//    once all children did, and then become free again.
//
// Links: requests (invade, retreat) use valid/ready; the sender holds a
// request until the receiver takes it, which lets a powered-off receiver
// wake up first (see pmu). Responses (confirm, reject, retreat-ack) are
// one-cycle pulses that the receiver always takes: they only ever go to PEs
// that are active in the same invasion or are sending a request. One request
// is taken per cycle (lowest link index first); all responses are taken.
// While pwr_on is low the controller is held free and drives nothing.
// Latency: one cycle per hop in each direction.
module ictrl
  import tcpa_pkg::*;
(
  input  logic        clk,
  input  logic        rst_n,
  input  logic        pwr_on,
  input  logic [3:0]  nbr_present,            // a neighbour exists in N,E,S,W
  input  logic        req_in_valid  [N_LNK],
  input  inv_req_t    req_in        [N_LNK],
  output logic        req_in_ready  [N_LNK],
  input  logic        rsp_in_valid  [N_LNK],
  input  inv_rsp_t    rsp_in        [N_LNK],
  output logic        req_out_valid [N_LNK],
  output inv_req_t    req_out       [N_LNK],
  input  logic        req_out_ready [N_LNK],
  output logic        rsp_out_valid [N_LNK],
  output inv_rsp_t    rsp_out       [N_LNK],
  output logic        busy,                   // reserved, claimed or releasing
  output logic        claimed                 // region confirmed through this PE
);
  typedef enum logic [1:0] {S_FREE, S_WAIT_CONF, S_CLAIMED, S_WAIT_RACK} state_e;

  state_e            state_q, state_d;
  logic [2:0]        parent_q, parent_d;
  inv_req_t          inv_q, inv_d;            // the invade request this PE accepted
  logic [3:0]        child_q, child_d;        // confirmed children
  logic [3:0]        pend_q, pend_d;          // children that still owe an answer
  logic [3:0]        tried_q, tried_d;        // linear: directions already tried
  logic [CNT_W-1:0]  sum_q, sum_d;

  logic              oreq_v_q [N_LNK], oreq_v_d [N_LNK];
  inv_req_t          oreq_q   [N_LNK], oreq_d   [N_LNK];
  logic              orsp_v_d [N_LNK];
  inv_rsp_t          orsp_d   [N_LNK];

  logic              take;
  logic [2:0]        sel;

  // first free direction for a linear invasion
  function automatic logic [2:0] lin_pick(inv_req_t r, logic [2:0] par,
                                          logic [3:0] present, logic [3:0] tried);
    dir_e order [4];
    logic [2:0] res;
    order[0] = r.dx_w ? DIR_W : DIR_E;
    order[1] = r.dy_n ? DIR_N : DIR_S;
    order[2] = opposite(order[0]);
    order[3] = opposite(order[1]);
    res = 3'd7;                               // 7: none
    for (int i = 3; i >= 0; i--) begin
      if (present[order[i]] && !tried[order[i]] && par != {1'b0, order[i]})
        res = {1'b0, order[i]};
    end
    return res;
  endfunction

  function automatic inv_req_t lin_fwd(inv_req_t r, logic [2:0] d);
    inv_req_t f;
    f   = r;
    f.n = r.n - 1'b1;
    if (d == {1'b0, DIR_N} || d == {1'b0, DIR_S}) f.dx_w = ~r.dx_w;   // turning: reverse the row direction
    return f;
  endfunction

  // request arbitration: lowest index first
  always_comb begin
    take = 1'b0;
    sel  = '0;
    for (int l = N_LNK-1; l >= 0; l--) begin
      if (req_in_valid[l]) begin
        take = pwr_on;
        sel  = 3'(l);
      end
    end
    for (int l = 0; l < N_LNK; l++) req_in_ready[l] = take && (sel == 3'(l));
  end

  always_comb begin
    logic [2:0]       d;
    logic [3:0]       pend_after;
    logic [CNT_W-1:0] sum_after;
    logic             got_reject;
    dir_e             rd, cd;

    state_d  = state_q;
    parent_d = parent_q;
    inv_d    = inv_q;
    child_d  = child_q;
    pend_d   = pend_q;
    tried_d  = tried_q;
    sum_d    = sum_q;
    for (int l = 0; l < N_LNK; l++) begin
      oreq_v_d[l] = oreq_v_q[l] && !req_out_ready[l];
      oreq_d[l]   = oreq_q[l];
      orsp_v_d[l] = 1'b0;
      orsp_d[l]   = '{kind: RSP_CONFIRM, cnt: '0};
    end
    pend_after = pend_q;
    sum_after  = sum_q;
    got_reject = 1'b0;
    d  = 3'd7;
    rd = DIR_E;
    cd = DIR_S;

    // ---- responses from children ----
    for (int l = 0; l < N_DIR; l++) begin
      if (rsp_in_valid[l] && pend_q[l]) begin
        pend_after[l] = 1'b0;
        if (state_q == S_WAIT_CONF) begin
          if (rsp_in[l].kind == RSP_CONFIRM) begin
            sum_after  = sum_after + rsp_in[l].cnt;
            child_d[l] = 1'b1;
          end else begin
            got_reject = 1'b1;
          end
        end
      end
    end
    sum_d  = sum_after;
    pend_d = pend_after;

    if (state_q == S_WAIT_CONF && pend_q != 4'b0 && pend_after == 4'b0) begin
      d = 3'd7;
      if (inv_q.kind == REQ_INV_LIN && got_reject)
        d = lin_pick(inv_q, parent_q, nbr_present, tried_q);
      if (d != 3'd7) begin
        oreq_v_d[d] = 1'b1;
        oreq_d[d]   = lin_fwd(inv_q, d);
        pend_d[d[1:0]]  = 1'b1;
        tried_d[d[1:0]] = 1'b1;
      end else begin
        orsp_v_d[parent_q] = 1'b1;
        orsp_d[parent_q]   = '{kind: RSP_CONFIRM, cnt: sum_after + 1'b1};
        state_d            = S_CLAIMED;
      end
    end

    if (state_q == S_WAIT_RACK && pend_q != 4'b0 && pend_after == 4'b0) begin
      orsp_v_d[parent_q] = 1'b1;
      orsp_d[parent_q]   = '{kind: RSP_RET_ACK, cnt: '0};
      child_d            = '0;
      state_d            = S_FREE;
    end

    // ---- one request ----
    if (take) begin
      if (req_in[sel].kind == REQ_RETREAT) begin
        if (state_q == S_CLAIMED && sel == parent_q) begin
          if (child_q == 4'b0) begin
            orsp_v_d[sel] = 1'b1;
            orsp_d[sel]   = '{kind: RSP_RET_ACK, cnt: '0};
            state_d       = S_FREE;
          end else begin
            for (int l = 0; l < N_DIR; l++) begin
              if (child_q[l]) begin
                oreq_v_d[l] = 1'b1;
                oreq_d[l]   = '{kind: REQ_RETREAT, n: '0, h: '0, col_only: 1'b0, dx_w: 1'b0, dy_n: 1'b0};
              end
            end
            pend_d  = child_q;
            state_d = S_WAIT_RACK;
          end
        end
      end else if (state_q != S_FREE) begin
        orsp_v_d[sel] = 1'b1;
        orsp_d[sel]   = '{kind: RSP_REJECT, cnt: '0};
      end else begin
        parent_d = sel;
        inv_d    = req_in[sel];
        child_d  = '0;
        sum_d    = '0;
        pend_d   = '0;
        tried_d  = '0;
        if (req_in[sel].kind == REQ_INV_LIN) begin
          d = 3'd7;
          if (req_in[sel].n > 1) d = lin_pick(req_in[sel], sel, nbr_present, 4'b0);
          if (d != 3'd7) begin
            oreq_v_d[d]     = 1'b1;
            oreq_d[d]       = lin_fwd(req_in[sel], d);
            pend_d[d[1:0]]  = 1'b1;
            tried_d[d[1:0]] = 1'b1;
          end
        end else begin
          rd = req_in[sel].dx_w ? DIR_W : DIR_E;
          cd = req_in[sel].dy_n ? DIR_N : DIR_S;
          if (!req_in[sel].col_only && req_in[sel].n > 1 && nbr_present[rd]) begin
            oreq_v_d[{1'b0, rd}]   = 1'b1;
            oreq_d[{1'b0, rd}]     = req_in[sel];
            oreq_d[{1'b0, rd}].n   = req_in[sel].n - 1'b1;
            pend_d[rd]     = 1'b1;
          end
          if (req_in[sel].h > 1 && nbr_present[cd]) begin
            oreq_v_d[{1'b0, cd}]          = 1'b1;
            oreq_d[{1'b0, cd}]            = req_in[sel];
            oreq_d[{1'b0, cd}].n          = 1;
            oreq_d[{1'b0, cd}].h          = req_in[sel].h - 1'b1;
            oreq_d[{1'b0, cd}].col_only   = 1'b1;
            pend_d[cd]            = 1'b1;
          end
        end
        if (pend_d == 4'b0) begin
          orsp_v_d[sel] = 1'b1;
          orsp_d[sel]   = '{kind: RSP_CONFIRM, cnt: 1};
          state_d       = S_CLAIMED;
        end else begin
          state_d       = S_WAIT_CONF;
        end
      end
    end
  end

  always_ff @(posedge clk) begin
    if (!rst_n || !pwr_on) begin
      state_q  <= S_FREE;
      parent_q <= '0;
      inv_q    <= '0;
      child_q  <= '0;
      pend_q   <= '0;
      tried_q  <= '0;
      sum_q    <= '0;
      for (int l = 0; l < N_LNK; l++) begin
        oreq_v_q[l]      <= 1'b0;
        oreq_q[l]        <= '0;
        rsp_out_valid[l] <= 1'b0;
        rsp_out[l]       <= '0;
      end
    end else begin
      state_q  <= state_d;
      parent_q <= parent_d;
      inv_q    <= inv_d;
      child_q  <= child_d;
      pend_q   <= pend_d;
      tried_q  <= tried_d;
      sum_q    <= sum_d;
      for (int l = 0; l < N_LNK; l++) begin
        oreq_v_q[l]      <= oreq_v_d[l];
        oreq_q[l]        <= oreq_d[l];
        rsp_out_valid[l] <= orsp_v_d[l];
        rsp_out[l]       <= orsp_d[l];
      end
    end
  end

  always_comb begin
    for (int l = 0; l < N_LNK; l++) begin
      req_out_valid[l] = oreq_v_q[l];
      req_out[l]       = oreq_q[l];
    end
  end

  assign busy    = (state_q != S_FREE);
  assign claimed = (state_q == S_CLAIMED) || (state_q == S_WAIT_RACK);

  // a request that was offered stays offered, unchanged, until it is taken
  for (genvar l = 0; l < N_LNK; l++) begin : g_hold
    assert property (@(posedge clk) disable iff (!rst_n || !pwr_on)
                     req_out_valid[l] && !req_out_ready[l] |=> req_out_valid[l] && $stable(req_out[l]));
  end
endmodule

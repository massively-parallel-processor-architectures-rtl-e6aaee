// pmu: power management unit for one invasion-controller power domain.
//
// The paper uses invasion as the trigger for power gating: when a PE receives
// an invade request its iCtrl is powered on first; when the invasion is
// confirmed (the PE is claimed) its processing element is powered on; a
// retreat turns both off again. It also groups several iCtrls into one
// power domain (Fig. 2 of the paper: (a) one iCtrl per domain, (b) four
// iCtrls of a 2x2 block in one domain, each PE keeping its own domain).
// This PMU serves G PEs: one shared iCtrl domain and G PE domains.
//
//  * iCtrl domain: switched on (ictrl_pwr_en) when an invade/retreat request
//    waits on any link into the group; after ICTRL_ON_CYC cycles it counts as
//    settled and ictrl_pwr_ok releases the iCtrls. It is switched off as
//    soon as no iCtrl of the group is busy and no request waits.
//  * PE domain g: switched on while iCtrl g reports `claimed`; pe_pwr_ok[g]
//    follows after PE_ON_CYC cycles. Switched off when `claimed` drops.
// The switching delays model the settling time of the power switches
// (which are analog parts outside this RTL); their values, and switching
// off without delay, are this design's choices.
module pmu #(
  parameter int unsigned G            = 1,
  parameter int unsigned ICTRL_ON_CYC = 2,
  parameter int unsigned PE_ON_CYC    = 4
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          wake_req,          // a request waits on a link into the group
  input  logic [G-1:0]  ictrl_busy,
  input  logic [G-1:0]  ictrl_claimed,
  output logic          ictrl_pwr_en,      // to the iCtrl domain power switch
  output logic          ictrl_pwr_ok,      // iCtrl domain on and settled
  output logic [G-1:0]  pe_pwr_en,         // to the PE domain power switches
  output logic [G-1:0]  pe_pwr_ok          // PE domain on and settled
);
  localparam int unsigned CW = $clog2((ICTRL_ON_CYC > PE_ON_CYC ? ICTRL_ON_CYC : PE_ON_CYC) + 1);

  logic [CW-1:0] ic_cnt;
  logic [CW-1:0] pe_cnt [G];

  assign ictrl_pwr_ok = ictrl_pwr_en && (ic_cnt == CW'(ICTRL_ON_CYC));

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      ictrl_pwr_en <= 1'b0;
      ic_cnt       <= '0;
    end else if (!ictrl_pwr_en) begin
      ictrl_pwr_en <= wake_req;
      ic_cnt       <= '0;
    end else if (ic_cnt != CW'(ICTRL_ON_CYC)) begin
      ic_cnt <= ic_cnt + 1'b1;
    end else if (!wake_req && ictrl_busy == '0) begin
      ictrl_pwr_en <= 1'b0;
      ic_cnt       <= '0;
    end
  end

  for (genvar g = 0; g < G; g++) begin : g_pe
    assign pe_pwr_en[g] = ictrl_claimed[g] && ictrl_pwr_ok;
    assign pe_pwr_ok[g] = pe_pwr_en[g] && (pe_cnt[g] == CW'(PE_ON_CYC));
    always_ff @(posedge clk) begin
      if (!rst_n || !pe_pwr_en[g])             pe_cnt[g] <= '0;
      else if (pe_cnt[g] != CW'(PE_ON_CYC))    pe_cnt[g] <= pe_cnt[g] + 1'b1;
    end
  end
endmodule

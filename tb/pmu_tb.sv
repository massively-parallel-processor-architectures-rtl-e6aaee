// pmu_tb: a PMU for a group of four iCtrls (the grouped domain of the
// paper's Fig. 2(b)). Checks that a waiting request switches the iCtrl
// domain on and that it is reported settled after ICTRL_ON_CYC cycles, that a
// claimed PE gets its own domain on after PE_ON_CYC cycles, that PE domains
// follow `claimed` one by one, and that everything switches off when no
// iCtrl of the group is busy.
module pmu_tb;
  int checks = 0, failures = 0;
  localparam int G = 4, IC = 2, PC = 4;
  logic clk = 0, rst_n = 0, wake_req = 0;
  logic [G-1:0] ictrl_busy = '0, ictrl_claimed = '0, pe_pwr_en, pe_pwr_ok;
  logic ictrl_pwr_en, ictrl_pwr_ok;

  pmu #(.G(G), .ICTRL_ON_CYC(IC), .PE_ON_CYC(PC)) dut (.*);
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

  initial begin
    int n;
    repeat (2) @(negedge clk);
    rst_n = 1;
    repeat (3) @(negedge clk);
    chk(!ictrl_pwr_en && !ictrl_pwr_ok && pe_pwr_en == '0, "all off after reset");
    // an invade request waits on a link
    wake_req = 1;
    @(negedge clk);
    chk(ictrl_pwr_en && !ictrl_pwr_ok, "switch on, not settled");
    n = 1;
    while (!ictrl_pwr_ok && n < 20) begin @(negedge clk); n++; end
    chk(n == IC + 1, $sformatf("iCtrl domain settled after %0d cycles", n));
    // the iCtrl takes the request and is busy
    wake_req = 0; ictrl_busy[2] = 1;
    repeat (3) @(negedge clk);
    chk(ictrl_pwr_ok && pe_pwr_en == '0, "iCtrl on, PEs still off before the claim");
    // claim of PE 2
    ictrl_claimed[2] = 1;
    #1 chk(pe_pwr_en == 4'b0100 && pe_pwr_ok == '0, "PE 2 domain switched on by the claim");
    n = 0;
    while (!pe_pwr_ok[2] && n < 20) begin @(negedge clk); n++; end
    chk(n == PC, $sformatf("PE domain settled after %0d cycles", n));
    ictrl_busy[1] = 1; ictrl_claimed[1] = 1;
    repeat (PC) @(negedge clk);
    chk(pe_pwr_ok == 4'b0110, "two PE domains on");
    // retreat of PE 1: its domain off, group stays on
    ictrl_busy[1] = 0; ictrl_claimed[1] = 0;
    #1 chk(pe_pwr_en == 4'b0100 && pe_pwr_ok == 4'b0100, "PE 1 off after retreat");
    @(negedge clk);
    chk(ictrl_pwr_en, "group domain stays on while an iCtrl is busy");
    // retreat of PE 2: everything off
    ictrl_claimed[2] = 0; ictrl_busy[2] = 0;
    @(negedge clk);
    chk(!ictrl_pwr_en && !ictrl_pwr_ok && pe_pwr_en == '0, "group domain off when idle");
    // a new request powers it up again
    wake_req = 1;
    repeat (IC + 1) @(negedge clk);
    chk(ictrl_pwr_ok, "second wake-up");
    wake_req = 0;
    @(negedge clk);
    chk(!ictrl_pwr_en, "off again: request withdrawn, nothing busy");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

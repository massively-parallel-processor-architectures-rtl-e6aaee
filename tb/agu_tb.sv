// agu_tb: address sequence base + i*stride with wrap after len, reload.
module agu_tb;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0, load = 0, step = 0;
  logic [8:0] base, stride, addr;
  logic [9:0] len;
  logic wrap;

  agu #(.AW(9)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    #200000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic run_seq(int bs, int st, int ln, int steps);
    logic [8:0] exp_a;
    base = 9'(bs); stride = 9'(st); len = 10'(ln);
    @(negedge clk) load = 1;
    @(negedge clk) load = 0;
    for (int i = 0; i < steps; i++) begin
      exp_a = 9'(bs + (i % ln) * st);
      checks++;
      if (addr !== exp_a || wrap !== ((i % ln) == ln - 1)) begin
        failures++;
        $display("FAIL i=%0d addr=%0d exp %0d wrap=%b", i, addr, exp_a, wrap);
      end
      step = ($urandom_range(0, 3) != 0);
      if (!step) i--;             // no step: same address expected again
      @(negedge clk);
      step = 0;
    end
  endtask

  initial begin
    base = 0; stride = 1; len = 4;
    repeat (2) @(negedge clk);
    rst_n = 1;
    run_seq(0, 1, 8, 20);
    run_seq(100, 3, 5, 23);
    run_seq(510, 7, 10, 30);      // wraps modulo 512
    run_seq(17, 2, 1, 5);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

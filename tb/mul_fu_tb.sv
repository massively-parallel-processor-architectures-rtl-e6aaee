// mul_fu_tb: checks the multiplier's low-half product on random and corner
// operands, and that a NOP drives zero.
module mul_fu_tb;
  import tcpa_pkg::*;
  int checks = 0, failures = 0;
  mul_op_e op;
  word_t a, b, y;

  mul_fu dut (.op(op), .a(a), .b(b), .y(y));

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(mul_op_e o, word_t x, word_t w);
    int unsigned p;
    word_t ey;
    op = o; a = x; b = w;
    #1;
    p  = int'(x) * int'(w);
    ey = (o == MUL_LO) ? word_t'(p) : '0;
    checks++;
    if (y !== ey) begin
      failures++;
      $display("FAIL op=%0d a=%h b=%h y=%h exp %h", o, x, w, y, ey);
    end
  endtask

  initial begin
    check(MUL_LO, 16'hFFFF, 16'hFFFF);
    check(MUL_LO, 16'h0100, 16'h0100);
    check(MUL_LO, 16'd3, 16'd7);
    check(MUL_NOP, 16'd3, 16'd7);
    repeat (2000) check(mul_op_e'($urandom_range(0, 1)), word_t'($urandom), word_t'($urandom));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

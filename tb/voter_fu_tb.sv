// voter_fu_tb: TMR majority with no fault, one faulty replica (each position)
// and random words; DMR compare; NOP.
module voter_fu_tb;
  import tcpa_pkg::*;
  int checks = 0, failures = 0;
  vot_op_e op;
  word_t a, b, c, y;
  logic err, valid;

  voter_fu dut (.op(op), .a(a), .b(b), .c(c), .y(y), .err(err), .valid(valid));

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(vot_op_e o, word_t x, word_t w, word_t v);
    word_t ey; logic ee, ev;
    op = o; a = x; b = w; c = v;
    #1;
    ey = '0; ee = 0; ev = 0;
    if (o == VOT_TMR) begin
      for (int i = 0; i < 16; i++) ey[i] = (int'(x[i]) + int'(w[i]) + int'(v[i])) >= 2;
      ee = !(x == w && w == v); ev = 1;
    end else if (o == VOT_DMR) begin
      ey = x; ee = (x != w); ev = 1;
    end
    checks++;
    if (y !== ey || err !== ee || valid !== ev) begin
      failures++;
      $display("FAIL op=%0d a=%h b=%h c=%h -> y=%h err=%b valid=%b (exp %h %b %b)", o, x, w, v, y, err, valid, ey, ee, ev);
    end
  endtask

  initial begin
    word_t g, f;
    repeat (300) begin
      g = word_t'($urandom);
      f = g ^ word_t'(1 << $urandom_range(0, 15));   // single bit upset
      check(VOT_TMR, g, g, g);
      check(VOT_TMR, f, g, g);
      check(VOT_TMR, g, f, g);
      check(VOT_TMR, g, g, f);
      if (y !== g) $display("note: majority did not mask the upset");
      check(VOT_DMR, g, g, f);
      check(VOT_DMR, g, f, g);
      check(VOT_NOP, g, f, g);
      check(vot_op_e'($urandom_range(0, 2)), word_t'($urandom), word_t'($urandom), word_t'($urandom));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

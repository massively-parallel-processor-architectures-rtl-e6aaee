// alu_fu_tb: checks every ALU operation and its flags against a reference
// computed here on random operands (plus corner cases).
module alu_fu_tb;
  import tcpa_pkg::*;
  int checks = 0, failures = 0;
  alu_op_e op;
  word_t a, b, y;
  logic z, n, c;

  alu_fu dut (.op(op), .a(a), .b(b), .y(y), .z(z), .n(n), .c(c));

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(alu_op_e o, word_t x, word_t w);
    logic [16:0] s;
    word_t ey; logic ec;
    op = o; a = x; b = w;
    #1;
    ec = 1'b0;
    case (o)
      ALU_ADD: begin s = {1'b0, x} + {1'b0, w}; ey = s[15:0]; ec = s[16]; end
      ALU_SUB: begin ey = x - w; ec = (x < w); end
      ALU_AND: ey = x & w;
      ALU_OR:  ey = x | w;
      ALU_XOR: ey = x ^ w;
      ALU_SHL: ey = x << w[3:0];
      ALU_SHR: ey = x >> w[3:0];
      ALU_SRA: ey = word_t'($signed(x) >>> w[3:0]);
      ALU_MOV: ey = x;
      default: ey = '0;
    endcase
    checks++;
    if (y !== ey || z !== (ey == 0) || n !== ey[15] || c !== ec) begin
      failures++;
      $display("FAIL op=%s a=%h b=%h y=%h (exp %h) z=%b n=%b c=%b (exp c %b)", o.name(), x, w, y, ey, z, n, c, ec);
    end
  endtask

  initial begin
    for (int i = 0; i < 10; i++) begin
      check(alu_op_e'(i), 16'hFFFF, 16'h0001);
      check(alu_op_e'(i), 16'h8000, 16'h000F);
      check(alu_op_e'(i), 16'h0000, 16'h0000);
    end
    repeat (2000) begin
      check(alu_op_e'($urandom_range(0, 9)), word_t'($urandom), word_t'($urandom));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

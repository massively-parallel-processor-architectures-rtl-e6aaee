// instruction_decoder_tb: random VLIW words; checks read addresses, write
// enables (NOP and read-only destinations suppress writes), flag enables and
// the pass-through of the branch slot.
module instruction_decoder_tb;
  import tcpa_pkg::*;
  int checks = 0, failures = 0;
  instr_t instr;
  raddr_t raddr [NRP];
  logic   wen   [NWP];
  raddr_t waddr [NWP];
  alu_op_e alu_op; mul_op_e mul_op; vot_op_e vot_op; br_op_e br_op; cond_e br_cond;
  logic [PC_W-1:0] br_target;
  logic rotate, alu_flags_we, vot_flag_we;
  word_t imm;

  instruction_decoder dut (.*);

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic logic wr_ok(int a);
    return a < 12 || (a >= 16 && a < 20) || a == 22 || a == 23;
  endfunction

  task automatic chk(logic ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  initial begin
    logic [INSTR_W-1:0] v;
    repeat (3000) begin
      for (int i = 0; i < INSTR_W; i++) v[i] = 1'($urandom);
      instr = instr_t'(v);
      instr.alu_op = alu_op_e'($urandom_range(0, 9));
      instr.vot_op = vot_op_e'($urandom_range(0, 2));
      #1;
      chk(raddr[0] == instr.alu_a && raddr[1] == instr.alu_b && raddr[2] == instr.mul_a &&
          raddr[3] == instr.mul_b && raddr[4] == instr.vot_a && raddr[5] == instr.vot_b &&
          raddr[6] == instr.vot_c, "read addresses");
      chk(wen[0] == (instr.alu_op != ALU_NOP && wr_ok(int'(instr.alu_dst))), "alu wen");
      chk(wen[1] == (instr.mul_op != MUL_NOP && wr_ok(int'(instr.mul_dst))), "mul wen");
      chk(wen[2] == (instr.vot_op != VOT_NOP && wr_ok(int'(instr.vot_dst))), "voter wen");
      chk(waddr[0] == instr.alu_dst && waddr[1] == instr.mul_dst && waddr[2] == instr.vot_dst, "write addresses");
      chk(alu_flags_we == (instr.alu_op != ALU_NOP) && vot_flag_we == (instr.vot_op != VOT_NOP), "flag enables");
      chk(br_op == instr.br_op && br_cond == instr.br_cond && br_target == instr.br_target &&
          rotate == instr.rotate && imm == instr.imm && alu_op == instr.alu_op &&
          mul_op == instr.mul_op && vot_op == instr.vot_op, "slot fields");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

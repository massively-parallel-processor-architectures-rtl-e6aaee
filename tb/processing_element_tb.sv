// processing_element_tb: loads a small VLIW program and runs it.
// The program sums 5+4+3+2+1 in a loop (ALU, branch on the zero flag), writes
// the squares of the loop counter to a rotating register (multiplier,
// rotate bit), then votes over RD0, RD0 and an input port that carries an
// upset copy (voter: masked result, error flag), adds an input port to an
// immediate, and halts. Checks the output ports, the flag, the control output
// and the cycle count: 2 + 5*3 + 3 = 20 words, one per cycle.
module processing_element_tb;
  import tcpa_pkg::*;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0, run = 0, imem_we = 0;
  logic [PC_W-1:0] imem_waddr, pc;
  instr_t imem_wdata;
  word_t id_in [N_IN];
  logic [N_CIN-1:0] ic_in;
  word_t od_out [N_OUT];
  logic [N_COUT-1:0] oc_out;
  logic halted, verr;

  processing_element dut (.*);
  always #5 clk = ~clk;

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic instr_t nop();
    instr_t i;
    i = '0;
    i.alu_op = ALU_NOP; i.mul_op = MUL_NOP; i.vot_op = VOT_NOP; i.br_op = BR_NEXT;
    return i;
  endfunction

  task automatic chk(logic ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  instr_t prog [8];

  initial begin
    int cyc;
    for (int i = 0; i < 8; i++) prog[i] = nop();
    // 0: RD0 = 0
    prog[0].alu_op = ALU_MOV; prog[0].alu_dst = 5'd0; prog[0].alu_a = RA_IMM; prog[0].imm = 16'd0;
    // 1: RD1 = 5
    prog[1].alu_op = ALU_MOV; prog[1].alu_dst = 5'd1; prog[1].alu_a = RA_IMM; prog[1].imm = 16'd5;
    // 2: RD0 = RD0 + RD1
    prog[2].alu_op = ALU_ADD; prog[2].alu_dst = 5'd0; prog[2].alu_a = 5'd0; prog[2].alu_b = 5'd1;
    // 3: RD1 = RD1 - 1 ; RR0 = RD1 * RD1 ; rotate
    prog[3].alu_op = ALU_SUB; prog[3].alu_dst = 5'd1; prog[3].alu_a = 5'd1; prog[3].alu_b = RA_IMM; prog[3].imm = 16'd1;
    prog[3].mul_op = MUL_LO;  prog[3].mul_dst = RA_ROT; prog[3].mul_a = 5'd1; prog[3].mul_b = 5'd1;
    prog[3].rotate = 1'b1;
    // 4: if !Z goto 2
    prog[4].br_op = BR_IFN; prog[4].br_cond = CND_Z; prog[4].br_target = 5'd2;
    // 5: OD0 = RD0 ; OD1 = vote(RD0, RD0, ID0)
    prog[5].alu_op = ALU_MOV; prog[5].alu_dst = RA_OUT; prog[5].alu_a = 5'd0;
    prog[5].vot_op = VOT_TMR; prog[5].vot_dst = RA_OUT + 5'd1; prog[5].vot_a = 5'd0; prog[5].vot_b = 5'd0; prog[5].vot_c = RA_IN;
    // 6: OD2 = ID1 + 100 ; OD3 = RR1 * 100
    prog[6].alu_op = ALU_ADD; prog[6].alu_dst = RA_OUT + 5'd2; prog[6].alu_a = RA_IN + 5'd1; prog[6].alu_b = RA_IMM; prog[6].imm = 16'd100;
    prog[6].mul_op = MUL_LO;  prog[6].mul_dst = RA_OUT + 5'd3; prog[6].mul_a = RA_ROT + 5'd1; prog[6].mul_b = RA_IMM;
    // 7: OC0 = 1 ; halt
    prog[7].alu_op = ALU_MOV; prog[7].alu_dst = RA_COUT; prog[7].alu_a = RA_IMM; prog[7].imm = 16'd1;
    prog[7].br_op = BR_HALT;

    imem_waddr = '0; imem_wdata = nop();
    for (int i = 0; i < N_IN; i++) id_in[i] = '0;
    id_in[0] = 16'd15 ^ 16'h0004;     // upset replica
    id_in[1] = 16'd7;
    ic_in = '0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int i = 0; i < 8; i++) begin
      imem_we = 1; imem_waddr = PC_W'(i); imem_wdata = prog[i];
      @(negedge clk);
    end
    imem_we = 0;
    run = 1;
    cyc = 0;
    while (!halted && cyc < 200) begin
      @(negedge clk);
      cyc++;
    end
    chk(cyc == 20, $sformatf("cycle count %0d, expected 20", cyc));
    chk(od_out[0] == 16'd15, $sformatf("sum %0d", od_out[0]));
    chk(od_out[1] == 16'd15, $sformatf("voted %0d", od_out[1]));
    chk(verr == 1'b1, "voter error flag");
    chk(od_out[2] == 16'd107, $sformatf("ID1+100 = %0d", od_out[2]));
    chk(od_out[3] == 16'd900, $sformatf("RR1*100 = %0d (rotating registers)", od_out[3]));
    chk(oc_out == 2'b01, "control output");
    chk(pc == 5'd7, "PC frozen at HALT");
    repeat (3) @(negedge clk);
    chk(od_out[0] == 16'd15 && pc == 5'd7, "nothing changes after HALT");
    // restart: run low then high again runs the program again
    run = 0; @(negedge clk); run = 1;
    id_in[0] = 16'd15;
    cyc = 0;
    while (!halted && cyc < 200) begin @(negedge clk); cyc++; end
    chk(cyc == 20 && verr == 1'b0 && od_out[1] == 16'd15, "second run, replicas agree");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

// instruction_decoder: splits one VLIW word into the controls of the PE's units.
//
// A TCPA PE issues one VLIW word per cycle; every functional unit has its own
// slot in the word. The decoder drives the register-file read addresses of
// all slots, turns each slot's opcode and destination into a write enable
// (a NOP, or a destination that is read only -- input ports, control inputs,
// the immediate, unused addresses -- writes nothing), and tells the PE which
// flags the word updates (ALU flags when the ALU slot is busy, the voter
// flag when the voter slot is busy). Combinational. The slot layout is this
// design's own; the paper only shows a decoder feeding every FU and the
// branch unit.
// Read-port order: 0,1 ALU a,b; 2,3 MUL a,b; 4,5,6 voter a,b,c.
// Write-port order: 0 ALU, 1 MUL, 2 voter (later ports win on a clash).
module instruction_decoder
  import tcpa_pkg::*;
(
  input  instr_t           instr,
  output raddr_t           raddr [NRP],
  output logic             wen   [NWP],
  output raddr_t           waddr [NWP],
  output alu_op_e          alu_op,
  output mul_op_e          mul_op,
  output vot_op_e          vot_op,
  output br_op_e           br_op,
  output cond_e            br_cond,
  output logic [PC_W-1:0]  br_target,
  output logic             rotate,
  output word_t            imm,
  output logic             alu_flags_we,
  output logic             vot_flag_we
);
  function automatic logic writable(raddr_t a);
    return (a < RA_IN) ||
           (a >= RA_OUT  && a < RA_CIN) ||
           (a >= RA_COUT && a < RA_COUT + 5'(N_COUT));
  endfunction

  always_comb begin
    raddr[0] = instr.alu_a;   raddr[1] = instr.alu_b;
    raddr[2] = instr.mul_a;   raddr[3] = instr.mul_b;
    raddr[4] = instr.vot_a;   raddr[5] = instr.vot_b;   raddr[6] = instr.vot_c;

    waddr[0] = instr.alu_dst; waddr[1] = instr.mul_dst; waddr[2] = instr.vot_dst;
    wen[0]   = (instr.alu_op != ALU_NOP) && writable(instr.alu_dst);
    wen[1]   = (instr.mul_op != MUL_NOP) && writable(instr.mul_dst);
    wen[2]   = (instr.vot_op != VOT_NOP) && writable(instr.vot_dst);

    alu_op       = instr.alu_op;
    mul_op       = instr.mul_op;
    vot_op       = instr.vot_op;
    br_op        = instr.br_op;
    br_cond      = instr.br_cond;
    br_target    = instr.br_target;
    rotate       = instr.rotate;
    imm          = instr.imm;
    alu_flags_we = (instr.alu_op != ALU_NOP);
    vot_flag_we  = (instr.vot_op != VOT_NOP);
  end
endmodule

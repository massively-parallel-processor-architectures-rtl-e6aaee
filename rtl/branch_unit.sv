// branch_unit: program counter and branch unit of a TCPA processing element.
//
// Holds the PC and computes the next one every cycle from the branch slot of
// the current VLIW word: fall through, jump, branch if a condition holds or
// does not hold, or halt. Conditions are the flags register (zero, negative,
// carry, voter error), as stored at the start of the cycle, and the two 1-bit
// control-network inputs, which lets a PE wait for a neighbour or an I/O
// buffer. While `run` is low the PC is held at 0 and the unit is not halted;
// after HALT the PC stays put and `halted` is high until `run` drops. The
// paper shows a branch unit fed by the flags and driving the PC; the
// opcodes and condition set are this design's.
//   timing: pc changes on the rising edge; a taken branch costs no extra cycle.
module branch_unit
  import tcpa_pkg::*;
(
  input  logic               clk,
  input  logic               rst_n,
  input  logic               run,
  input  br_op_e             br_op,
  input  cond_e              br_cond,
  input  logic [PC_W-1:0]    br_target,
  input  flags_t             flags,
  input  logic [N_CIN-1:0]   ic,
  output logic [PC_W-1:0]    pc,
  output logic               halted
);
  logic cond_true;

  always_comb begin
    unique case (br_cond)
      CND_Z:    cond_true = flags.z;
      CND_N:    cond_true = flags.n;
      CND_C:    cond_true = flags.c;
      CND_VERR: cond_true = flags.verr;
      CND_IC0:  cond_true = ic[0];
      CND_IC1:  cond_true = ic[1];
      default:  cond_true = 1'b0;
    endcase
  end

  always_ff @(posedge clk) begin
    if (!rst_n || !run) begin
      pc     <= '0;
      halted <= 1'b0;
    end else if (!halted) begin
      unique case (br_op)
        BR_JMP:  pc <= br_target;
        BR_IF:   pc <= cond_true ? br_target : pc + 1'b1;
        BR_IFN:  pc <= cond_true ? pc + 1'b1 : br_target;
        BR_HALT: halted <= 1'b1;
        default: pc <= pc + 1'b1;
      endcase
    end
  end
endmodule

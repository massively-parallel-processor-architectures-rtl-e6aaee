// mul_fu: multiplier functional unit of a TCPA processing element.
//
// Combinational W x W multiplier that returns the low W bits of the product
// (two's complement and unsigned agree on those bits). Like the other FUs it
// reads its operands from the register file and its result is written back at
// the next clock edge, so a multiply takes one cycle. The paper lists
// multipliers among the FU types; returning only the low half is this
// design's choice.
//   op  : MUL_NOP or MUL_LO;   a,b : operands;   y : low half of a*b (0 for NOP)
module mul_fu
  import tcpa_pkg::*;
#(
  parameter int unsigned W = DATA_W
) (
  input  mul_op_e        op,
  input  logic [W-1:0]   a,
  input  logic [W-1:0]   b,
  output logic [W-1:0]   y
);
  logic [2*W-1:0] prod;

  always_comb begin
    prod = a * b;
    y    = (op == MUL_LO) ? prod[W-1:0] : '0;
  end
endmodule

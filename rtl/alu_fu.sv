// alu_fu: adder / shifter / logic functional unit of a TCPA processing element.
//
// One of the functional units that work in parallel inside the VLIW PE. It is
// purely combinational: the operands come from register-file read ports in the
// same cycle and the result is written back at the next clock edge by the
// register file. Besides the result it produces the zero, negative and carry
// flags that the PE keeps in its flags register for the branch unit.
// The paper names adders, shifters and logical operations as FU types; the
// opcode set and the flag definitions are this design's own.
//   op  : operation (tcpa_pkg::alu_op_e)
//   a,b : operands; shifts use b[3:0] as the shift distance
//   y   : result;  z,n,c : flags (c = carry of ADD, borrow of SUB, else 0)
module alu_fu
  import tcpa_pkg::*;
#(
  parameter int unsigned W = DATA_W
) (
  input  alu_op_e        op,
  input  logic [W-1:0]   a,
  input  logic [W-1:0]   b,
  output logic [W-1:0]   y,
  output logic           z,
  output logic           n,
  output logic           c
);
  localparam int unsigned SH_W = $clog2(W);

  logic [W:0] sum;

  always_comb begin
    sum = '0;
    c   = 1'b0;
    unique case (op)
      ALU_ADD: begin sum = {1'b0, a} + {1'b0, b}; y = sum[W-1:0]; c = sum[W]; end
      ALU_SUB: begin sum = {1'b0, a} - {1'b0, b}; y = sum[W-1:0]; c = sum[W]; end
      ALU_AND: y = a & b;
      ALU_OR : y = a | b;
      ALU_XOR: y = a ^ b;
      ALU_SHL: y = a << b[SH_W-1:0];
      ALU_SHR: y = a >> b[SH_W-1:0];
      ALU_SRA: y = $signed(a) >>> b[SH_W-1:0];
      ALU_MOV: y = a;
      default: y = '0;
    endcase
    z = (y == '0);
    n = y[W-1];
  end
endmodule

// voter_fu: programmable voter functional unit for on-demand modular redundancy.
//
// The paper proposes PEs with a voter FU that software can point at any three
// (TMR) or two (DMR) members of the register file, so that replicated loop
// computations claimed by an invasion can be voted or compared in hardware at
// the cost of one instruction slot instead of a software voting sequence.
// TMR: the result is the bitwise majority of a, b and c; err is set when the
// three inputs are not all equal (one replica disagrees, which the majority
// masks). DMR: the result is a, err is set when a and b differ (detection
// only). Combinational; the PE writes y to the register file and err into
// its flags register at the next clock edge. Bitwise majority and the exact
// meaning of err are this design's choices.
//   op : VOT_NOP / VOT_TMR / VOT_DMR;  a,b,c : operands;  y : voted value
//   err: disagreement seen;  valid: op is not NOP
module voter_fu
  import tcpa_pkg::*;
#(
  parameter int unsigned W = DATA_W
) (
  input  vot_op_e        op,
  input  logic [W-1:0]   a,
  input  logic [W-1:0]   b,
  input  logic [W-1:0]   c,
  output logic [W-1:0]   y,
  output logic           err,
  output logic           valid
);
  always_comb begin
    y     = '0;
    err   = 1'b0;
    valid = 1'b0;
    unique case (op)
      VOT_TMR: begin
        y     = (a & b) | (a & c) | (b & c);
        err   = (a != b) || (a != c);
        valid = 1'b1;
      end
      VOT_DMR: begin
        y     = a;
        err   = (a != b);
        valid = 1'b1;
      end
      default: ;
    endcase
  end
endmodule

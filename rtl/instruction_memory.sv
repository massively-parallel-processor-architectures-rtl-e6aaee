// instruction_memory: VLIW instruction memory of a TCPA processing element.
//
// DEPTH words of one full VLIW instruction (tcpa_pkg::instr_t) each. The
// memory is written word by word through the configuration port when a
// program is loaded into an invaded PE, and read asynchronously at the
// program counter so that the PE issues one instruction per cycle. The paper
// says the instruction memory size is a parameter of the template; the depth
// of 32 words and the asynchronous read are this design's choices.
//   we/waddr/wdata : configuration write (rising edge)
//   raddr/rdata    : instruction fetch (combinational)
module instruction_memory
  import tcpa_pkg::*;
#(
  parameter int unsigned DEPTH = IMEM_DEPTH,
  parameter int unsigned AW    = $clog2(DEPTH)
) (
  input  logic           clk,
  input  logic           we,
  input  logic [AW-1:0]  waddr,
  input  instr_t         wdata,
  input  logic [AW-1:0]  raddr,
  output instr_t         rdata
);
  instr_t mem [DEPTH];

  always_ff @(posedge clk) begin
    if (we) mem[waddr] <= wdata;
  end

  assign rdata = mem[raddr];
endmodule

// agu: address generation unit for an I/O buffer channel in RAM mode.
//
// The paper augments the array with dedicated address generation units but
// does not describe them. This one produces the simplest useful sequence:
// base, base+stride, base+2*stride, ... for len addresses, then starts again
// at base. `load` (re)starts the sequence; `step` advances it by one at the
// rising edge; `wrap` is high while the current address is the last of the
// sequence. Addresses wrap modulo 2**AW.
module agu #(
  parameter int unsigned AW = 9
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          load,
  input  logic          step,
  input  logic [AW-1:0] base,
  input  logic [AW-1:0] stride,
  input  logic [AW:0]   len,
  output logic [AW-1:0] addr,
  output logic          wrap
);
  logic [AW:0] cnt;

  assign wrap = (cnt + 1'b1 >= len);

  always_ff @(posedge clk) begin
    if (!rst_n || load) begin
      addr <= base;
      cnt  <= '0;
    end else if (step) begin
      if (wrap) begin
        addr <= base;
        cnt  <= '0;
      end else begin
        addr <= addr + stride;
        cnt  <= cnt + 1'b1;
      end
    end
  end
endmodule

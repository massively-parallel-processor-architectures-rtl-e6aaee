// register_file: register file of a TCPA processing element.
//
// As in the paper, it holds four kinds of registers: general purpose
// registers (RD), rotating registers (RR), input ports (ID, driven by the
// interconnect wrapper) and output ports (OD, driving the wrapper), plus the
// 1-bit control-network inputs (IC) and outputs (OC). All of them share one
// 5-bit address space (see tcpa_pkg: RD 0-7, RR 8-11, ID 12-15, OD 16-19,
// IC 20-21, OC 22-23, 31 = immediate of the current instruction).
//
// Reads are combinational on NRP ports. Writes happen on the rising clock
// edge through NWP ports; if two ports write the same register, the higher
// numbered port wins (this design's choice). Writes to ID, IC or the
// immediate are ignored; a write to OC stores bit 0. Output registers are
// visible to the neighbour PE one cycle after they are written, which gives
// the paper's "used already in the next cycle by a neighboring PE".
//
// Rotating registers: logical RRi maps to physical (base+i) mod N_ROT. When
// `rotate` is high, base advances by one at the clock edge, so a value
// written to RR0 in one loop iteration is read as RR(N_ROT-1) in the next.
// The paper only names rotating registers; this renaming scheme is the
// usual one and this design's choice. Synchronous active-low reset clears
// every register and the base.
module register_file
  import tcpa_pkg::*;
(
  input  logic                clk,
  input  logic                rst_n,
  input  raddr_t              raddr [NRP],
  output word_t               rdata [NRP],
  input  word_t               imm,
  input  logic                wen   [NWP],
  input  raddr_t              waddr [NWP],
  input  word_t               wdata [NWP],
  input  logic                rotate,
  input  word_t               id_in  [N_IN],
  input  logic [N_CIN-1:0]    ic_in,
  output word_t               od_out [N_OUT],
  output logic [N_COUT-1:0]   oc_out
);
  localparam int unsigned RB_W = $clog2(N_ROT);

  word_t            gp  [N_GP];
  word_t            rot [N_ROT];
  logic [RB_W-1:0]  base;

  function automatic word_t rd(raddr_t a, word_t imm_v);
    word_t v;
    v = '0;
    if (a < RA_ROT)                        v = gp[a[2:0]];
    else if (a < RA_IN)                    v = rot[RB_W'(base + a[RB_W-1:0])];
    else if (a < RA_OUT)                   v = id_in[a[1:0]];
    else if (a < RA_CIN)                   v = od_out[a[1:0]];
    else if (a < RA_COUT)                  v = word_t'(ic_in[a[0]]);
    else if (a < RA_COUT + 5'(N_COUT))     v = word_t'(oc_out[a[0]]);
    else if (a == RA_IMM)                  v = imm_v;
    return v;
  endfunction

  always_comb begin
    for (int p = 0; p < NRP; p++) rdata[p] = rd(raddr[p], imm);
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      for (int i = 0; i < N_GP;  i++) gp[i]  <= '0;
      for (int i = 0; i < N_ROT; i++) rot[i] <= '0;
      for (int i = 0; i < N_OUT; i++) od_out[i] <= '0;
      oc_out <= '0;
      base   <= '0;
    end else begin
      for (int p = 0; p < NWP; p++) begin
        if (wen[p]) begin
          if (waddr[p] < RA_ROT)                    gp[waddr[p][2:0]] <= wdata[p];
          else if (waddr[p] < RA_IN)                rot[RB_W'(base + waddr[p][RB_W-1:0])] <= wdata[p];
          else if (waddr[p] >= RA_OUT && waddr[p] < RA_CIN)
                                                    od_out[waddr[p][1:0]] <= wdata[p];
          else if (waddr[p] >= RA_COUT && waddr[p] < RA_COUT + 5'(N_COUT))
                                                    oc_out[waddr[p][0]] <= wdata[p][0];
        end
      end
      if (rotate) base <= base + 1'b1;
    end
  end
endmodule

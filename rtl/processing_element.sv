// processing_element: VLIW processing unit (PU) of one TCPA processing element.
//
// Follows the PE sketch of the paper: an instruction memory addressed by the
// PC, an instruction decoder, several functional units working in parallel
// (here an adder/shifter/logic ALU, a multiplier and a voter FU), a register
// file with general purpose, rotating, input-port and output-port registers,
// a flags register fed by the FUs and a branch unit that computes the next PC
// from the flags. The number and mix of FUs, the register counts and the
// single-cycle, non-pipelined timing are this design's choices; the paper
// leaves all of them as template parameters.
//
// Timing: one VLIW word per cycle. Fetch (asynchronous instruction memory),
// decode, register read and FU evaluation happen in one cycle; results, flags,
// PC and rotating base are updated at the next rising edge. A branch sees the
// flags written by earlier words, not by its own word.
// Interface:
//   run            : high while the PE executes; low holds PC at 0
//   imem_*         : configuration write port of the instruction memory
//   id_in / ic_in  : data / 1-bit control inputs from the interconnect wrapper
//   od_out/oc_out  : output port registers towards the wrapper
//   pc, halted     : program counter; high after a HALT word
//   verr           : voter error flag (last vote saw disagreeing inputs)
module processing_element
  import tcpa_pkg::*;
(
  input  logic               clk,
  input  logic               rst_n,
  input  logic               run,
  input  logic               imem_we,
  input  logic [PC_W-1:0]    imem_waddr,
  input  instr_t             imem_wdata,
  input  word_t              id_in  [N_IN],
  input  logic [N_CIN-1:0]   ic_in,
  output word_t              od_out [N_OUT],
  output logic [N_COUT-1:0]  oc_out,
  output logic [PC_W-1:0]    pc,
  output logic               halted,
  output logic               verr
);
  instr_t           instr;
  raddr_t           raddr [NRP];
  word_t            rdata [NRP];
  logic             wen   [NWP];
  logic             wen_q [NWP];
  raddr_t           waddr [NWP];
  word_t            wdata [NWP];
  alu_op_e          alu_op;
  mul_op_e          mul_op;
  vot_op_e          vot_op;
  br_op_e           br_op;
  cond_e            br_cond;
  logic [PC_W-1:0]  br_target;
  logic             rotate, alu_flags_we, vot_flag_we;
  word_t            imm;
  flags_t           flags;
  logic             alu_z, alu_n, alu_c, vot_err, vot_valid;
  logic             active;

  assign active = run && !halted;

  instruction_memory u_imem (
    .clk   (clk),
    .we    (imem_we),
    .waddr (imem_waddr),
    .wdata (imem_wdata),
    .raddr (pc),
    .rdata (instr)
  );

  instruction_decoder u_dec (
    .instr        (instr),
    .raddr        (raddr),
    .wen          (wen),
    .waddr        (waddr),
    .alu_op       (alu_op),
    .mul_op       (mul_op),
    .vot_op       (vot_op),
    .br_op        (br_op),
    .br_cond      (br_cond),
    .br_target    (br_target),
    .rotate       (rotate),
    .imm          (imm),
    .alu_flags_we (alu_flags_we),
    .vot_flag_we  (vot_flag_we)
  );

  // nothing is written while the PE is stopped or halted
  always_comb begin
    for (int p = 0; p < NWP; p++) wen_q[p] = wen[p] && active;
  end

  register_file u_rf (
    .clk    (clk),
    .rst_n  (rst_n),
    .raddr  (raddr),
    .rdata  (rdata),
    .imm    (imm),
    .wen    (wen_q),
    .waddr  (waddr),
    .wdata  (wdata),
    .rotate (rotate && active),
    .id_in  (id_in),
    .ic_in  (ic_in),
    .od_out (od_out),
    .oc_out (oc_out)
  );

  alu_fu u_alu (
    .op (alu_op), .a (rdata[0]), .b (rdata[1]),
    .y  (wdata[0]), .z (alu_z), .n (alu_n), .c (alu_c)
  );

  mul_fu u_mul (
    .op (mul_op), .a (rdata[2]), .b (rdata[3]), .y (wdata[1])
  );

  voter_fu u_vot (
    .op (vot_op), .a (rdata[4]), .b (rdata[5]), .c (rdata[6]),
    .y  (wdata[2]), .err (vot_err), .valid (vot_valid)
  );

  always_ff @(posedge clk) begin
    if (!rst_n || !run) begin
      flags <= '0;
    end else if (!halted) begin
      if (alu_flags_we) begin
        flags.z <= alu_z;
        flags.n <= alu_n;
        flags.c <= alu_c;
      end
      if (vot_flag_we && vot_valid) flags.verr <= vot_err;
    end
  end

  branch_unit u_bru (
    .clk       (clk),
    .rst_n     (rst_n),
    .run       (run),
    .br_op     (br_op),
    .br_cond   (br_cond),
    .br_target (br_target),
    .flags     (flags),
    .ic        (ic_in),
    .pc        (pc),
    .halted    (halted)
  );

  assign verr = flags.verr;
endmodule

// tcpa_pkg: types and constants shared by the blocks of the invasive tightly
// coupled processor array (TCPA).
//
// The array is a mesh of VLIW processing elements (PEs). Each PE sits in an
// interconnect wrapper and owns an invasion controller (iCtrl); power
// management units (PMUs) gate the PE and iCtrl power domains.
//
// Following the paper: a 16-bit data path (its example of two 16-bit data
// channels and one 1-bit control channel per direction), FUs for adding,
// shifting, logic and multiplying, a voter FU, a register file with general
// purpose, rotating, input-port and output-port registers, and the invasion
// message kinds invade / confirm / retreat.
// This design's own choices: the register counts, the instruction word
// layout and opcodes, the instruction memory depth, and the invasion message
// fields and encoding.
package tcpa_pkg;

  // ---------------- data path -------------------------------------------
  localparam int unsigned DATA_W     = 16;  // paper: 16-bit data channels
  localparam int unsigned D_CH       = 2;   // paper example: two data channels per direction
  localparam int unsigned C_CH       = 1;   // paper example: one 1-bit control channel
  localparam int unsigned N_DIR      = 4;   // north, east, south, west

  localparam int unsigned N_GP       = 8;   // general purpose registers RD0..RD7
  localparam int unsigned N_ROT      = 4;   // rotating registers RR0..RR3
  localparam int unsigned N_IN       = 4;   // input port registers ID0..ID3
  localparam int unsigned N_OUT      = 4;   // output port registers OD0..OD3
  localparam int unsigned N_CIN      = 2;   // 1-bit control inputs IC0..IC1
  localparam int unsigned N_COUT     = 2;   // 1-bit control outputs OC0..OC1

  localparam int unsigned IMEM_DEPTH = 32;
  localparam int unsigned PC_W       = $clog2(IMEM_DEPTH);

  typedef logic [DATA_W-1:0] word_t;
  typedef logic [4:0]        raddr_t;       // register address

  // register address map
  localparam raddr_t RA_GP   = 5'd0;        // 0..7   RD
  localparam raddr_t RA_ROT  = 5'd8;        // 8..11  RR
  localparam raddr_t RA_IN   = 5'd12;       // 12..15 ID (read only)
  localparam raddr_t RA_OUT  = 5'd16;       // 16..19 OD
  localparam raddr_t RA_CIN  = 5'd20;       // 20..21 IC (read only)
  localparam raddr_t RA_COUT = 5'd22;       // 22..23 OC
  localparam raddr_t RA_IMM  = 5'd31;       // immediate of the instruction (read only)

  typedef enum logic [1:0] {DIR_N = 2'd0, DIR_E = 2'd1, DIR_S = 2'd2, DIR_W = 2'd3} dir_e;

  // ---------------- instruction set -------------------------------------
  typedef enum logic [3:0] {
    ALU_NOP = 4'd0, ALU_ADD = 4'd1, ALU_SUB = 4'd2, ALU_AND = 4'd3,
    ALU_OR  = 4'd4, ALU_XOR = 4'd5, ALU_SHL = 4'd6, ALU_SHR = 4'd7,
    ALU_SRA = 4'd8, ALU_MOV = 4'd9
  } alu_op_e;

  typedef enum logic [0:0] {MUL_NOP = 1'b0, MUL_LO = 1'b1} mul_op_e;

  typedef enum logic [1:0] {VOT_NOP = 2'd0, VOT_TMR = 2'd1, VOT_DMR = 2'd2} vot_op_e;

  typedef enum logic [2:0] {
    BR_NEXT = 3'd0, BR_JMP = 3'd1, BR_IF = 3'd2, BR_IFN = 3'd3, BR_HALT = 3'd4
  } br_op_e;

  typedef enum logic [2:0] {
    CND_Z = 3'd0, CND_N = 3'd1, CND_C = 3'd2, CND_VERR = 3'd3, CND_IC0 = 3'd4, CND_IC1 = 3'd5
  } cond_e;

  typedef struct packed {
    logic z;      // ALU result zero
    logic n;      // ALU result negative
    logic c;      // ALU carry / borrow
    logic verr;   // voter detected a mismatch
  } flags_t;

  typedef struct packed {
    alu_op_e           alu_op;
    raddr_t            alu_dst, alu_a, alu_b;
    mul_op_e           mul_op;
    raddr_t            mul_dst, mul_a, mul_b;
    vot_op_e           vot_op;
    raddr_t            vot_dst, vot_a, vot_b, vot_c;
    br_op_e            br_op;
    cond_e             br_cond;
    logic [PC_W-1:0]   br_target;
    logic              rotate;    // advance the rotating-register base after this word
    word_t             imm;
  } instr_t;

  localparam int unsigned INSTR_W = $bits(instr_t);

  // read-port numbering of the register file
  localparam int unsigned NRP = 7;  // alu a,b  mul a,b  voter a,b,c
  localparam int unsigned NWP = 3;  // alu, mul, voter

  // ---------------- invasion network ------------------------------------
  localparam int unsigned CNT_W = 8;   // PE count carried by confirmations
  localparam int unsigned N_LNK = 5;   // N, E, S, W and the local (control processor) port
  localparam int unsigned LNK_HOST = 4;

  typedef enum logic [1:0] {REQ_INV_LIN = 2'd0, REQ_INV_RECT = 2'd1, REQ_RETREAT = 2'd2} req_kind_e;
  typedef enum logic [1:0] {RSP_CONFIRM = 2'd0, RSP_REJECT = 2'd1, RSP_RET_ACK = 2'd2} rsp_kind_e;

  // request: travels from the initiator towards the last PE
  typedef struct packed {
    req_kind_e          kind;
    logic [CNT_W-1:0]   n;        // linear: PEs still wanted; rect: width still wanted
    logic [CNT_W-1:0]   h;        // rect: height still wanted
    logic               col_only; // rect: only extend along the column direction
    logic               dx_w;     // row direction: 0 east, 1 west
    logic               dy_n;     // column direction: 0 south, 1 north
  } inv_req_t;

  // response: travels back from the last PE towards the initiator
  typedef struct packed {
    rsp_kind_e          kind;
    logic [CNT_W-1:0]   cnt;      // confirm: PEs claimed in the answering sub-region
  } inv_rsp_t;

  function automatic dir_e opposite(dir_e d);
    return dir_e'(d ^ 2'd2);
  endfunction

endpackage

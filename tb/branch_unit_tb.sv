// branch_unit_tb: random branch slots, flags and control inputs against a PC
// model; run low holds PC at 0; HALT freezes the PC.
module branch_unit_tb;
  import tcpa_pkg::*;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0, run = 0, halted;
  br_op_e br_op; cond_e br_cond;
  logic [PC_W-1:0] br_target, pc;
  flags_t flags;
  logic [N_CIN-1:0] ic;

  branch_unit dut (.*);
  always #5 clk = ~clk;

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int m_pc; logic m_halt, cnd;
    int n_taken = 0;
    br_op = BR_NEXT; br_cond = CND_Z; br_target = '0; flags = '0; ic = '0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    m_pc = 0; m_halt = 0;
    repeat (4000) begin
      @(negedge clk);
      run       = ($urandom_range(0, 50) != 0);
      br_op     = br_op_e'($urandom_range(0, 12) == 0 ? 4 : $urandom_range(0, 3));
      br_cond   = cond_e'($urandom_range(0, 5));
      br_target = PC_W'($urandom);
      flags     = flags_t'($urandom);
      ic        = N_CIN'($urandom);
      case (br_cond)
        CND_Z: cnd = flags.z;  CND_N: cnd = flags.n;  CND_C: cnd = flags.c;
        CND_VERR: cnd = flags.verr; CND_IC0: cnd = ic[0]; default: cnd = ic[1];
      endcase
      if (!run) begin m_pc = 0; m_halt = 0; end
      else if (!m_halt) begin
        case (br_op)
          BR_JMP:  m_pc = br_target;
          BR_IF:   begin m_pc = cnd ? br_target : (m_pc + 1) % IMEM_DEPTH; n_taken += cnd; end
          BR_IFN:  m_pc = cnd ? (m_pc + 1) % IMEM_DEPTH : br_target;
          BR_HALT: m_halt = 1;
          default: m_pc = (m_pc + 1) % IMEM_DEPTH;
        endcase
      end
      @(posedge clk); #1;
      checks++;
      if (pc !== PC_W'(m_pc) || halted !== m_halt) begin
        failures++;
        $display("FAIL pc=%0d exp %0d halted=%b exp %b", pc, m_pc, halted, m_halt);
      end
    end
    if (n_taken == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

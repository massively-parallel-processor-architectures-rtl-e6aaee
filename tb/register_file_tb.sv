// register_file_tb: random reads and writes on all ports, rotation and the
// read-only ranges, compared every cycle with a model of the register map.
module register_file_tb;
  import tcpa_pkg::*;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0, rotate;
  raddr_t raddr [NRP];
  word_t  rdata [NRP];
  word_t  imm;
  logic   wen [NWP];
  raddr_t waddr [NWP];
  word_t  wdata [NWP];
  word_t  id_in [N_IN];
  logic [N_CIN-1:0]  ic_in;
  word_t  od_out [N_OUT];
  logic [N_COUT-1:0] oc_out;

  register_file dut (.*);
  always #5 clk = ~clk;

  // model
  word_t m_gp [N_GP], m_rot [N_ROT], m_od [N_OUT];
  logic [N_COUT-1:0] m_oc;
  int m_base;

  function automatic word_t m_rd(raddr_t a);
    if (a < 8)  return m_gp[a];
    if (a < 12) return m_rot[(m_base + a - 8) % N_ROT];
    if (a < 16) return id_in[a - 12];
    if (a < 20) return m_od[a - 16];
    if (a < 22) return word_t'(ic_in[a - 20]);
    if (a < 24) return word_t'(m_oc[a - 22]);
    if (a == 31) return imm;
    return '0;
  endfunction

  initial begin
    #2000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int i = 0; i < N_GP; i++) m_gp[i] = '0;
    for (int i = 0; i < N_ROT; i++) m_rot[i] = '0;
    for (int i = 0; i < N_OUT; i++) m_od[i] = '0;
    m_oc = '0; m_base = 0;
    for (int p = 0; p < NWP; p++) begin wen[p] = 0; waddr[p] = '0; wdata[p] = '0; end
    for (int p = 0; p < NRP; p++) raddr[p] = '0;
    for (int i = 0; i < N_IN; i++) id_in[i] = '0;
    ic_in = '0; imm = '0; rotate = 0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    repeat (3000) begin
      @(negedge clk);
      for (int p = 0; p < NRP; p++) raddr[p] = raddr_t'($urandom);
      for (int p = 0; p < NWP; p++) begin
        wen[p]   = $urandom_range(0, 1);
        waddr[p] = ($urandom_range(0, 3) == 0) ? raddr_t'($urandom) : raddr_t'($urandom_range(0, 11));
        wdata[p] = word_t'($urandom);
      end
      for (int i = 0; i < N_IN; i++) id_in[i] = word_t'($urandom);
      ic_in  = N_CIN'($urandom);
      imm    = word_t'($urandom);
      rotate = ($urandom_range(0, 4) == 0);
      #1;
      for (int p = 0; p < NRP; p++) begin
        checks++;
        if (rdata[p] !== m_rd(raddr[p])) begin
          failures++;
          $display("FAIL read port %0d addr %0d = %h exp %h", p, raddr[p], rdata[p], m_rd(raddr[p]));
        end
      end
      // model update (later write ports win)
      for (int p = 0; p < NWP; p++) begin
        if (wen[p]) begin
          if (waddr[p] < 8)                          m_gp[waddr[p]] = wdata[p];
          else if (waddr[p] < 12)                    m_rot[(m_base + waddr[p] - 8) % N_ROT] = wdata[p];
          else if (waddr[p] >= 16 && waddr[p] < 20)  m_od[waddr[p] - 16] = wdata[p];
          else if (waddr[p] >= 22 && waddr[p] < 24)  m_oc[waddr[p] - 22] = wdata[p][0];
        end
      end
      if (rotate) m_base = (m_base + 1) % N_ROT;
      @(posedge clk); #1;
      for (int i = 0; i < N_OUT; i++) begin
        checks++;
        if (od_out[i] !== m_od[i]) begin failures++; $display("FAIL od%0d", i); end
      end
      checks++;
      if (oc_out !== m_oc) begin failures++; $display("FAIL oc"); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

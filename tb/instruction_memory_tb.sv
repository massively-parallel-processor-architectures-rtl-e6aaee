// instruction_memory_tb: fills all words with random VLIW words, reads them
// back in random order, rewrites some, checks that a write lands only at the
// next clock edge.
module instruction_memory_tb;
  import tcpa_pkg::*;
  int checks = 0, failures = 0;
  logic clk = 0, we = 0;
  logic [PC_W-1:0] waddr, raddr;
  instr_t wdata, rdata;
  instr_t model [IMEM_DEPTH];

  instruction_memory dut (.*);
  always #5 clk = ~clk;

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic instr_t rnd();
    logic [INSTR_W-1:0] v;
    for (int i = 0; i < INSTR_W; i++) v[i] = 1'($urandom);
    return instr_t'(v);
  endfunction

  initial begin
    raddr = '0; waddr = '0; wdata = '0;
    for (int i = 0; i < IMEM_DEPTH; i++) begin
      @(negedge clk);
      we = 1; waddr = PC_W'(i); wdata = rnd(); model[i] = wdata;
    end
    @(negedge clk) we = 0;
    repeat (500) begin
      @(negedge clk);
      raddr = PC_W'($urandom);
      if ($urandom_range(0, 2) == 0) begin
        we = 1; waddr = PC_W'($urandom); wdata = rnd();
        if (waddr == raddr) begin
          #1 checks++;
          if (rdata !== model[raddr]) begin failures++; $display("FAIL write visible before edge"); end
        end
        model[waddr] = wdata;
      end else begin
        we = 0;
        #1 checks++;
        if (rdata !== model[raddr]) begin failures++; $display("FAIL addr %0d", raddr); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

// io_buffer: one I/O buffer on the border of the processor array.
//
// The paper surrounds the array with I/O buffers that can be configured to
// act as FIFOs or as random access memories, and lets several buffer banks be
// concatenated into one larger memory. This buffer has BANKS banks of DEPTH
// words, one per data channel of the border link it serves.
//
// Each channel c is configured by the `ctrl` register:
//   mode[c] : 0 FIFO, 1 RAM;      dir[c] : 0 to the array, 1 from the array
//   concat  : 1 joins all banks into one memory of BANKS*DEPTH words served by
//             channel 0 (the other channels are then idle)
// Array side (the PE's control-network bit is the strobe, this design's
// choice, since TCPA programs are statically scheduled and need no
// handshake): on arr_strobe every active channel advances by one word -- a
// to-array FIFO pops, a from-array FIFO pushes arr_wd[c], a RAM channel
// reads or writes at the address of its AGU and steps the AGU. arr_rd[c]
// shows the word the array may read now (FIFO head or RAM word at the AGU
// address). arr_avail tells the array that channel 0 has a word (a to-array
// FIFO that is not empty, a from-array FIFO that is not full, or RAM).
// Host side (control processor): h_we / h_re with h_chan. RAM channel: h_we
// writes word h_addr of the channel, h_rdata is word h_addr. FIFO channel:
// h_we pushes, h_re pops, h_rdata is the head. h_level is the fill level.
// Configuration: cfg_we with cfg_addr 0 = ctrl {concat, dir[BANKS], mode[BANKS]}
// (also empties the FIFOs and restarts the AGUs), 1+3c / 2+3c / 3+3c = AGU
// base / stride / length of channel c (length 0 means the whole channel).
// Reads of the memory are combinational, writes take effect at the rising edge.
// Sizes, register map and strobe protocol are this design's choices.
module io_buffer
  import tcpa_pkg::*;
#(
  parameter int unsigned W      = DATA_W,
  parameter int unsigned DEPTH  = 256,
  parameter int unsigned BANKS  = D_CH,
  parameter int unsigned AW     = $clog2(BANKS*DEPTH),
  parameter int unsigned CHW    = (BANKS > 1) ? $clog2(BANKS) : 1
) (
  input  logic              clk,
  input  logic              rst_n,
  // configuration
  input  logic              cfg_we,
  input  logic [3:0]        cfg_addr,
  input  logic [AW:0]       cfg_wdata,
  // host side
  input  logic              h_we,
  input  logic              h_re,
  input  logic [CHW-1:0]    h_chan,
  input  logic [AW-1:0]     h_addr,
  input  logic [W-1:0]      h_wdata,
  output logic [W-1:0]      h_rdata,
  output logic [AW:0]       h_level,
  // array side
  input  logic              arr_strobe,
  input  logic [W-1:0]      arr_wd [BANKS],
  output logic [W-1:0]      arr_rd [BANKS],
  output logic              arr_avail
);
  logic [W-1:0]    mem [BANKS*DEPTH];
  logic [BANKS-1:0] mode, dir;
  logic            concat;
  logic [AW-1:0]   a_base [BANKS], a_stride [BANKS];
  logic [AW:0]     a_len  [BANKS];
  logic [AW-1:0]   rd_ptr [BANKS], wr_ptr [BANKS], agu_addr [BANKS];
  logic [AW:0]     level  [BANKS];
  logic [AW:0]     cap    [BANKS];
  logic [AW-1:0]   offs   [BANKS];
  logic            active [BANKS];
  logic            agu_wrap [BANKS];
  logic            agu_step [BANKS];
  logic [AW:0]     agu_len  [BANKS];
  logic            load;
  logic            a_pop [BANKS], a_push [BANKS], h_pop [BANKS], h_push [BANKS];

  assign load = cfg_we && cfg_addr == 4'd0;

  always_comb begin
    for (int c = 0; c < BANKS; c++) begin
      active[c] = (c == 0) || !concat;
      cap[c]    = concat ? (AW+1)'(BANKS*DEPTH) : (AW+1)'(DEPTH);
      offs[c]   = AW'(c*DEPTH);
      agu_len[c]= (a_len[c] == '0 || a_len[c] > cap[c]) ? cap[c] : a_len[c];
      a_pop[c]  = arr_strobe && active[c] && !mode[c] && !dir[c] && level[c] != '0;
      a_push[c] = arr_strobe && active[c] && !mode[c] &&  dir[c] && level[c] != cap[c];
      h_push[c] = h_we && h_chan == CHW'(c) && active[c] && !mode[c] && !dir[c] && level[c] != cap[c];
      h_pop[c]  = h_re && h_chan == CHW'(c) && active[c] && !mode[c] &&  dir[c] && level[c] != '0;
      agu_step[c] = arr_strobe && active[c] && mode[c];
      if (!active[c])   arr_rd[c] = '0;
      else if (mode[c]) arr_rd[c] = mem[AW'(offs[c] + agu_addr[c])];
      else              arr_rd[c] = mem[AW'(offs[c] + rd_ptr[c])];
    end
    arr_avail = mode[0] ? 1'b1 : (dir[0] ? (level[0] != cap[0]) : (level[0] != '0));
    h_level   = level[h_chan];
    if (mode[h_chan]) h_rdata = mem[AW'(offs[h_chan] + h_addr)];
    else              h_rdata = mem[AW'(offs[h_chan] + rd_ptr[h_chan])];
  end

  for (genvar c = 0; c < BANKS; c++) begin : g_agu
    agu #(.AW(AW)) u_agu (
      .clk    (clk),
      .rst_n  (rst_n),
      .load   (load),
      .step   (agu_step[c]),
      .base   (a_base[c]),
      .stride (a_stride[c]),
      .len    (agu_len[c]),
      .addr   (agu_addr[c]),
      .wrap   (agu_wrap[c])
    );
  end

  function automatic logic [AW-1:0] inc(logic [AW-1:0] p, logic [AW:0] cp);
    return ((AW+1)'(p) + 1'b1 == cp) ? '0 : p + 1'b1;
  endfunction

  // configuration registers and FIFO pointers
  always_ff @(posedge clk) begin
    if (!rst_n) begin
      mode <= '0; dir <= '0; concat <= 1'b0;
      for (int c = 0; c < BANKS; c++) begin
        a_base[c] <= '0; a_stride[c] <= AW'(1); a_len[c] <= '0;
        rd_ptr[c] <= '0; wr_ptr[c] <= '0; level[c] <= '0;
      end
    end else begin
      if (cfg_we) begin
        if (cfg_addr == 4'd0) begin
          mode   <= cfg_wdata[BANKS-1:0];
          dir    <= cfg_wdata[2*BANKS-1:BANKS];
          concat <= cfg_wdata[2*BANKS];
        end
        for (int c = 0; c < BANKS; c++) begin
          if (cfg_addr == 4'(1 + 3*c)) a_base[c]   <= cfg_wdata[AW-1:0];
          if (cfg_addr == 4'(2 + 3*c)) a_stride[c] <= cfg_wdata[AW-1:0];
          if (cfg_addr == 4'(3 + 3*c)) a_len[c]    <= cfg_wdata;
        end
      end
      for (int c = 0; c < BANKS; c++) begin
        if (load) begin
          rd_ptr[c] <= '0; wr_ptr[c] <= '0; level[c] <= '0;
        end else begin
          if (a_pop[c] || h_pop[c])   rd_ptr[c] <= inc(rd_ptr[c], cap[c]);
          if (a_push[c] || h_push[c]) wr_ptr[c] <= inc(wr_ptr[c], cap[c]);
          level[c] <= level[c] + (AW+1)'(a_push[c] || h_push[c]) - (AW+1)'(a_pop[c] || h_pop[c]);
        end
      end
    end
  end

  // memory writes: array first, the host wins a clash
  always_ff @(posedge clk) begin
    for (int c = 0; c < BANKS; c++) begin
      if (a_push[c])
        mem[AW'(offs[c] + wr_ptr[c])] <= arr_wd[c];
      if (agu_step[c] && dir[c])
        mem[AW'(offs[c] + agu_addr[c])] <= arr_wd[c];
    end
    if (h_push[h_chan])
      mem[AW'(offs[h_chan] + wr_ptr[h_chan])] <= h_wdata;
    if (h_we && mode[h_chan] && active[h_chan])
      mem[AW'(offs[h_chan] + h_addr)] <= h_wdata;
  end
endmodule

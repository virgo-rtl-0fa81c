// tb_dma_engine: random 2-D copy commands in all five directions (global to
// shared, shared to global, accumulator to global, global to accumulator,
// accumulator to shared) against behavioural global, shared and accumulator
// memories with random back-pressure and random global-memory latency.
// Every destination line is compared with a reference copy; the test also
// checks one 'done' pulse per command and that busy drops at the end.
module tb_dma_engine;
  import virgo_pkg::*;
  logic clk = 0, rst_n = 0;
  logic cmd_valid, cmd_ready, busy, done;
  dma_cmd_t cmd;
  gmem_req_t gmem_req; logic gmem_ready; gmem_rsp_t gmem_rsp;
  logic smem_rd_valid, smem_rd_ready, smem_rsp_valid, smem_wr_valid, smem_wr_ready;
  logic [31:0] smem_rd_addr, smem_wr_addr;
  logic [LINE_BITS-1:0] smem_rsp_data, smem_wr_data;
  logic acc_valid, acc_we, acc_ready, acc_rsp_valid;
  logic [15:0] acc_row;
  logic [LINE_BITS-1:0] acc_wdata, acc_rdata;

  localparam int GLINES = 4096;  // 256 KB of modelled global memory
  localparam int SLINES = SMEM_BYTES / LINE_BYTES;
  logic [LINE_BITS-1:0] gmem [GLINES], smem [SLINES], accm [ACC_ROWS];
  logic [LINE_BITS-1:0] g_ref [GLINES], s_ref [SLINES], a_ref [ACC_ROWS];
  int checks = 0, failures = 0, dones = 0, per_dir [5];

  dma_engine dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // global memory: random ready, reads answered after 1..6 cycles
  logic [LINE_BITS-1:0] g_pend [$];
  int g_delay [$];
  always @(posedge clk) begin
    gmem_rsp.valid <= 1'b0;
    if (g_delay.size() > 0) begin
      if (g_delay[0] <= 1) begin
        gmem_rsp.valid <= 1'b1; gmem_rsp.rdata <= g_pend.pop_front(); void'(g_delay.pop_front());
      end else g_delay[0] = g_delay[0] - 1;
    end
    if (gmem_req.valid && gmem_ready) begin
      if (gmem_req.we) gmem[gmem_req.addr[6 +: 12]] <= gmem_req.wdata;
      else begin g_pend.push_back(gmem[gmem_req.addr[6 +: 12]]); g_delay.push_back(1 + int'($urandom % 6)); end
    end
    gmem_ready <= ($urandom % 4) != 0;
    smem_rd_ready <= ($urandom % 3) != 0;
    smem_wr_ready <= ($urandom % 3) != 0;
    acc_ready <= ($urandom % 3) != 0;
    smem_rsp_valid <= smem_rd_valid && smem_rd_ready;
    if (smem_rd_valid && smem_rd_ready) smem_rsp_data <= smem[smem_rd_addr[6 +: 11]];
    if (smem_wr_valid && smem_wr_ready) smem[smem_wr_addr[6 +: 11]] <= smem_wr_data;
    acc_rsp_valid <= acc_valid && acc_ready && !acc_we;
    if (acc_valid && acc_ready && !acc_we) acc_rdata <= accm[acc_row[8:0]];
    if (acc_valid && acc_ready && acc_we) accm[acc_row[8:0]] <= acc_wdata;
  end
  always @(posedge clk) if (rst_n && done) dones++;

  function automatic logic [LINE_BITS-1:0] rnd_line();
    logic [LINE_BITS-1:0] v;
    for (int w = 0; w < SUBBANKS; w++) v[w*32 +: 32] = $urandom;
    return v;
  endfunction

  initial begin
    int ncmd;
    cmd_valid = 0; cmd = '0;
    for (int i = 0; i < GLINES; i++) begin gmem[i] = rnd_line(); g_ref[i] = gmem[i]; end
    for (int i = 0; i < SLINES; i++) begin smem[i] = rnd_line(); s_ref[i] = smem[i]; end
    for (int i = 0; i < ACC_ROWS; i++) begin accm[i] = rnd_line(); a_ref[i] = accm[i]; end
    repeat (3) @(posedge clk); rst_n = 1;
    ncmd = 0;
    for (int t = 0; t < 60; t++) begin
      dma_cmd_t c;
      int sl, dl, s_lines, d_lines, sstr, dstr;
      c.dir   = dma_dir_e'($urandom % 5);
      c.rows  = 16'(1 + $urandom % 8);
      c.lines = 16'(1 + $urandom % 4);
      s_lines = (c.dir == DMA_G2S || c.dir == DMA_G2A) ? GLINES : (c.dir == DMA_S2G) ? SLINES : ACC_ROWS;
      d_lines = (c.dir == DMA_S2G || c.dir == DMA_A2G) ? GLINES : (c.dir == DMA_G2A) ? ACC_ROWS : SLINES;
      sstr = int'(c.lines) + int'($urandom % 3);
      dstr = int'(c.lines) + int'($urandom % 3);
      sl = int'($urandom % (s_lines - 8 * sstr));
      dl = int'($urandom % (d_lines - 8 * dstr));
      c.src = 32'(sl * LINE_BYTES); c.dst = 32'(dl * LINE_BYTES);
      c.src_stride = 32'(sstr * LINE_BYTES); c.dst_stride = 32'(dstr * LINE_BYTES);
      // reference copy (commands run in order)
      for (int r = 0; r < int'(c.rows); r++)
        for (int l = 0; l < int'(c.lines); l++) begin
          logic [LINE_BITS-1:0] v;
          int si, di;
          si = sl + r * sstr + l; di = dl + r * dstr + l;
          unique case (c.dir)
            DMA_G2S, DMA_G2A: v = g_ref[si];
            DMA_S2G:          v = s_ref[si];
            default:          v = a_ref[si];
          endcase
          unique case (c.dir)
            DMA_S2G, DMA_A2G: g_ref[di] = v;
            DMA_G2A:          a_ref[di] = v;
            default:          s_ref[di] = v;
          endcase
        end
      per_dir[int'(c.dir)]++;
      @(negedge clk);
      cmd_valid = 1; cmd = c;
      @(posedge clk);
      while (!cmd_ready) @(posedge clk);
      @(negedge clk);
      cmd_valid = 0;
      ncmd++;
      repeat ($urandom % 40) @(negedge clk);
    end
    while (busy) @(posedge clk);
    repeat (10) @(posedge clk);
    for (int i = 0; i < GLINES; i++) begin checks++; if (gmem[i] !== g_ref[i]) begin failures++; if (failures < 5) $display("FAIL gmem line %0d", i); end end
    for (int i = 0; i < SLINES; i++) begin checks++; if (smem[i] !== s_ref[i]) begin failures++; if (failures < 5) $display("FAIL smem line %0d", i); end end
    for (int i = 0; i < ACC_ROWS; i++) begin checks++; if (accm[i] !== a_ref[i]) begin failures++; if (failures < 5) $display("FAIL acc row %0d", i); end end
    checks++;
    if (dones != ncmd) begin failures++; $display("FAIL done pulses %0d for %0d commands", dones, ncmd); end
    for (int d = 0; d < 5; d++) begin
      checks++;
      if (per_dir[d] == 0) begin failures++; $display("FAIL direction %0d never exercised", d); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

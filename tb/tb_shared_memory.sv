// tb_shared_memory: random traffic from all lanes of all cores (aligned and
// unaligned words, reads and writes), from the matrix-unit and DMA wide
// ports, and MMIO accesses, checked against a byte-addressed reference model.
// Checks: read data, one-cycle response timing, that the matrix unit is never
// stalled, that a wide write fills one line across all subbanks in one cycle,
// that lanes stall while a wide request holds their bank, and that MMIO
// requests leave on the MMIO port.
module tb_shared_memory;
  import virgo_pkg::*;
  logic clk = 0, rst_n = 0;
  lane_req_t [NUM_CORES-1:0][LANES-1:0] lane_req;
  logic      [NUM_CORES-1:0][LANES-1:0] lane_ready;
  lane_rsp_t [NUM_CORES-1:0][LANES-1:0] lane_rsp;
  logic mu_rd_valid, mu_rd_ready, mu_rsp_valid, dma_rd_valid, dma_rd_ready, dma_rsp_valid;
  logic dma_wr_valid, dma_wr_ready, mmio_valid, mmio_we, mmio_ready;
  logic [31:0] mu_rd_addr, dma_rd_addr, dma_wr_addr, mmio_addr, mmio_wdata, mmio_rdata;
  logic [LINE_BITS-1:0] mu_rsp_data, dma_rsp_data, dma_wr_data;
  int checks = 0, failures = 0, lane_stalls = 0, mmio_seen = 0, unaligned_ops = 0, wide_ops = 0;
  logic [31:0] model [SMEM_BYTES/4];

  shared_memory dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // MMIO target: returns the address it was given, one cycle later
  always @(posedge clk) begin
    mmio_ready <= ($urandom % 2) == 0;
    if (mmio_valid && mmio_ready) begin mmio_rdata <= mmio_addr ^ 32'h5A5A_0000; mmio_seen++; end
  end

  // lane driver: one outstanding request per lane
  task automatic lane_op(int c, int l, logic we, logic [31:0] addr, logic [31:0] wdata);
    logic [31:0] exp_d;
    @(negedge clk);
    lane_req[c][l] = '{valid: 1'b1, we: we, addr: addr, wdata: wdata};
    @(posedge clk);
    while (!lane_ready[c][l]) begin lane_stalls++; @(posedge clk); end
    if ((addr & MMIO_MASK) == MMIO_BASE) exp_d = addr ^ 32'h5A5A_0000;
    else begin
      exp_d = model[addr[16:2]];
      if (we) model[addr[16:2]] = wdata;
    end
    @(negedge clk);
    lane_req[c][l] = '0;
    checks++;
    if (!lane_rsp[c][l].valid || (!we && lane_rsp[c][l].rdata !== exp_d)) begin
      failures++;
      if (failures < 10) $display("FAIL lane %0d.%0d addr %h got %h exp %h v%0d", c, l, addr, lane_rsp[c][l].rdata, exp_d, lane_rsp[c][l].valid);
    end
  endtask

  task automatic core_traffic(int c, int ops);
    for (int i = 0; i < ops; i++) begin
      int l;
      logic [31:0] a;
      l = int'($urandom % LANES);
      // region 0x10000..0x1FFFF (banks 2, 3): lanes only; bank 0 line 0.. shared with wide reads
      a = 32'h10000 + 32'(c) * 32'h2000 + 32'(($urandom % 256) * LANES + l) * 4;
      if ($urandom % 3 == 0) begin a = a + 4; unaligned_ops++; end
      if ($urandom % 8 == 0) a = MMIO_BASE + 32'(($urandom % 64) * 4);
      if ($urandom % 5 == 0) lane_op(c, l, 1'b0, 32'(($urandom % 4096) * 4), 0);  // bank 0/1 reads
      else lane_op(c, l, $urandom % 2 == 1, a, $urandom);
    end
  endtask

  task automatic wide_traffic(int n);
    for (int i = 0; i < n; i++) begin
      logic [31:0] ra, wa, ra2;
      logic [LINE_BITS-1:0] wd;
      ra = 32'(($urandom % 512) * LINE_BYTES);                   // matrix unit: bank 0
      ra2 = 32'h8000 + 32'(($urandom % 256) * LINE_BYTES);       // DMA read: bank 1
      if ($urandom % 4 == 0) ra2 = ra2 - 32'h8000;               // sometimes bank 0: must wait
      wa = 32'h8000 + 32'h4000 + 32'(($urandom % 256) * LINE_BYTES);  // DMA write: bank 1 upper
      for (int w = 0; w < SUBBANKS; w++) wd[w*32 +: 32] = $urandom;
      @(negedge clk);
      mu_rd_valid = 1; mu_rd_addr = ra;
      dma_rd_valid = 1; dma_rd_addr = ra2;
      dma_wr_valid = 1; dma_wr_addr = wa; dma_wr_data = wd;
      @(posedge clk);
      checks++;
      if (!mu_rd_ready || !dma_wr_ready) begin failures++; $display("FAIL wide port stalled"); end
      @(negedge clk);
      mu_rd_valid = 0; dma_wr_valid = 0;
      checks++;
      for (int w = 0; w < SUBBANKS; w++)
        if (!mu_rsp_valid || mu_rsp_data[w*32 +: 32] !== model[ra[16:2] + 15'(w)]) begin
          failures++; $display("FAIL mu line %h word %0d", ra, w); break;
        end
      for (int w = 0; w < SUBBANKS; w++) model[wa[16:2] + 15'(w)] = wd[w*32 +: 32];
      // DMA read completes once it wins its bank
      if (!dma_rsp_valid) begin
        dma_rd_valid = 1;
        @(posedge clk); @(negedge clk);
      end
      dma_rd_valid = 0;
      checks++;
      for (int w = 0; w < SUBBANKS; w++)
        if (!dma_rsp_valid || dma_rsp_data[w*32 +: 32] !== model[ra2[16:2] + 15'(w)]) begin
          failures++; $display("FAIL dma line %h word %0d", ra2, w); break;
        end
      wide_ops++;
      repeat ($urandom % 3) @(negedge clk);
    end
  endtask

  initial begin
    lane_req = '0; mu_rd_valid = 0; dma_rd_valid = 0; dma_wr_valid = 0;
    mu_rd_addr = 0; dma_rd_addr = 0; dma_wr_addr = 0; dma_wr_data = '0;
    for (int i = 0; i < SMEM_BYTES / 4; i++) model[i] = 32'(i) * 32'h9E37_79B9;
    repeat (3) @(posedge clk); rst_n = 1;
    // initialise the whole memory through the DMA write port
    for (int ln = 0; ln < SMEM_BYTES / LINE_BYTES; ln++) begin
      @(negedge clk);
      dma_wr_valid = 1; dma_wr_addr = 32'(ln * LINE_BYTES);
      for (int w = 0; w < SUBBANKS; w++) dma_wr_data[w*32 +: 32] = model[ln * SUBBANKS + w];
    end
    @(negedge clk); dma_wr_valid = 0;
    fork
      core_traffic(0, 300);
      core_traffic(1, 300);
      core_traffic(2, 300);
      core_traffic(3, 300);
      wide_traffic(300);
    join
    checks++;
    if (lane_stalls == 0 || mmio_seen == 0 || unaligned_ops == 0 || wide_ops == 0) begin
      failures++; $display("FAIL mechanism missing: stalls %0d mmio %0d unaligned %0d", lane_stalls, mmio_seen, unaligned_ops);
    end
    $display("lane stall cycles %0d, mmio %0d, unaligned %0d, wide %0d", lane_stalls, mmio_seen, unaligned_ops, wide_ops);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

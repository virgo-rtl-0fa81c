// tb_virgo_cluster: end-to-end test of the cluster at its default sizes.
//
// Four modelled cores drive the lane ports; a behavioural global memory answers
// the DMA.  The test runs the tiled-GEMM flow of the programming model on one
// full 128 x 64 x 128 tile with FP16 operands holding small integers (so every
// FP32 sum is exact and the reference is plain integer arithmetic):
//   1. DMA global -> shared copies of A (bank 0) and B (bank 1), fence,
//      cluster barrier;
//   2. matrix-unit command C = A*B (overwrite), while the cores hammer shared
//      memory with aligned and unaligned loads/stores, some to the bank the
//      matrix unit is reading (they must wait: wide requests have priority);
//   3. a second command with the accumulate flag (C += A*B), fence;
//   4. DMA accumulator -> global store of C, a shared -> global copy and an
//      accumulator -> shared copy; results checked against the reference.
// A burst of DMA commands overfills the command queue to exercise the
// back-pressure of the MMIO start register.  Each mechanism is counted and a
// mechanism that never happened counts as a failure.  Also checks that one
// matrix command finishes within the cycle budget of the FSM schedule.
module tb_virgo_cluster;
  import virgo_pkg::*;
  import fp_ref_pkg::*;

  localparam int M = 128, N = 64, K = 128;
  localparam logic [31:0] GA = 32'h1000_0000, GB = 32'h1100_0000, GC = 32'h1200_0000,
                          GS = 32'h1300_0000, GT = 32'h1400_0000;
  localparam logic [31:0] SA = 32'h0000, SB = 32'h8000, SCOPY = 32'h10000;

  logic clk = 0, rst_n = 0;
  lane_req_t [NUM_CORES-1:0][LANES-1:0] lane_req;
  logic      [NUM_CORES-1:0][LANES-1:0] lane_ready;
  lane_rsp_t [NUM_CORES-1:0][LANES-1:0] lane_rsp;
  logic [NUM_CORES-1:0] bar_valid;
  logic [NUM_CORES-1:0][$clog2(NUM_BARRIERS)-1:0] bar_id;
  logic [NUM_BARRIERS-1:0] bar_release;
  gmem_req_t gmem_req;
  logic      gmem_ready;
  gmem_rsp_t gmem_rsp;
  logic mu_busy, dma_busy;

  virgo_cluster dut (.*);

  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  int cycle = 0;
  always @(posedge clk) cycle++;

  // mechanism counters
  int n_dma_g2s = 0, n_dma_a2g = 0, n_dma_s2g = 0, n_dma_a2s = 0, n_mu_overwrite = 0,
      n_mu_accumulate = 0, n_barrier = 0, n_lane_stall_wide = 0, n_unaligned = 0,
      n_mmio_backpressure = 0, n_aligned = 0;

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ---------------- global memory model ----------------
  logic [LINE_BITS-1:0] gmem [logic [31:0]];
  always @(posedge clk) begin
    gmem_rsp.valid <= 1'b0;
    if (rst_n && gmem_req.valid && gmem_ready) begin
      if (gmem_req.we) gmem[gmem_req.addr] = gmem_req.wdata;
      else begin
        gmem_rsp.valid <= 1'b1;
        gmem_rsp.rdata <= gmem.exists(gmem_req.addr) ? gmem[gmem_req.addr] : '0;
      end
    end
    gmem_ready <= ($urandom % 4) != 0;     // occasional back-pressure
  end

  // ---------------- operands ----------------
  int A [M][K];
  int B [K][N];
  int C [M][N];

  function automatic void put_half(input logic [31:0] base, input int idx, input logic [15:0] h);
    logic [31:0] byte_a, line;
    byte_a = base + 32'(idx * 2);
    line = byte_a & ~32'(LINE_BYTES - 1);
    if (!gmem.exists(line)) gmem[line] = '0;
    gmem[line][(byte_a % LINE_BYTES) * 8 +: 16] = h;
  endfunction

  function automatic logic [31:0] get_word(input logic [31:0] byte_a);
    logic [31:0] line;
    line = byte_a & ~32'(LINE_BYTES - 1);
    if (!gmem.exists(line)) return 32'hDEAD_BEEF;
    return gmem[line][(byte_a % LINE_BYTES) * 8 +: 32];
  endfunction

  // ---------------- lane access (one request per lane at a time) ----------------
  task automatic lane_access(input int c, input int l, input logic we, input logic [31:0] addr,
                             input logic [31:0] wdata, output logic [31:0] rdata);
    int waited = 0;
    @(negedge clk);
    lane_req[c][l] = '{valid: 1'b1, we: we, addr: addr, wdata: wdata};
    @(posedge clk);
    while (!lane_ready[c][l]) begin
      waited++;
      if (dut.mu_rd_valid && ((addr >> 15) == (dut.mu_rd_addr >> 15))) n_lane_stall_wide++;
      @(posedge clk);
    end
    @(negedge clk);
    lane_req[c][l] = '0;
    if (!lane_rsp[c][l].valid) begin
      failures++; $display("FAIL no response core %0d lane %0d", c, l);
    end
    rdata = lane_rsp[c][l].rdata;
  endtask

  task automatic mmio_wr(input int idx, input logic [31:0] v);
    logic [31:0] d;
    int t0 = cycle;
    lane_access(0, 0, 1'b1, MMIO_BASE + 32'(idx * 4), v, d);
    if (cycle - t0 > 3) n_mmio_backpressure++;
  endtask

  task automatic mmio_rd(input int idx, output logic [31:0] v);
    lane_access(0, 0, 1'b0, MMIO_BASE + 32'(idx * 4), 32'd0, v);
  endtask

  task automatic fence(input int n);
    logic [31:0] s;
    do mmio_rd(R_STATUS, s); while (s > 32'(n));
  endtask

  task automatic dma(input dma_dir_e dir, input logic [31:0] src, input logic [31:0] dst,
                     input int rows, input int lines, input int sstr, input int dstr);
    mmio_wr(R_DMA_SRC, src);
    mmio_wr(R_DMA_DST, dst);
    mmio_wr(R_DMA_SHAPE, {16'(lines), 16'(rows)});
    mmio_wr(R_DMA_SSTR, 32'(sstr));
    mmio_wr(R_DMA_DSTR, 32'(dstr));
    mmio_wr(R_DMA_START, 32'(dir));
  endtask

  task automatic mu(input logic accumulate);
    mmio_wr(R_MU_A, SA);
    mmio_wr(R_MU_B, SB);
    mmio_wr(R_MU_C, 0);
    mmio_wr(R_MU_ASTR, K * 2);
    mmio_wr(R_MU_BSTR, N * 2);
    mmio_wr(R_MU_MNK, {8'd0, 8'(K), 8'(N), 8'(M)});
    mmio_wr(R_MU_FLAGS, 32'(accumulate));
    mmio_wr(R_MU_START, 1);
  endtask

  // ---------------- background SIMT traffic ----------------
  logic traffic_on = 0;
  int traffic_ops = 0;
  task automatic traffic(input int c);
    logic [31:0] d, addr;
    int l;
    while (traffic_on) begin
      l = int'($urandom % LANES);
      // lane l, word index = l (mod LANES) is aligned; +1 word makes it unaligned
      addr = 32'h18000 + 32'(c) * 32'h1000 + 32'(($urandom % 64) * LANES + l) * 4;
      if ($urandom % 3 == 0) addr = addr + 4;                 // unaligned
      if ($urandom % 4 == 0) addr = SA + (addr & 32'h7FFC);   // same bank as A: conflicts
      if (addr[2 +: 3] == 3'(l) && addr < 32'h20000) n_aligned++; else n_unaligned++;
      if (addr >= 32'h18000) begin
        lane_access(c, l, 1'b1, addr, {addr[15:0], 16'(c)}, d);
        lane_access(c, l, 1'b0, addr, 0, d);
        checks++;
        if (d !== {addr[15:0], 16'(c)}) begin
          failures++; $display("FAIL smem lane data %h at %h", d, addr);
        end
      end else begin
        lane_access(c, l, 1'b0, addr, 0, d);               // read only: A must stay intact
        checks++;
        if (d !== get_smem_expect(addr)) begin
          failures++; $display("FAIL smem A read %h at %h exp %h", d, addr, get_smem_expect(addr));
        end
      end
      traffic_ops++;
    end
  endtask

  function automatic logic [31:0] get_smem_expect(input logic [31:0] a);
    // A occupies shared memory from SA, row-major, row stride K*2 bytes
    int idx = int'(a - SA) / 2;
    return {real_to_fp16_int(A[(idx + 1) / K][(idx + 1) % K]), real_to_fp16_int(A[idx / K][idx % K])};
  endfunction

  // ---------------- barrier ----------------
  task automatic barrier(input int id);
    @(negedge clk);
    for (int c = 0; c < NUM_CORES; c++) begin
      bar_valid[c] = 1'b1; bar_id[c] = 2'(id);
      @(negedge clk);
      bar_valid[c] = 1'b0;
    end
    while (!bar_release[id]) @(posedge clk);
    n_barrier++;
  endtask

  // ---------------- the test ----------------
  int t_start, t_end;
  logic [31:0] d;

  initial begin
    lane_req = '0; bar_valid = '0; bar_id = '0; gmem_ready = 1;
    gmem_rsp = '0;
    for (int m = 0; m < M; m++) for (int k = 0; k < K; k++) A[m][k] = int'($urandom % 9) - 4;
    for (int k = 0; k < K; k++) for (int n = 0; n < N; n++) B[k][n] = int'($urandom % 9) - 4;
    for (int m = 0; m < M; m++) for (int n = 0; n < N; n++) begin
      C[m][n] = 0;
      for (int k = 0; k < K; k++) C[m][n] += A[m][k] * B[k][n];
    end
    for (int m = 0; m < M; m++) for (int k = 0; k < K; k++) put_half(GA, m * K + k, real_to_fp16_int(A[m][k]));
    for (int k = 0; k < K; k++) for (int n = 0; n < N; n++) put_half(GB, k * N + n, real_to_fp16_int(B[k][n]));
    repeat (4) @(posedge clk);
    rst_n = 1;

    // 1. bring the operands into shared memory
    dma(DMA_G2S, GA, SA, M, K * 2 / LINE_BYTES, K * 2, K * 2); n_dma_g2s++;
    dma(DMA_G2S, GB, SB, K, N * 2 / LINE_BYTES, N * 2, N * 2); n_dma_g2s++;
    fence(0);
    barrier(0);

    // 2. C = A*B with concurrent SIMT traffic
    traffic_on = 1;
    fork
      traffic(1);
      traffic(2);
      traffic(3);
    join_none
    t_start = cycle;
    mu(1'b0); n_mu_overwrite++;
    do @(posedge clk); while (!mu_busy);
    do @(posedge clk); while (mu_busy);
    t_end = cycle;
    checks++;
    begin
      int budget = (N / DIM) * (K / DIM) * (M + DIM) + 4 * DIM + 40;
      $display("matrix command: %0d cycles (schedule bound %0d), MAC utilisation %0d%%",
               t_end - t_start, budget, (M * N * K / (DIM * DIM)) * 100 / (t_end - t_start));
      if (t_end - t_start > budget) begin failures++; $display("FAIL matrix unit too slow"); end
    end
    // 3. C += A*B
    mu(1'b1); n_mu_accumulate++;
    fence(0);
    traffic_on = 0;
    repeat (50) @(posedge clk);
    barrier(1);

    // 4. results out: accumulator -> global, accumulator -> shared -> global
    dma(DMA_A2G, 32'd0, GC, M, N * 4 / LINE_BYTES, N * 4, N * 4); n_dma_a2g++;
    dma(DMA_A2S, 32'd0, SCOPY, 8, N * 4 / LINE_BYTES, N * 4, N * 4); n_dma_a2s++;
    fence(0);
    dma(DMA_S2G, SCOPY, GS, 8, N * 4 / LINE_BYTES, N * 4, N * 4); n_dma_s2g++;
    // a burst of small copies overfills the DMA queue (back-pressure on START)
    for (int i = 0; i < CMDQ_DEPTH + 2; i++) dma(DMA_S2G, SCOPY, GT + 32'(i * 64), 1, 1, 64, 64);
    fence(0);

    for (int m = 0; m < M; m++) for (int n = 0; n < N; n++) begin
      logic [31:0] e;
      e = real_to_fp32(real'(2 * C[m][n]));
      checks++;
      if (get_word(GC + 32'((m * N + n) * 4)) !== e) begin
        failures++;
        if (failures < 10) $display("FAIL C[%0d][%0d] = %h exp %h", m, n, get_word(GC + 32'((m * N + n) * 4)), e);
      end
      if (m < 8) begin
        checks++;
        if (get_word(GS + 32'((m * N + n) * 4)) !== e) begin
          failures++; $display("FAIL shared copy C[%0d][%0d]", m, n);
        end
      end
    end
    checks++;
    if (get_word(GT + 32'((CMDQ_DEPTH + 1) * 64)) !== real_to_fp32(real'(2 * C[0][0]))) begin
      failures++; $display("FAIL burst copy");
    end
    // a core reads the copy in shared memory directly
    lane_access(2, 0, 1'b0, SCOPY, 0, d);
    checks++;
    if (d !== real_to_fp32(real'(2 * C[0][0]))) begin failures++; $display("FAIL lane read of C"); end

    $display("mechanisms: dma g2s %0d a2g %0d s2g %0d a2s %0d, mu overwrite %0d accumulate %0d, barriers %0d,",
             n_dma_g2s, n_dma_a2g, n_dma_s2g, n_dma_a2s, n_mu_overwrite, n_mu_accumulate, n_barrier);
    $display("  aligned lane ops %0d, unaligned (serialised) %0d, lane cycles stalled by wide reads %0d, MMIO back-pressure %0d, traffic ops %0d",
             n_aligned, n_unaligned, n_lane_stall_wide, n_mmio_backpressure, traffic_ops);
    if (n_dma_g2s == 0 || n_dma_a2g == 0 || n_dma_s2g == 0 || n_dma_a2s == 0) failures++;
    if (n_mu_overwrite == 0 || n_mu_accumulate == 0 || n_barrier == 0) failures++;
    if (n_aligned == 0) failures++;
    if (n_unaligned == 0) failures++;
    if (n_lane_stall_wide == 0) failures++;
    if (n_mmio_backpressure == 0) failures++;
    checks += 6;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

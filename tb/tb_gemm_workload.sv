// tb_gemm_workload: a complete S x S x S FP16 GEMM (S = 256, the smallest GEMM
// size the design is evaluated with; 512 and 1024 only differ in S and run
// time) on the cluster at default parameters, programmed the way a kernel
// would drive it through the MMIO registers of core 0.
//
// The output is cut into 128 x 64 tiles, one per thread block; each tile loops
// over K in steps of 128.  Per step the matrix unit computes on one operand
// buffer pair while the DMA already fetches the next step's A and B tiles into
// the other pair (double buffering: A in bank 0 or 1, B in bank 2), then a
// fence waits for both.  After the last K step the 32 KB accumulator tile is
// stored to global memory with one accumulator -> global DMA.  Operands are
// small integers, so every FP32 sum is exact and the reference is integer
// arithmetic.  Checks every element of C, that accumulate and overwrite
// commands and overlapped DMA/matrix work happened, and reports the matrix
// utilisation over the whole run.
module tb_gemm_workload;
  import virgo_pkg::*;
  import fp_ref_pkg::*;

  localparam int S = 256;
  localparam int TM = 128, TN = 64, TK = 128;
  localparam logic [31:0] GA = 32'h1000_0000, GB = 32'h1100_0000, GC = 32'h1200_0000;
  localparam logic [31:0] SA [2] = '{32'h0000, 32'h8000};
  localparam logic [31:0] SB [2] = '{32'h10000, 32'h14000};

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

  int checks = 0, failures = 0, cycle = 0;
  int n_overwrite = 0, n_accumulate = 0, n_overlap = 0, mu_cycles = 0;
  always @(posedge clk) begin
    cycle++;
    if (mu_busy) mu_cycles++;
    if (mu_busy && dma_busy) n_overlap++;
  end

  initial begin
    repeat (2000000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // global memory: 64-byte lines, random back-pressure, 1-cycle reads
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
    gmem_ready <= ($urandom % 8) != 0;
  end

  int A [S][S];
  int B [S][S];

  function automatic void put_half(input logic [31:0] byte_a, input logic [15:0] h);
    logic [31:0] line;
    line = byte_a & ~32'(LINE_BYTES - 1);
    if (!gmem.exists(line)) gmem[line] = '0;
    gmem[line][(byte_a % LINE_BYTES) * 8 +: 16] = h;
  endfunction

  task automatic mmio_wr(input int idx, input logic [31:0] v);
    @(negedge clk);
    lane_req[0][0] = '{valid: 1'b1, we: 1'b1, addr: MMIO_BASE + 32'(idx * 4), wdata: v};
    @(posedge clk);
    while (!lane_ready[0][0]) @(posedge clk);
    @(negedge clk);
    lane_req[0][0] = '0;
  endtask

  task automatic fence0();
    logic [31:0] s;
    do begin
      @(negedge clk);
      lane_req[0][0] = '{valid: 1'b1, we: 1'b0, addr: MMIO_BASE + 32'(int'(R_STATUS) * 4), wdata: 0};
      @(posedge clk);
      while (!lane_ready[0][0]) @(posedge clk);
      @(negedge clk);
      lane_req[0][0] = '0;
      s = lane_rsp[0][0].rdata;
    end while (s != 0);
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

  // operand tiles of step (mt, nt, kt) into buffer pair b
  task automatic load_tiles(input int mt, input int nt, input int kt, input int b);
    dma(DMA_G2S, GA + 32'(((mt * TM) * S + kt * TK) * 2), SA[b], TM, TK * 2 / LINE_BYTES, S * 2, TK * 2);
    dma(DMA_G2S, GB + 32'(((kt * TK) * S + nt * TN) * 2), SB[b], TK, TN * 2 / LINE_BYTES, S * 2, TN * 2);
  endtask

  task automatic mu(input int b, input logic accumulate);
    mmio_wr(R_MU_A, SA[b]);
    mmio_wr(R_MU_B, SB[b]);
    mmio_wr(R_MU_C, 0);
    mmio_wr(R_MU_ASTR, TK * 2);
    mmio_wr(R_MU_BSTR, TN * 2);
    mmio_wr(R_MU_MNK, {8'd0, 8'(TK), 8'(TN), 8'(TM)});
    mmio_wr(R_MU_FLAGS, 32'(accumulate));
    mmio_wr(R_MU_START, 1);
    if (accumulate) n_accumulate++; else n_overwrite++;
  endtask

  initial begin
    int steps, b, t0, nmu;
    lane_req = '0; bar_valid = '0; bar_id = '0; gmem_ready = 1; gmem_rsp = '0;
    for (int i = 0; i < S; i++) for (int j = 0; j < S; j++) begin
      A[i][j] = int'($urandom % 7) - 3;
      B[i][j] = int'($urandom % 7) - 3;
      put_half(GA + 32'((i * S + j) * 2), real_to_fp16_int(A[i][j]));
      put_half(GB + 32'((i * S + j) * 2), real_to_fp16_int(B[i][j]));
    end
    repeat (4) @(posedge clk);
    rst_n = 1;
    t0 = cycle;
    nmu = 0;
    b = 0;
    load_tiles(0, 0, 0, 0);
    fence0();
    for (int mt = 0; mt < S / TM; mt++)
      for (int nt = 0; nt < S / TN; nt++) begin
        for (int kt = 0; kt < S / TK; kt++) begin
          int nmt, nnt, nkt;
          mu(b, kt != 0); nmu++;
          // prefetch the next step's operands into the other buffer pair
          nkt = kt + 1; nnt = nt; nmt = mt;
          if (nkt == S / TK) begin nkt = 0; nnt = nt + 1; end
          if (nnt == S / TN) begin nnt = 0; nmt = mt + 1; end
          if (nmt < S / TM) load_tiles(nmt, nnt, nkt, 1 - b);
          fence0();
          b = 1 - b;
        end
        // store the finished 128 x 64 FP32 tile: accumulator row m*4+j holds C[m][16j..16j+15]
        dma(DMA_A2G, 32'h0, GC + 32'(((mt * TM) * S + nt * TN) * 4), TM, TN * 4 / LINE_BYTES, TN * 4, S * 4);
        fence0();
      end
    $display("GEMM %0dx%0dx%0d: %0d cycles, %0d matrix commands, MAC utilisation %0d%%",
             S, S, S, cycle - t0, nmu, (S * S * S / (DIM * DIM)) * 100 / (cycle - t0));
    for (int i = 0; i < S; i++)
      for (int j = 0; j < S; j++) begin
        int c;
        logic [31:0] line, got;
        c = 0;
        for (int k = 0; k < S; k++) c += A[i][k] * B[k][j];
        line = GC + 32'((i * S + j) * 4);
        got = gmem.exists(line & ~32'(LINE_BYTES - 1)) ? gmem[line & ~32'(LINE_BYTES - 1)][(line % LINE_BYTES) * 8 +: 32] : 32'hDEAD_BEEF;
        checks++;
        if (got !== real_to_fp32(real'(c))) begin
          failures++;
          if (failures < 10) $display("FAIL C[%0d][%0d] = %h, expected %0d", i, j, got, c);
        end
      end
    checks++;
    if (n_overwrite == 0 || n_accumulate == 0 || n_overlap == 0) begin
      failures++; $display("FAIL mechanism missing: overwrite %0d accumulate %0d overlap %0d", n_overwrite, n_accumulate, n_overlap);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

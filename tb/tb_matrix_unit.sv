// tb_matrix_unit: the matrix unit (command queue, coarse-grain FSM, systolic
// array, accumulator memory) against a behavioural shared-memory wide read
// port with random stalls.  Random FP16 GEMM commands of varying M, N, K are
// queued back to back, some overwriting and some accumulating into the
// previous result; the accumulator memory is then read through the DMA port
// and every element is compared with a reference that rounds to FP32 after
// each multiply-add in array order and after each accumulator addition.
// Also checks one 'done' per command and that busy falls afterwards.
module tb_matrix_unit;
  import virgo_pkg::*;
  import fp_ref_pkg::*;
  logic clk = 0, rst_n = 0;
  logic cmd_valid, cmd_ready, busy, done;
  mu_cmd_t cmd;
  logic rd_valid, rd_ready, rsp_valid;
  logic [31:0] rd_addr;
  logic [LINE_BITS-1:0] rsp_data;
  logic acc_dma_valid, acc_dma_we, acc_dma_ready, acc_dma_rsp_valid;
  logic [15:0] acc_dma_row;
  logic [LINE_BITS-1:0] acc_dma_wdata, acc_dma_rdata;

  localparam int SLINES = SMEM_BYTES / LINE_BYTES;
  logic [LINE_BITS-1:0] smem [SLINES];
  logic [31:0] acc_ref [ACC_ROWS][DIM];
  int checks = 0, failures = 0, dones = 0, stalls = 0, n_acc = 0, n_ovr = 0;

  matrix_unit dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (300000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) begin
    rd_ready <= ($urandom % 8) != 0;
    rsp_valid <= rd_valid && rd_ready;
    if (rd_valid && rd_ready) rsp_data <= smem[rd_addr[6 +: 11]];
    if (rd_valid && !rd_ready) stalls++;
    if (rst_n && done) dones++;
  end

  function automatic void put_h(logic [31:0] byte_a, logic [15:0] h);
    smem[byte_a[6 +: 11]][byte_a[5:1] * 16 +: 16] = h;
  endfunction
  function automatic logic [15:0] get_h(logic [31:0] byte_a);
    return smem[byte_a[6 +: 11]][byte_a[5:1] * 16 +: 16];
  endfunction

  initial begin
    int ncmd;
    logic [31:0] SA, SB;
    cmd_valid = 0; cmd = '0;
    acc_dma_valid = 0; acc_dma_we = 0; acc_dma_row = 0; acc_dma_wdata = '0;
    for (int i = 0; i < SLINES; i++) smem[i] = '0;
    repeat (3) @(posedge clk); rst_n = 1;
    // zero the accumulator memory through the DMA port
    for (int r = 0; r < ACC_ROWS; r++) begin
      @(negedge clk); acc_dma_valid = 1; acc_dma_we = 1; acc_dma_row = 16'(r);
      for (int j = 0; j < DIM; j++) acc_ref[r][j] = 0;
      @(posedge clk); while (!acc_dma_ready) @(posedge clk);
    end
    @(negedge clk); acc_dma_valid = 0; acc_dma_we = 0;
    ncmd = 0;
    for (int t = 0; t < 6; t++) begin
      int M, N, K, astr, bstr, crow, nblk;
      logic accum;
      mu_cmd_t c;
      // operands: one command's A and B, placed in two halves of shared memory
      M = 16 * (1 + int'($urandom % 4)); N = 16 * (1 + int'($urandom % 4)); K = 16 * (1 + int'($urandom % 4));
      if (t == 5) begin M = 128; N = 64; K = 128; end     // one full-size tile
      astr = ((K * 2 + 63) / 64) * 64; bstr = ((N * 2 + 63) / 64) * 64;
      SA = 32'(t % 2) * 32'h4000; SB = 32'h10000 + 32'(t % 2) * 32'h4000;
      // keep the previous command's operands intact: wait for it
      while (busy) @(posedge clk);
      for (int m = 0; m < M; m++) for (int k = 0; k < K; k++) put_h(SA + 32'(m * astr + 2 * k), rand_fp16());
      for (int k = 0; k < K; k++) for (int n = 0; n < N; n++) put_h(SB + 32'(k * bstr + 2 * n), rand_fp16());
      accum = (t > 0) && ($urandom % 2 == 1);
      crow = accum ? 0 : int'($urandom % 4) * 8 * 0;
      if (accum) n_acc++; else n_ovr++;
      // reference
      nblk = N / DIM;
      for (int m = 0; m < M; m++)
        for (int n = 0; n < N; n++) begin
          int row, col;
          row = crow + m * nblk + n / DIM; col = n % DIM;
          for (int kb = 0; kb < K / DIM; kb++) begin
            logic [31:0] ps;
            ps = 0;
            for (int k = kb * DIM; k < kb * DIM + DIM; k++)
              ps = real_to_fp32(fp32_to_real(ps) + fp16_to_real(get_h(SA + 32'(m * astr + 2 * k)))
                                                 * fp16_to_real(get_h(SB + 32'(k * bstr + 2 * n))));
            if (kb == 0 && !accum) acc_ref[row][col] = ps;
            else acc_ref[row][col] = real_to_fp32(fp32_to_real(acc_ref[row][col]) + fp32_to_real(ps));
          end
        end
      c = '{a_addr: SA, b_addr: SB, c_row: 16'(crow), a_stride: 16'(astr), b_stride: 16'(bstr),
            m: 8'(M), n: 8'(N), k: 8'(K), accumulate: accum};
      @(negedge clk); cmd_valid = 1; cmd = c;
      @(posedge clk); while (!cmd_ready) @(posedge clk);
      @(negedge clk); cmd_valid = 0;
      ncmd++;
    end
    while (busy) @(posedge clk);
    repeat (5) @(posedge clk);
    // read back all rows through the DMA port
    for (int r = 0; r < ACC_ROWS; r++) begin
      @(negedge clk); acc_dma_valid = 1; acc_dma_we = 0; acc_dma_row = 16'(r);
      @(posedge clk); while (!acc_dma_ready) @(posedge clk);
      @(negedge clk); acc_dma_valid = 0;
      for (int j = 0; j < DIM; j++) begin
        checks++;
        if (!acc_dma_rsp_valid || acc_dma_rdata[j*32 +: 32] !== acc_ref[r][j]) begin
          failures++;
          if (failures < 10) $display("FAIL acc row %0d col %0d got %h exp %h", r, j, acc_dma_rdata[j*32 +: 32], acc_ref[r][j]);
        end
      end
    end
    checks++;
    if (dones != ncmd || n_acc == 0 || n_ovr == 0 || stalls == 0) begin
      failures++; $display("FAIL dones %0d/%0d acc %0d ovr %0d stalls %0d", dones, ncmd, n_acc, n_ovr, stalls);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

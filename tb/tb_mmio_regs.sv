// tb_mmio_regs: random register writes and read-backs through the MMIO
// window, random START stores for both units with random queue back-pressure
// and random completion pulses.  Checks the staged arguments packed into each
// pushed command, that a START is held while its queue is not ready, that the
// outstanding-command count read from R_STATUS matches a reference counter,
// and the busy-flag registers.
module tb_mmio_regs;
  import virgo_pkg::*;
  logic clk = 0, rst_n = 0;
  logic req_valid, req_we, req_ready;
  logic [31:0] req_addr, req_wdata, rsp_rdata;
  logic mu_cmd_valid, mu_cmd_ready, mu_busy, mu_done;
  logic dma_cmd_valid, dma_cmd_ready, dma_busy, dma_done;
  mu_cmd_t mu_cmd; dma_cmd_t dma_cmd;
  int checks = 0, failures = 0, held = 0, pushes = 0, done_cnt = 0;
  logic [31:0] shadow [64];
  int ref_out = 0;
  int pend_mu = 0, pend_dma = 0;

  mmio_regs dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // units: random queue ready, complete pushed commands at random times
  always @(posedge clk) begin
    mu_cmd_ready  <= ($urandom % 3) != 0;
    dma_cmd_ready <= ($urandom % 3) != 0;
    mu_busy <= $urandom; dma_busy <= $urandom;
    mu_done <= 1'b0; dma_done <= 1'b0;
    if (rst_n) begin
      if (mu_cmd_valid && mu_cmd_ready) pend_mu++;
      if (dma_cmd_valid && dma_cmd_ready) pend_dma++;
      ref_out = ref_out + int'(mu_cmd_valid && mu_cmd_ready) + int'(dma_cmd_valid && dma_cmd_ready)
              - int'(mu_done) - int'(dma_done);
      if (pend_mu > 0 && $urandom % 4 == 0 && !mu_done) begin mu_done <= 1'b1; pend_mu--; end
      if (pend_dma > 0 && $urandom % 4 == 0 && !dma_done) begin dma_done <= 1'b1; pend_dma--; end
    end
  end

  task automatic access(logic we, int idx, logic [31:0] wd, output logic [31:0] rd);
    @(negedge clk);
    req_valid = 1; req_we = we; req_addr = MMIO_BASE + 32'(idx * 4); req_wdata = wd;
    @(posedge clk);
    while (!req_ready) begin held++; @(posedge clk); end
    @(negedge clk);
    req_valid = 0;
    rd = rsp_rdata;
  endtask

  initial begin
    logic [31:0] rd;
    req_valid = 0; req_we = 0; req_addr = 0; req_wdata = 0;
    for (int i = 0; i < 64; i++) shadow[i] = 0;
    repeat (3) @(posedge clk); rst_n = 1;
    for (int t = 0; t < 3000; t++) begin
      int idx, op;
      op = int'($urandom % 10);
      if (op < 4) begin
        idx = int'($urandom % 13);
        if (idx == int'(R_MU_START)) idx = int'(R_MU_A);
        if (idx == int'(R_DMA_START)) idx = int'(R_DMA_SRC);
        shadow[idx] = $urandom;
        access(1'b1, idx, shadow[idx], rd);
      end else if (op < 7) begin
        idx = int'($urandom % 13);
        if (idx == int'(R_MU_START) || idx == int'(R_DMA_START)) idx = int'(R_MU_C);
        access(1'b0, idx, 0, rd);
        checks++;
        if (rd !== shadow[idx]) begin failures++; if (failures < 10) $display("FAIL reg %0d read %h exp %h", idx, rd, shadow[idx]); end
      end else if (op == 7) begin
        // START for the matrix unit: check the packed command on the handshake cycle
        @(negedge clk);
        req_valid = 1; req_we = 1; req_addr = MMIO_BASE + 32'(int'(R_MU_START) * 4); req_wdata = 1;
        @(posedge clk);
        while (!req_ready) begin held++; @(posedge clk); end
        checks++;
        if (!mu_cmd_valid || mu_cmd.a_addr !== shadow[R_MU_A] || mu_cmd.b_addr !== shadow[R_MU_B]
            || mu_cmd.c_row !== shadow[R_MU_C][15:0] || mu_cmd.m !== shadow[R_MU_MNK][7:0]
            || mu_cmd.n !== shadow[R_MU_MNK][15:8] || mu_cmd.k !== shadow[R_MU_MNK][23:16]
            || mu_cmd.a_stride !== shadow[R_MU_ASTR][15:0] || mu_cmd.b_stride !== shadow[R_MU_BSTR][15:0]
            || mu_cmd.accumulate !== shadow[R_MU_FLAGS][0]) begin
          failures++; $display("FAIL mu command fields");
        end
        pushes++;
        @(negedge clk); req_valid = 0;
      end else if (op == 8) begin
        logic [2:0] dir;
        dir = 3'($urandom % 5);
        @(negedge clk);
        req_valid = 1; req_we = 1; req_addr = MMIO_BASE + 32'(int'(R_DMA_START) * 4); req_wdata = 32'(dir);
        @(posedge clk);
        while (!req_ready) begin held++; @(posedge clk); end
        checks++;
        if (!dma_cmd_valid || dma_cmd.dir !== dma_dir_e'(dir) || dma_cmd.src !== shadow[R_DMA_SRC]
            || dma_cmd.dst !== shadow[R_DMA_DST] || dma_cmd.rows !== shadow[R_DMA_SHAPE][15:0]
            || dma_cmd.lines !== shadow[R_DMA_SHAPE][31:16] || dma_cmd.src_stride !== shadow[R_DMA_SSTR]
            || dma_cmd.dst_stride !== shadow[R_DMA_DSTR]) begin
          failures++; $display("FAIL dma command fields");
        end
        pushes++;
        @(negedge clk); req_valid = 0;
      end else begin
        // R_STATUS is sampled at the acceptance edge; compare with the count before that edge
        int exp_out;
        @(negedge clk);
        req_valid = 1; req_we = 0; req_addr = MMIO_BASE + 32'(int'(R_STATUS) * 4);
        exp_out = ref_out;
        @(posedge clk);
        @(negedge clk); req_valid = 0;
        checks++;
        if (rsp_rdata !== 32'(exp_out)) begin failures++; if (failures < 10) $display("FAIL status %0d exp %0d", rsp_rdata, exp_out); end
        access(1'b0, int'(R_MU_BUSY), 0, rd);
      end
    end
    checks++;
    if (held == 0 || pushes == 0) begin failures++; $display("FAIL no back-pressure seen"); end
    $display("held cycles %0d, pushes %0d", held, pushes);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

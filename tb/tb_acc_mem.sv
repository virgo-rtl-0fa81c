// tb_acc_mem: drives the accumulate port with back-to-back rows (overwrite
// and accumulate, including the same row twice in a row to exercise
// forwarding), interleaves DMA reads/writes, and checks every row read back
// against a reference model that adds with double precision rounded to FP32.
// Also checks that DMA requests wait while the accumulate pipeline is busy and
// that read data comes one cycle after acceptance.
module tb_acc_mem;
  import virgo_pkg::*;
  import fp_ref_pkg::*;
  logic clk = 0, rst_n = 0;
  logic acc_valid, acc_overwrite, retire, dma_valid, dma_we, dma_ready, dma_rsp_valid;
  logic [15:0] acc_row, dma_row;
  logic [DIM-1:0][31:0] acc_data;
  logic [DIM*32-1:0] dma_wdata, dma_rdata;
  int checks = 0, failures = 0, retires = 0, blocked = 0;
  logic [DIM-1:0][31:0] model [ACC_ROWS];

  acc_mem dut (.*);
  always #5 clk = ~clk;
  always @(posedge clk) if (rst_n && retire) retires++;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic dma_write(int row, logic [DIM-1:0][31:0] v);
    @(negedge clk); dma_valid = 1; dma_we = 1; dma_row = 16'(row); dma_wdata = v;
    @(posedge clk); while (!dma_ready) @(posedge clk);
    @(negedge clk); dma_valid = 0; dma_we = 0;
    model[row] = v;
  endtask

  task automatic dma_read_check(int row);
    @(negedge clk); dma_valid = 1; dma_we = 0; dma_row = 16'(row);
    @(posedge clk); while (!dma_ready) begin blocked++; @(posedge clk); end
    @(negedge clk); dma_valid = 0;
    checks++;
    if (!dma_rsp_valid) begin failures++; $display("FAIL no response"); end
    for (int i = 0; i < DIM; i++) begin
      checks++;
      if (dma_rdata[i*32 +: 32] !== model[row][i]) begin
        failures++;
        if (failures < 10) $display("FAIL row %0d lane %0d got %h exp %h", row, i, dma_rdata[i*32 +: 32], model[row][i]);
      end
    end
  endtask

  function automatic logic [31:0] rnd32();
    logic [31:0] v = $urandom;
    v[30:23] = 8'(115 + $urandom % 25);
    return v;
  endfunction

  initial begin
    int rows[$];
    acc_valid = 0; acc_overwrite = 0; acc_row = 0; acc_data = '0;
    dma_valid = 0; dma_we = 0; dma_row = 0; dma_wdata = '0;
    repeat (3) @(posedge clk); rst_n = 1;
    for (int r = 0; r < 32; r++) begin
      logic [DIM-1:0][31:0] v;
      for (int i = 0; i < DIM; i++) v[i] = rnd32();
      dma_write(r, v);
    end
    // streams of accumulate rows; every 8th row repeats the previous one
    for (int rep = 0; rep < 20; rep++) begin
      fork
        begin
          for (int j = 0; j < 24; j++) begin
            int r;
            logic ow;
            r = (j % 8 == 7) ? int'(acc_row) : int'($urandom % 32);
            ow = ($urandom % 5 == 0);
            @(negedge clk);
            acc_valid = 1; acc_overwrite = ow; acc_row = 16'(r);
            for (int i = 0; i < DIM; i++) acc_data[i] = rnd32();
            for (int i = 0; i < DIM; i++)
              model[r][i] = ow ? acc_data[i] : real_to_fp32(fp32_to_real(model[r][i]) + fp32_to_real(acc_data[i]));
          end
          @(negedge clk); acc_valid = 0;
        end
        begin
          // a DMA read issued during the stream must wait for it
          repeat (3) @(posedge clk);
          @(negedge clk); dma_valid = 1; dma_we = 0; dma_row = 16'd0;
          @(posedge clk); while (!dma_ready) begin blocked++; @(posedge clk); end
          @(negedge clk); dma_valid = 0;
        end
      join
      repeat (3) @(posedge clk);
      for (int r = 0; r < 32; r++) dma_read_check(r);
    end
    checks++;
    if (retires != 20 * 24) begin failures++; $display("FAIL retires %0d", retires); end
    checks++;
    if (blocked == 0) begin failures++; $display("FAIL DMA never waited"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

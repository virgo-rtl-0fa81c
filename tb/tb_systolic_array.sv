// tb_systolic_array: loads two weight blocks, streams operand rows against
// each (the second block is preloaded while the first one computes), and
// compares every output row with a reference dot product that rounds after
// each multiply-add like the PE chain does.  Also checks the 2*DIM-1 cycle
// latency of every row and that the tag travels with it.
module tb_systolic_array;
  import fp_ref_pkg::*;
  localparam int DIM = virgo_pkg::DIM;
  localparam int LAT = 2 * DIM - 1;
  localparam int ROWS = 48;           // operand rows per block
  logic clk = 0, rst_n = 0;
  logic in_valid, in_swap, w_shift;
  logic [DIM-1:0][15:0] in_a, w_row;
  logic [16:0] in_tag, out_tag;
  logic out_valid;
  logic [DIM-1:0][31:0] out_row;
  int checks = 0, failures = 0, cycle = 0;

  logic [15:0] B [2][DIM][DIM];
  logic [15:0] A [2][ROWS][DIM];
  int sent_cycle [2*ROWS];
  int got = 0;

  systolic_array dut (.*);

  always #5 clk = ~clk;
  always @(posedge clk) cycle++;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic logic [31:0] ref_dot(int blk, int r, int n);
    logic [31:0] acc = 32'd0;
    for (int k = 0; k < DIM; k++)
      acc = real_to_fp32(fp32_to_real(acc) + fp16_to_real(A[blk][r][k]) * fp16_to_real(B[blk][k][n]));
    return acc;
  endfunction

  // output checker
  always @(posedge clk) begin
    if (rst_n && out_valid) begin
      int blk, r;
      blk = int'(out_tag) / ROWS; r = int'(out_tag) % ROWS;
      checks++;
      if (cycle - sent_cycle[out_tag] != LAT || int'(out_tag) != got) begin
        failures++;
        $display("FAIL latency/order tag=%0d exp %0d got %0d", out_tag, LAT, cycle - sent_cycle[out_tag]);
      end
      for (int n = 0; n < DIM; n++) begin
        logic [31:0] e;
        e = ref_dot(blk, r, n);
        checks++;
        if (out_row[n] !== e && !(out_row[n][30:0] == 0 && e[30:0] == 0)) begin
          failures++;
          if (failures < 10) $display("FAIL blk %0d row %0d col %0d got %h exp %h", blk, r, n, out_row[n], e);
        end
      end
      got++;
    end
  end

  task automatic shift_row(int blk, int k);
    w_shift = 1;
    for (int n = 0; n < DIM; n++) w_row[n] = B[blk][k][n];
  endtask

  initial begin
    for (int b = 0; b < 2; b++) begin
      for (int k = 0; k < DIM; k++) for (int n = 0; n < DIM; n++) B[b][k][n] = rand_fp16();
      for (int r = 0; r < ROWS; r++) for (int k = 0; k < DIM; k++) A[b][r][k] = rand_fp16();
    end
    in_valid = 0; in_swap = 0; w_shift = 0; in_a = '0; w_row = '0; in_tag = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    // preload block 0 (last row first)
    for (int j = 0; j < DIM; j++) begin
      @(negedge clk); shift_row(0, DIM - 1 - j);
    end
    @(negedge clk); w_shift = 0;
    // stream block 0; after LAT cycles start shifting block 1 underneath
    for (int r = 0; r < ROWS; r++) begin
      @(negedge clk);
      in_valid = 1; in_swap = (r == 0); in_tag = 17'(r);
      for (int k = 0; k < DIM; k++) in_a[k] = A[0][r][k];
      sent_cycle[r] = cycle + 1;
      w_shift = 0;
      if (r >= LAT && r < LAT + DIM) shift_row(1, DIM - 1 - (r - LAT));
    end
    // stream block 1 right behind
    for (int r = 0; r < ROWS; r++) begin
      @(negedge clk);
      w_shift = 0;
      in_valid = 1; in_swap = (r == 0); in_tag = 17'(ROWS + r);
      for (int k = 0; k < DIM; k++) in_a[k] = A[1][r][k];
      sent_cycle[ROWS + r] = cycle + 1;
    end
    @(negedge clk); in_valid = 0; in_swap = 0;
    repeat (LAT + 5) @(posedge clk);
    checks++;
    if (got != 2 * ROWS) begin failures++; $display("FAIL got %0d rows", got); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

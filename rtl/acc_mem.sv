// acc_mem: the matrix unit's private accumulator memory, a single-banked
// SRAM of ACC_ROWS rows, each row holding DIM FP32 values (64 bytes), 32 KB in
// all.
//
// Accumulate port: the systolic array delivers one output row per cycle with
// its row index.  Stage 1 reads the stored row; stage 2 adds the new row to it
// with DIM FP32 adders (or takes the new row as is when 'overwrite' is set, for
// the first K block of a fresh tile) and writes it back, so a full row is
// accumulated every cycle.  A row written in stage 2 is forwarded to a read of
// the same row in stage 1.  'retire' pulses when a row has been written.
//
// DMA port: whole-row reads (data one cycle later) and writes, accepted only
// in cycles in which the accumulate pipeline leaves the SRAM ports free; the
// array has priority.  The memory is one 1-read 1-write array.  The paper
// gives the size and the single-cycle, single-banked organisation; the port
// arbitration is this design's.
module acc_mem #(
  parameter int unsigned DIM  = virgo_pkg::DIM,
  parameter int unsigned ROWS = virgo_pkg::ACC_ROWS
) (
  input  logic                 clk,
  input  logic                 rst_n,
  // accumulate port
  input  logic                 acc_valid,
  input  logic                 acc_overwrite,
  input  logic [15:0]          acc_row,
  input  logic [DIM-1:0][31:0] acc_data,
  output logic                 retire,
  // DMA port
  input  logic                 dma_valid,
  input  logic                 dma_we,
  input  logic [15:0]          dma_row,
  input  logic [DIM*32-1:0]    dma_wdata,
  output logic                 dma_ready,
  output logic                 dma_rsp_valid,
  output logic [DIM*32-1:0]    dma_rdata
);
  localparam int unsigned AW = $clog2(ROWS);

  logic [DIM*32-1:0] mem [ROWS];

  // stage 1 registers
  logic                 s1_valid, s1_overwrite;
  logic [AW-1:0]        s1_row;
  logic [DIM-1:0][31:0] s1_data;
  logic [DIM*32-1:0]    rd_q;
  logic                 fwd_q;
  logic [DIM*32-1:0]    fwd_data_q;

  logic [DIM-1:0][31:0] old_row, sum_row, wr_row;
  logic                 wr_en;
  logic [AW-1:0]        wr_addr;
  logic [DIM*32-1:0]    wr_data;
  logic                 rd_en;
  logic [AW-1:0]        rd_addr;
  logic                 dma_rd_q;

  assign dma_ready = !acc_valid && !s1_valid;

  always_comb begin
    rd_en   = acc_valid || (dma_valid && dma_ready && !dma_we);
    rd_addr = acc_valid ? AW'(acc_row) : AW'(dma_row);
  end

  // stage 2: add and write back
  assign old_row = fwd_q ? fwd_data_q : rd_q;
  for (genvar i = 0; i < DIM; i++) begin : g_add
    fp32_add u_add (.a(old_row[i]), .b(s1_data[i]), .y(sum_row[i]));
  end
  assign wr_row = s1_overwrite ? s1_data : sum_row;

  always_comb begin
    if (s1_valid) begin
      wr_en = 1'b1; wr_addr = s1_row; wr_data = wr_row;
    end else begin
      wr_en = dma_valid && dma_ready && dma_we; wr_addr = AW'(dma_row); wr_data = dma_wdata;
    end
  end

  always_ff @(posedge clk) begin
    if (rd_en) rd_q <= mem[rd_addr];
    if (wr_en) mem[wr_addr] <= wr_data;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      s1_valid <= 1'b0; s1_overwrite <= 1'b0; s1_row <= '0; s1_data <= '0;
      fwd_q <= 1'b0; fwd_data_q <= '0; dma_rd_q <= 1'b0; retire <= 1'b0;
    end else begin
      s1_valid     <= acc_valid;
      s1_overwrite <= acc_overwrite;
      s1_row       <= AW'(acc_row);
      s1_data      <= acc_data;
      // the row being written now is the one read in this cycle: forward it
      fwd_q        <= acc_valid && s1_valid && (AW'(acc_row) == s1_row);
      fwd_data_q   <= wr_row;
      dma_rd_q     <= dma_valid && dma_ready && !dma_we;
      retire       <= s1_valid;
    end
  end

  assign dma_rsp_valid = dma_rd_q;
  assign dma_rdata     = rd_q;

  logic unused;
  assign unused = ^acc_row[15:AW] ^ ^dma_row[15:AW];
endmodule

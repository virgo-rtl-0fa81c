// matrix_unit: the cluster-level matrix unit (Gemmini-style).
//
// A command queue of CMDQ_DEPTH entries receives matrix commands from the
// MMIO registers; the coarse-grain FSM (gemm_ctrl) executes them one at a
// time, reading operands over the unit's wide shared-memory read port,
// driving the DIM x DIM systolic array, whose output rows are accumulated in
// the 32 KB accumulator memory (acc_mem).  The DMA engine reaches the
// accumulator memory through acc_dma_*.  'done' pulses once per finished
// command; 'busy' is high while a command is queued or running.
// Organisation (cluster-level unit, systolic array, FSM, accumulator memory,
// operands from shared memory) follows the paper; the queue depth and
// handshakes are this design's choice.
module matrix_unit
  import virgo_pkg::*;
(
  input  logic                 clk,
  input  logic                 rst_n,
  // command from MMIO
  input  logic                 cmd_valid,
  output logic                 cmd_ready,
  input  mu_cmd_t              cmd,
  output logic                 busy,
  output logic                 done,
  // shared-memory wide read port
  output logic                 rd_valid,
  output logic [31:0]          rd_addr,
  input  logic                 rd_ready,
  input  logic                 rsp_valid,
  input  logic [LINE_BITS-1:0] rsp_data,
  // accumulator memory port for the DMA
  input  logic                 acc_dma_valid,
  input  logic                 acc_dma_we,
  input  logic [15:0]          acc_dma_row,
  input  logic [LINE_BITS-1:0] acc_dma_wdata,
  output logic                 acc_dma_ready,
  output logic                 acc_dma_rsp_valid,
  output logic [LINE_BITS-1:0] acc_dma_rdata
);
  mu_cmd_t q_cmd;
  logic    q_valid, q_pop, ctrl_busy, retire;
  logic [$clog2(CMDQ_DEPTH+1)-1:0] q_count;

  logic                 sa_valid, sa_swap, sa_wshift, out_valid;
  logic [DIM-1:0][15:0] sa_a, sa_wrow;
  logic [16:0]          sa_tag, out_tag;
  logic [DIM-1:0][31:0] out_row;

  fifo #(.WIDTH($bits(mu_cmd_t)), .DEPTH(CMDQ_DEPTH)) u_q (
    .clk, .rst_n,
    .in_valid(cmd_valid), .in_ready(cmd_ready), .in_data(cmd),
    .out_valid(q_valid), .out_ready(q_pop), .out_data(q_cmd), .count(q_count)
  );

  gemm_ctrl u_ctrl (
    .clk, .rst_n,
    .cmd_valid(q_valid), .cmd(q_cmd), .cmd_ready(q_pop), .busy(ctrl_busy), .done,
    .rd_valid, .rd_addr, .rd_ready, .rsp_valid, .rsp_data,
    .sa_valid, .sa_swap, .sa_a, .sa_tag, .sa_wshift, .sa_wrow,
    .retire
  );

  systolic_array #(.DIM(DIM), .TAG_W(17)) u_sa (
    .clk, .rst_n,
    .in_valid(sa_valid), .in_swap(sa_swap), .in_a(sa_a), .in_tag(sa_tag),
    .w_shift(sa_wshift), .w_row(sa_wrow),
    .out_valid, .out_row, .out_tag
  );

  acc_mem #(.DIM(DIM), .ROWS(ACC_ROWS)) u_acc (
    .clk, .rst_n,
    .acc_valid(out_valid), .acc_overwrite(out_tag[16]), .acc_row(out_tag[15:0]),
    .acc_data(out_row), .retire,
    .dma_valid(acc_dma_valid), .dma_we(acc_dma_we), .dma_row(acc_dma_row),
    .dma_wdata(acc_dma_wdata), .dma_ready(acc_dma_ready),
    .dma_rsp_valid(acc_dma_rsp_valid), .dma_rdata(acc_dma_rdata)
  );

  assign busy = q_valid || ctrl_busy;
endmodule

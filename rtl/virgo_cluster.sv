// virgo_cluster: one Virgo GPU cluster with its disaggregated matrix unit.
//
// Contains the 128 KB shared memory with its two-dimensionally banked
// interconnect, the cluster-level matrix unit (coarse-grain FSM, 16x16 FP16
// systolic array, 32 KB accumulator memory), the DMA engine, the MMIO
// command registers and the barrier synchronizer.  The SIMT cores and the
// cache hierarchy are outside: each core connects through its LANES shared-
// memory lane ports (which also reach the MMIO window) and its barrier port;
// the DMA reaches L2 / DRAM through the gmem_* line port.
//
// Data paths:  cores <-> shared memory (word requests, 1-cycle reads);
//              matrix unit <- shared memory (line reads, top priority);
//              DMA <-> shared memory / global memory / accumulator memory;
//              cores -> MMIO -> command queues of matrix unit and DMA.
// Lint note: rst_n is an asynchronous reset for every flop; it also appears
// in the 'disable iff' of the interface assertions in the submodules, which
// the linter reports as a synchronous use (SYNCASYNCNET).
module virgo_cluster
  import virgo_pkg::*;
(
  input  logic                                   clk,
  input  logic                                   rst_n,
  // SIMT core lanes
  input  lane_req_t [NUM_CORES-1:0][LANES-1:0]   lane_req,
  output logic      [NUM_CORES-1:0][LANES-1:0]   lane_ready,
  output lane_rsp_t [NUM_CORES-1:0][LANES-1:0]   lane_rsp,
  // barrier requests from the cores' warp schedulers
  input  logic [NUM_CORES-1:0]                   bar_valid,
  input  logic [NUM_CORES-1:0][$clog2(NUM_BARRIERS)-1:0] bar_id,
  output logic [NUM_BARRIERS-1:0]                bar_release,
  // global memory (toward L2)
  output gmem_req_t                              gmem_req,
  input  logic                                   gmem_ready,
  input  gmem_rsp_t                              gmem_rsp,
  // status
  output logic                                   mu_busy,
  output logic                                   dma_busy
);
  // shared memory <-> matrix unit / DMA / MMIO
  logic                 mu_rd_valid, mu_rd_ready, mu_rsp_valid;
  logic [31:0]          mu_rd_addr;
  logic [LINE_BITS-1:0] mu_rsp_data;
  logic                 dma_rd_valid, dma_rd_ready, dma_rsp_valid;
  logic [31:0]          dma_rd_addr;
  logic [LINE_BITS-1:0] dma_rsp_data;
  logic                 dma_wr_valid, dma_wr_ready;
  logic [31:0]          dma_wr_addr;
  logic [LINE_BITS-1:0] dma_wr_data;
  logic                 mmio_valid, mmio_we, mmio_ready;
  logic [31:0]          mmio_addr, mmio_wdata, mmio_rdata;
  // commands
  logic                 mu_cmd_valid, mu_cmd_ready, mu_done;
  mu_cmd_t              mu_cmd;
  logic                 dma_cmd_valid, dma_cmd_ready, dma_done;
  dma_cmd_t             dma_cmd;
  // accumulator memory <-> DMA
  logic                 acc_valid, acc_we, acc_ready, acc_rsp_valid;
  logic [15:0]          acc_row;
  logic [LINE_BITS-1:0] acc_wdata, acc_rdata;

  shared_memory u_smem (
    .clk, .rst_n,
    .lane_req, .lane_ready, .lane_rsp,
    .mu_rd_valid, .mu_rd_addr, .mu_rd_ready, .mu_rsp_valid, .mu_rsp_data,
    .dma_rd_valid, .dma_rd_addr, .dma_rd_ready, .dma_rsp_valid, .dma_rsp_data,
    .dma_wr_valid, .dma_wr_addr, .dma_wr_data, .dma_wr_ready,
    .mmio_valid, .mmio_we, .mmio_addr, .mmio_wdata, .mmio_ready, .mmio_rdata
  );

  mmio_regs u_mmio (
    .clk, .rst_n,
    .req_valid(mmio_valid), .req_we(mmio_we), .req_addr(mmio_addr), .req_wdata(mmio_wdata),
    .req_ready(mmio_ready), .rsp_rdata(mmio_rdata),
    .mu_cmd_valid, .mu_cmd_ready, .mu_cmd, .mu_busy, .mu_done,
    .dma_cmd_valid, .dma_cmd_ready, .dma_cmd, .dma_busy, .dma_done
  );

  matrix_unit u_mu (
    .clk, .rst_n,
    .cmd_valid(mu_cmd_valid), .cmd_ready(mu_cmd_ready), .cmd(mu_cmd),
    .busy(mu_busy), .done(mu_done),
    .rd_valid(mu_rd_valid), .rd_addr(mu_rd_addr), .rd_ready(mu_rd_ready),
    .rsp_valid(mu_rsp_valid), .rsp_data(mu_rsp_data),
    .acc_dma_valid(acc_valid), .acc_dma_we(acc_we), .acc_dma_row(acc_row),
    .acc_dma_wdata(acc_wdata), .acc_dma_ready(acc_ready),
    .acc_dma_rsp_valid(acc_rsp_valid), .acc_dma_rdata(acc_rdata)
  );

  dma_engine u_dma (
    .clk, .rst_n,
    .cmd_valid(dma_cmd_valid), .cmd_ready(dma_cmd_ready), .cmd(dma_cmd),
    .busy(dma_busy), .done(dma_done),
    .gmem_req, .gmem_ready, .gmem_rsp,
    .smem_rd_valid(dma_rd_valid), .smem_rd_addr(dma_rd_addr), .smem_rd_ready(dma_rd_ready),
    .smem_rsp_valid(dma_rsp_valid), .smem_rsp_data(dma_rsp_data),
    .smem_wr_valid(dma_wr_valid), .smem_wr_addr(dma_wr_addr), .smem_wr_data(dma_wr_data),
    .smem_wr_ready(dma_wr_ready),
    .acc_valid, .acc_we, .acc_row, .acc_wdata, .acc_ready, .acc_rsp_valid, .acc_rdata
  );

  synchronizer #(.NUM_CORES(NUM_CORES), .NUM_BARRIERS(NUM_BARRIERS)) u_sync (
    .clk, .rst_n, .bar_valid, .bar_id, .release_o(bar_release)
  );
endmodule

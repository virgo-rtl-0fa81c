// mmio_regs: the memory-mapped command interface of the cluster.
//
// The cores program the matrix unit and the DMA with ordinary stores into a
// 256-byte MMIO window above shared memory (register map in virgo_pkg).
// Argument registers are staged; a store to R_MU_START or R_DMA_START pushes
// the staged arguments as one command into the unit's queue, and is held
// (ready low) only while that queue is full, so starting an operation does not
// block the issuing warp.  R_STATUS returns the number of commands issued and
// not yet finished; software polls it to implement a fence ("wait until at
// most n operations are outstanding").  R_MU_BUSY / R_DMA_BUSY give the two
// units' busy flags.  Reads return data one cycle after acceptance.
// The DMA direction of a pushed command is the START store's data itself
// (dma_cmd.dir = req_wdata[2:0]), so those output bits follow an input.
// The paper describes MMIO control registers and a polled busy register; the
// register map and the outstanding-count encoding are this design's.
module mmio_regs
  import virgo_pkg::*;
(
  input  logic        clk,
  input  logic        rst_n,
  input  logic        req_valid,
  input  logic        req_we,
  input  logic [31:0] req_addr,
  input  logic [31:0] req_wdata,
  output logic        req_ready,
  output logic [31:0] rsp_rdata,
  // matrix unit
  output logic        mu_cmd_valid,
  input  logic        mu_cmd_ready,
  output mu_cmd_t     mu_cmd,
  input  logic        mu_busy,
  input  logic        mu_done,
  // DMA
  output logic        dma_cmd_valid,
  input  logic        dma_cmd_ready,
  output dma_cmd_t    dma_cmd,
  input  logic        dma_busy,
  input  logic        dma_done
);
  logic [31:0] r_a, r_b, r_c, r_astr, r_bstr, r_mnk, r_flags;
  logic [31:0] r_src, r_dst, r_shape, r_sstr, r_dstr;
  logic [15:0] outstanding;
  logic [5:0]  idx;
  logic        wr_mu_start, wr_dma_start, acc;

  assign idx = req_addr[7:2];

  always_comb begin
    wr_mu_start  = req_valid && req_we && idx == R_MU_START;
    wr_dma_start = req_valid && req_we && idx == R_DMA_START;
    req_ready    = !(wr_mu_start && !mu_cmd_ready) && !(wr_dma_start && !dma_cmd_ready);
    acc          = req_valid && req_ready;
    mu_cmd_valid = wr_mu_start;
    mu_cmd = '{a_addr: r_a, b_addr: r_b, c_row: r_c[15:0], a_stride: r_astr[15:0],
               b_stride: r_bstr[15:0], m: r_mnk[7:0], n: r_mnk[15:8], k: r_mnk[23:16],
               accumulate: r_flags[0]};
    dma_cmd_valid = wr_dma_start;
    dma_cmd = '{dir: dma_dir_e'(req_wdata[2:0]), src: r_src, dst: r_dst,
                rows: r_shape[15:0], lines: r_shape[31:16],
                src_stride: r_sstr, dst_stride: r_dstr};
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      r_a <= '0; r_b <= '0; r_c <= '0; r_astr <= '0; r_bstr <= '0; r_mnk <= '0; r_flags <= '0;
      r_src <= '0; r_dst <= '0; r_shape <= '0; r_sstr <= '0; r_dstr <= '0;
      outstanding <= '0; rsp_rdata <= '0;
    end else begin
      if (acc && req_we) begin
        unique case (idx)
          R_MU_A:      r_a     <= req_wdata;
          R_MU_B:      r_b     <= req_wdata;
          R_MU_C:      r_c     <= req_wdata;
          R_MU_ASTR:   r_astr  <= req_wdata;
          R_MU_BSTR:   r_bstr  <= req_wdata;
          R_MU_MNK:    r_mnk   <= req_wdata;
          R_MU_FLAGS:  r_flags <= req_wdata;
          R_DMA_SRC:   r_src   <= req_wdata;
          R_DMA_DST:   r_dst   <= req_wdata;
          R_DMA_SHAPE: r_shape <= req_wdata;
          R_DMA_SSTR:  r_sstr  <= req_wdata;
          R_DMA_DSTR:  r_dstr  <= req_wdata;
          default: ;
        endcase
      end
      if (acc && !req_we) begin
        unique case (idx)
          R_MU_A:      rsp_rdata <= r_a;
          R_MU_B:      rsp_rdata <= r_b;
          R_MU_C:      rsp_rdata <= r_c;
          R_MU_ASTR:   rsp_rdata <= r_astr;
          R_MU_BSTR:   rsp_rdata <= r_bstr;
          R_MU_MNK:    rsp_rdata <= r_mnk;
          R_MU_FLAGS:  rsp_rdata <= r_flags;
          R_DMA_SRC:   rsp_rdata <= r_src;
          R_DMA_DST:   rsp_rdata <= r_dst;
          R_DMA_SHAPE: rsp_rdata <= r_shape;
          R_DMA_SSTR:  rsp_rdata <= r_sstr;
          R_DMA_DSTR:  rsp_rdata <= r_dstr;
          R_STATUS:    rsp_rdata <= 32'(outstanding);
          R_MU_BUSY:   rsp_rdata <= 32'(mu_busy);
          R_DMA_BUSY:  rsp_rdata <= 32'(dma_busy);
          default:     rsp_rdata <= 32'd0;
        endcase
      end
      outstanding <= outstanding
                   + 16'(mu_cmd_valid && mu_cmd_ready) + 16'(dma_cmd_valid && dma_cmd_ready)
                   - 16'(mu_done) - 16'(dma_done);
    end
  end
endmodule

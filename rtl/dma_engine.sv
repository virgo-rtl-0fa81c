// dma_engine: the cluster DMA, programmed through the MMIO registers.
//
// A command copies a 2-D region of 'rows' x 'lines' 64-byte lines: line l of
// row r is read from src + r*src_stride + l*64 and written to
// dst + r*dst_stride + l*64.  Source and destination are global memory (the
// gmem_* port toward L2), shared memory (wide ports of the interconnect) or
// the matrix unit's accumulator memory (byte address / 64 = accumulator row),
// as selected by dma_dir_e.  Commands wait in a CMDQ_DEPTH-entry queue and
// run in order; 'done' pulses when a command's last write was accepted.
//
// Each line goes through READ (request until accepted), WAIT (response, one
// line buffer) and WRITE (request until accepted): one line in flight.
// Global-memory writes are posted (no response).  The paper specifies an
// MMIO-programmable DMA between global and shared memory that can also draw
// from the accumulator memory; the 2-D command format and the one-line-in-
// flight engine are this design's simplification.
module dma_engine
  import virgo_pkg::*;
(
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 cmd_valid,
  output logic                 cmd_ready,
  input  dma_cmd_t             cmd,
  output logic                 busy,
  output logic                 done,
  // global memory
  output gmem_req_t            gmem_req,
  input  logic                 gmem_ready,
  input  gmem_rsp_t            gmem_rsp,
  // shared memory
  output logic                 smem_rd_valid,
  output logic [31:0]          smem_rd_addr,
  input  logic                 smem_rd_ready,
  input  logic                 smem_rsp_valid,
  input  logic [LINE_BITS-1:0] smem_rsp_data,
  output logic                 smem_wr_valid,
  output logic [31:0]          smem_wr_addr,
  output logic [LINE_BITS-1:0] smem_wr_data,
  input  logic                 smem_wr_ready,
  // accumulator memory
  output logic                 acc_valid,
  output logic                 acc_we,
  output logic [15:0]          acc_row,
  output logic [LINE_BITS-1:0] acc_wdata,
  input  logic                 acc_ready,
  input  logic                 acc_rsp_valid,
  input  logic [LINE_BITS-1:0] acc_rdata
);
  typedef enum logic [1:0] {D_IDLE, D_READ, D_WAIT, D_WRITE} dstate_e;
  typedef enum logic [1:0] {M_GMEM, M_SMEM, M_ACC} mem_e;
  dstate_e state;

  dma_cmd_t q_cmd;
  logic     q_valid, q_pop;
  logic [$clog2(CMDQ_DEPTH+1)-1:0] q_count;

  logic [15:0]          r, l;
  logic [LINE_BITS-1:0] buf_q;
  logic [31:0]          src_a, dst_a;
  mem_e                 src_m, dst_m;
  logic                 rd_acc, wr_acc, last;

  fifo #(.WIDTH($bits(dma_cmd_t)), .DEPTH(CMDQ_DEPTH)) u_q (
    .clk, .rst_n,
    .in_valid(cmd_valid), .in_ready(cmd_ready), .in_data(cmd),
    .out_valid(q_valid), .out_ready(q_pop), .out_data(q_cmd), .count(q_count)
  );

  always_comb begin
    unique case (q_cmd.dir)
      DMA_G2S: begin src_m = M_GMEM; dst_m = M_SMEM; end
      DMA_S2G: begin src_m = M_SMEM; dst_m = M_GMEM; end
      DMA_A2G: begin src_m = M_ACC;  dst_m = M_GMEM; end
      DMA_G2A: begin src_m = M_GMEM; dst_m = M_ACC;  end
      DMA_A2S: begin src_m = M_ACC;  dst_m = M_SMEM; end
      default: begin src_m = M_GMEM; dst_m = M_SMEM; end
    endcase
    src_a = q_cmd.src + 32'(r) * q_cmd.src_stride + 32'(l) * 32'(LINE_BYTES);
    dst_a = q_cmd.dst + 32'(r) * q_cmd.dst_stride + 32'(l) * 32'(LINE_BYTES);
    last  = (r == q_cmd.rows - 16'd1) && (l == q_cmd.lines - 16'd1);

    gmem_req      = '0;
    smem_rd_valid = 1'b0; smem_rd_addr = src_a;
    smem_wr_valid = 1'b0; smem_wr_addr = dst_a; smem_wr_data = buf_q;
    acc_valid     = 1'b0; acc_we = 1'b0; acc_wdata = buf_q;
    acc_row       = 16'((state == D_WRITE ? dst_a : src_a) >> $clog2(LINE_BYTES));
    rd_acc        = 1'b0; wr_acc = 1'b0;
    if (state == D_READ) begin
      unique case (src_m)
        M_GMEM: begin gmem_req.valid = 1'b1; gmem_req.addr = src_a; rd_acc = gmem_ready; end
        M_SMEM: begin smem_rd_valid = 1'b1; rd_acc = smem_rd_ready; end
        default: begin acc_valid = 1'b1; rd_acc = acc_ready; end
      endcase
    end else if (state == D_WRITE) begin
      unique case (dst_m)
        M_GMEM: begin
          gmem_req.valid = 1'b1; gmem_req.we = 1'b1; gmem_req.addr = dst_a;
          gmem_req.wdata = buf_q; wr_acc = gmem_ready;
        end
        M_SMEM: begin smem_wr_valid = 1'b1; wr_acc = smem_wr_ready; end
        default: begin acc_valid = 1'b1; acc_we = 1'b1; wr_acc = acc_ready; end
      endcase
    end
    q_pop = (state == D_WRITE) && wr_acc && last;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= D_IDLE; r <= '0; l <= '0; buf_q <= '0; done <= 1'b0;
    end else begin
      done <= 1'b0;
      unique case (state)
        D_IDLE: if (q_valid) begin state <= D_READ; r <= '0; l <= '0; end
        D_READ: if (rd_acc) state <= D_WAIT;
        D_WAIT: begin
          if (src_m == M_GMEM && gmem_rsp.valid) begin buf_q <= gmem_rsp.rdata; state <= D_WRITE; end
          if (src_m == M_SMEM && smem_rsp_valid) begin buf_q <= smem_rsp_data; state <= D_WRITE; end
          if (src_m == M_ACC && acc_rsp_valid)   begin buf_q <= acc_rdata;     state <= D_WRITE; end
        end
        D_WRITE: if (wr_acc) begin
          if (last) begin
            state <= D_IDLE; done <= 1'b1;
          end else begin
            state <= D_READ;
            if (l == q_cmd.lines - 16'd1) begin l <= '0; r <= r + 1'b1; end
            else l <= l + 1'b1;
          end
        end
        default: state <= D_IDLE;
      endcase
    end
  end

  assign busy = q_valid;
endmodule

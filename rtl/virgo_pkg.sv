// virgo_pkg: types and constants shared by the Virgo cluster RTL.
//
// The cluster sizes follow the evaluated configuration: a 16x16 FP16 systolic
// array with FP32 accumulation, a 32 KB accumulator memory, a 128 KB shared
// memory split into 4 banks of 16 word-wide subbanks, and 8-lane SIMT cores.
// The number of cores (4), the MMIO register map, the line size of the global
// memory port and all encodings below are choices of this design.
package virgo_pkg;

  // ---------------- sizes ----------------
  localparam int unsigned DIM         = 16;            // systolic array dimension
  localparam int unsigned LINE_BYTES  = 4 * DIM;       // wide request: 4n bytes
  localparam int unsigned LINE_BITS   = 8 * LINE_BYTES;
  localparam int unsigned SUBBANKS    = LINE_BYTES / 4;
  localparam int unsigned NUM_BANKS   = 4;
  localparam int unsigned SMEM_BYTES  = 128 * 1024;
  localparam int unsigned BANK_BYTES  = SMEM_BYTES / NUM_BANKS;
  localparam int unsigned SB_ROWS     = BANK_BYTES / LINE_BYTES;
  localparam int unsigned ACC_BYTES   = 32 * 1024;
  localparam int unsigned ACC_ROWS    = ACC_BYTES / LINE_BYTES;
  localparam int unsigned NUM_CORES   = 4;
  localparam int unsigned LANES       = 8;
  localparam int unsigned NUM_BARRIERS = 4;
  localparam int unsigned CMDQ_DEPTH  = 4;

  // ---------------- cluster-local address map ----------------
  localparam logic [31:0] SMEM_BASE = 32'h0000_0000;
  localparam logic [31:0] MMIO_BASE = 32'h0002_0000;   // just above 128 KB
  localparam logic [31:0] MMIO_MASK = 32'hFFFF_FF00;   // 256-byte window

  // MMIO register word offsets (byte offset >> 2)
  typedef enum logic [5:0] {
    R_MU_A      = 6'h00,  // A base (smem byte address, line aligned)
    R_MU_B      = 6'h01,  // B base
    R_MU_C      = 6'h02,  // C base (accumulator row index)
    R_MU_ASTR   = 6'h03,  // A row stride in bytes
    R_MU_BSTR   = 6'h04,  // B row stride in bytes
    R_MU_MNK    = 6'h05,  // {K[23:16], N[15:8], M[7:0]}, each a multiple of DIM
    R_MU_FLAGS  = 6'h06,  // bit0: accumulate onto C
    R_MU_START  = 6'h07,  // write: enqueue matrix-unit command
    R_DMA_SRC   = 6'h08,
    R_DMA_DST   = 6'h09,
    R_DMA_SHAPE = 6'h0A,  // {lines per row [31:16], rows [15:0]}
    R_DMA_SSTR  = 6'h0B,  // source row stride in bytes
    R_DMA_DSTR  = 6'h0C,  // destination row stride in bytes
    R_DMA_START = 6'h0D,  // write: enqueue DMA command, wdata[2:0] = dma_dir_e
    R_STATUS    = 6'h10,  // read: outstanding commands (matrix unit + DMA)
    R_MU_BUSY   = 6'h11,
    R_DMA_BUSY  = 6'h12
  } mmio_reg_e;

  // ---------------- SIMT lane request (one per lane) ----------------
  typedef struct packed {
    logic        valid;
    logic        we;
    logic [31:0] addr;    // byte address, word accesses only
    logic [31:0] wdata;
  } lane_req_t;

  typedef struct packed {
    logic        valid;   // one cycle after the request was accepted
    logic [31:0] rdata;
  } lane_rsp_t;

  // ---------------- wide (line) request, matrix unit and DMA ----------------
  typedef struct packed {
    logic                 valid;
    logic [31:0]          addr;   // byte address, LINE_BYTES aligned
    logic [LINE_BITS-1:0] wdata;
  } wide_req_t;

  // ---------------- matrix unit command ----------------
  typedef struct packed {
    logic [31:0] a_addr;
    logic [31:0] b_addr;
    logic [15:0] c_row;
    logic [15:0] a_stride;
    logic [15:0] b_stride;
    logic [7:0]  m;
    logic [7:0]  n;
    logic [7:0]  k;
    logic        accumulate;
  } mu_cmd_t;

  // ---------------- DMA command ----------------
  typedef enum logic [2:0] {
    DMA_G2S = 3'd0,   // global -> shared
    DMA_S2G = 3'd1,   // shared -> global
    DMA_A2G = 3'd2,   // accumulator -> global
    DMA_G2A = 3'd3,   // global -> accumulator
    DMA_A2S = 3'd4    // accumulator -> shared
  } dma_dir_e;

  typedef struct packed {
    dma_dir_e    dir;
    logic [31:0] src;
    logic [31:0] dst;
    logic [15:0] rows;
    logic [15:0] lines;
    logic [31:0] src_stride;
    logic [31:0] dst_stride;
  } dma_cmd_t;

  // ---------------- global memory port (DMA <-> L2) ----------------
  typedef struct packed {
    logic                 valid;
    logic                 we;
    logic [31:0]          addr;
    logic [LINE_BITS-1:0] wdata;
  } gmem_req_t;

  typedef struct packed {
    logic                 valid;
    logic [LINE_BITS-1:0] rdata;
  } gmem_rsp_t;

endpackage

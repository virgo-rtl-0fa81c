// shared_memory: the cluster's 128 KB shared memory and its interconnect.
//
// Storage is banked in two dimensions: NUM_BANKS banks of BANK_BYTES, each
// split into SUBBANKS word-wide subbanks, consecutive words going to
// consecutive subbanks (word w of bank b lives in subbank w mod SUBBANKS).
// A line of 4*DIM bytes, the matrix unit's access size, is one row across all
// subbanks of one bank, so a wide request is split into SUBBANKS word
// sub-requests served together in one cycle.
//
// Every subbank has its own read crossbar and write crossbar (separate read
// and write paths), each a fixed-priority arbiter:
//   read : matrix unit > DMA > aligned core lanes (core 0 first)
//          > serialised core requests (core 0 first)
//   write: DMA > aligned core lanes > serialised core requests
// Wide requests therefore never lose to the cores; the matrix unit never
// waits, and the DMA waits only for a matrix-unit read of the same bank.  An
// aligned lane (see lane_filter) reaches only the subbanks whose index is its
// lane number modulo LANES, which keeps the crossbars small; unaligned lanes
// and MMIO accesses of a core are serialised through one port per core.  MMIO
// accesses leave on the mmio_* port (one per cycle, lowest core first).
//
// Timing: a request is accepted in the cycle its ready is high; read data
// (and a write acknowledge for lanes) returns exactly one cycle later.
// Lint note: the address-decode functions take a full 32-bit address and
// each uses only its own field, so unused-bit warnings on them are expected.
// mu_rd_ready and dma_wr_ready are constant 1: the matrix-unit read and the
// DMA write have top priority on their paths and are never refused; the
// ports are kept so that the requesters keep a uniform handshake.
// The banking, subbanking, request splitting, priority of wide requests,
// separate read/write paths and serialisation of unaligned lanes follow the
// paper; the arbitration order among the cores and the handshakes are this
// design's.
module shared_memory
  import virgo_pkg::*;
(
  input  logic                 clk,
  input  logic                 rst_n,
  // SIMT lanes
  input  lane_req_t [NUM_CORES-1:0][LANES-1:0] lane_req,
  output logic      [NUM_CORES-1:0][LANES-1:0] lane_ready,
  output lane_rsp_t [NUM_CORES-1:0][LANES-1:0] lane_rsp,
  // matrix unit wide read
  input  logic                 mu_rd_valid,
  input  logic [31:0]          mu_rd_addr,
  output logic                 mu_rd_ready,
  output logic                 mu_rsp_valid,
  output logic [LINE_BITS-1:0] mu_rsp_data,
  // DMA wide read
  input  logic                 dma_rd_valid,
  input  logic [31:0]          dma_rd_addr,
  output logic                 dma_rd_ready,
  output logic                 dma_rsp_valid,
  output logic [LINE_BITS-1:0] dma_rsp_data,
  // DMA wide write
  input  logic                 dma_wr_valid,
  input  logic [31:0]          dma_wr_addr,
  input  logic [LINE_BITS-1:0] dma_wr_data,
  output logic                 dma_wr_ready,
  // MMIO
  output logic                 mmio_valid,
  output logic                 mmio_we,
  output logic [31:0]          mmio_addr,
  output logic [31:0]          mmio_wdata,
  input  logic                 mmio_ready,
  input  logic [31:0]          mmio_rdata      // valid one cycle after accept
);
  localparam int unsigned G   = NUM_BANKS * SUBBANKS;
  localparam int unsigned SBW = $clog2(SUBBANKS);
  localparam int unsigned RW  = $clog2(SB_ROWS);
  localparam int unsigned BW  = $clog2(NUM_BANKS);
  localparam int unsigned GW  = $clog2(G);
  localparam int unsigned LW  = $clog2(LANES);

  // ---------------- address decode ----------------
  function automatic logic [SBW-1:0] f_sb(input logic [31:0] a);
    return a[2 +: SBW];
  endfunction
  function automatic logic [RW-1:0] f_row(input logic [31:0] a);
    return a[2 + SBW +: RW];
  endfunction
  function automatic logic [BW-1:0] f_bank(input logic [31:0] a);
    return a[2 + SBW + RW +: BW];
  endfunction

  // ---------------- per-core filters ----------------
  logic      [NUM_CORES-1:0][LANES-1:0] aligned, is_mmio;
  logic      [NUM_CORES-1:0]            ser_valid;
  logic      [NUM_CORES-1:0][LW-1:0]    ser_lane;
  lane_req_t [NUM_CORES-1:0]            ser_req;
  logic      [NUM_CORES-1:0]            ser_mmio;

  for (genvar c = 0; c < NUM_CORES; c++) begin : g_filter
    lane_filter #(.L(LANES)) u_f (
      .req(lane_req[c]), .aligned(aligned[c]), .is_mmio(is_mmio[c]),
      .ser_valid(ser_valid[c]), .ser_lane(ser_lane[c]), .ser_req(ser_req[c])
    );
    assign ser_mmio[c] = is_mmio[c][ser_lane[c]];
  end

  // ---------------- crossbars ----------------
  typedef enum logic [1:0] {K_MU, K_DMA, K_ALN, K_SER} kind_e;

  logic [G-1:0]         rd_en, wr_en;
  logic [G-1:0][RW-1:0] rd_row, wr_row;
  logic [G-1:0][31:0]   wr_data, rd_data;

  // which lane got a response slot this cycle
  logic [NUM_CORES-1:0][LANES-1:0]         grant_lane, grant_mmio;
  logic [NUM_CORES-1:0][LANES-1:0][GW-1:0] grant_g;
  logic mmio_grant;

  always_comb begin
    rd_en = '0; wr_en = '0; rd_row = '0; wr_row = '0; wr_data = '0;
    grant_lane = '0; grant_g = '0;
    mu_rd_ready  = 1'b1;
    dma_rd_ready = !(mu_rd_valid && f_bank(mu_rd_addr) == f_bank(dma_rd_addr));
    dma_wr_ready = 1'b1;
    for (int b = 0; b < int'(NUM_BANKS); b++) begin
      for (int s = 0; s < int'(SUBBANKS); s++) begin
        int g;
        logic rdone, wdone;
        g = b * int'(SUBBANKS) + s;
        rdone = 1'b0; wdone = 1'b0;
        // ---- read crossbar ----
        if (mu_rd_valid && f_bank(mu_rd_addr) == BW'(b)) begin
          rd_en[g] = 1'b1; rd_row[g] = f_row(mu_rd_addr); rdone = 1'b1;
        end else if (dma_rd_valid && f_bank(dma_rd_addr) == BW'(b)) begin
          rd_en[g] = 1'b1; rd_row[g] = f_row(dma_rd_addr); rdone = 1'b1;
        end
        for (int c = 0; c < int'(NUM_CORES); c++) begin
          int l;
          l = s % int'(LANES);
          if (aligned[c][l] && f_bank(lane_req[c][l].addr) == BW'(b) &&
              f_sb(lane_req[c][l].addr) == SBW'(s)) begin
            if (!lane_req[c][l].we && !rdone) begin
              rd_en[g] = 1'b1; rd_row[g] = f_row(lane_req[c][l].addr); rdone = 1'b1;
              grant_lane[c][l] = 1'b1; grant_g[c][l] = GW'(g);
            end
          end
        end
        for (int c = 0; c < int'(NUM_CORES); c++) begin
          if (ser_valid[c] && !ser_mmio[c] && !ser_req[c].we && !rdone &&
              f_bank(ser_req[c].addr) == BW'(b) && f_sb(ser_req[c].addr) == SBW'(s)) begin
            rd_en[g] = 1'b1; rd_row[g] = f_row(ser_req[c].addr); rdone = 1'b1;
            grant_lane[c][ser_lane[c]] = 1'b1; grant_g[c][ser_lane[c]] = GW'(g);
          end
        end
        // ---- write crossbar ----
        if (dma_wr_valid && f_bank(dma_wr_addr) == BW'(b)) begin
          wr_en[g] = 1'b1; wr_row[g] = f_row(dma_wr_addr);
          wr_data[g] = dma_wr_data[s*32 +: 32]; wdone = 1'b1;
        end
        for (int c = 0; c < int'(NUM_CORES); c++) begin
          int l;
          l = s % int'(LANES);
          if (aligned[c][l] && lane_req[c][l].we && !wdone &&
              f_bank(lane_req[c][l].addr) == BW'(b) && f_sb(lane_req[c][l].addr) == SBW'(s)) begin
            wr_en[g] = 1'b1; wr_row[g] = f_row(lane_req[c][l].addr);
            wr_data[g] = lane_req[c][l].wdata; wdone = 1'b1;
            grant_lane[c][l] = 1'b1; grant_g[c][l] = GW'(g);
          end
        end
        for (int c = 0; c < int'(NUM_CORES); c++) begin
          if (ser_valid[c] && !ser_mmio[c] && ser_req[c].we && !wdone &&
              f_bank(ser_req[c].addr) == BW'(b) && f_sb(ser_req[c].addr) == SBW'(s)) begin
            wr_en[g] = 1'b1; wr_row[g] = f_row(ser_req[c].addr);
            wr_data[g] = ser_req[c].wdata; wdone = 1'b1;
            grant_lane[c][ser_lane[c]] = 1'b1; grant_g[c][ser_lane[c]] = GW'(g);
          end
        end
      end
    end
  end

  always_comb begin
    // ---- MMIO port: one serialised MMIO access per cycle ----
    mmio_valid = 1'b0; mmio_we = 1'b0; mmio_addr = '0; mmio_wdata = '0;
    for (int c = int'(NUM_CORES) - 1; c >= 0; c--) begin
      if (ser_valid[c] && ser_mmio[c]) begin
        mmio_valid = 1'b1; mmio_we = ser_req[c].we;
        mmio_addr = ser_req[c].addr; mmio_wdata = ser_req[c].wdata;
      end
    end
  end

  always_comb begin
    grant_mmio = '0;
    mmio_grant = mmio_valid && mmio_ready;
    for (int c = 0; c < int'(NUM_CORES); c++) begin
      if (ser_valid[c] && ser_mmio[c] && mmio_grant && mmio_addr == ser_req[c].addr &&
          grant_mmio == '0) begin
        grant_mmio[c][ser_lane[c]] = 1'b1;
      end
    end
    lane_ready = grant_lane | grant_mmio;
  end

  // ---------------- storage ----------------
  for (genvar g = 0; g < G; g++) begin : g_sb
    smem_subbank #(.ROWS(SB_ROWS)) u_sb (
      .clk,
      .rd_en(rd_en[g]), .rd_row(rd_row[g]), .rd_data(rd_data[g]),
      .wr_en(wr_en[g]), .wr_row(wr_row[g]), .wr_data(wr_data[g])
    );
  end

  // ---------------- response path ----------------
  logic                 mu_pend, dma_pend;
  logic [BW-1:0]        mu_bank_q, dma_bank_q;
  logic [NUM_CORES-1:0][LANES-1:0]         lp, lm;
  logic [NUM_CORES-1:0][LANES-1:0][GW-1:0] lg;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      mu_pend <= 1'b0; dma_pend <= 1'b0; mu_bank_q <= '0; dma_bank_q <= '0;
      lp <= '0; lm <= '0; lg <= '0;
    end else begin
      mu_pend    <= mu_rd_valid;
      dma_pend   <= dma_rd_valid && dma_rd_ready;
      mu_bank_q  <= f_bank(mu_rd_addr);
      dma_bank_q <= f_bank(dma_rd_addr);
      lp <= lane_ready;
      lm <= grant_mmio;
      lg <= grant_g;
    end
  end

  always_comb begin
    mu_rsp_valid  = mu_pend;
    dma_rsp_valid = dma_pend;
    for (int s = 0; s < int'(SUBBANKS); s++) begin
      mu_rsp_data[s*32 +: 32]  = rd_data[int'(mu_bank_q) * int'(SUBBANKS) + s];
      dma_rsp_data[s*32 +: 32] = rd_data[int'(dma_bank_q) * int'(SUBBANKS) + s];
    end
    for (int c = 0; c < int'(NUM_CORES); c++) begin
      for (int l = 0; l < int'(LANES); l++) begin
        lane_rsp[c][l].valid = lp[c][l];
        lane_rsp[c][l].rdata = lm[c][l] ? mmio_rdata : rd_data[lg[c][l]];
      end
    end
  end

  // wide requests are line aligned
  assert property (@(posedge clk) disable iff (!rst_n)
                   mu_rd_valid |-> mu_rd_addr[$clog2(LINE_BYTES)-1:0] == '0);
  assert property (@(posedge clk) disable iff (!rst_n)
                   dma_wr_valid |-> dma_wr_addr[$clog2(LINE_BYTES)-1:0] == '0);
endmodule

// synchronizer: cluster-wide barrier across the SIMT cores.
//
// When the participating warps of a core reach a barrier, its warp scheduler
// sends one request (bar_valid with a barrier id) to the synchronizer.  The
// synchronizer records, per barrier id, which cores have arrived; once every
// core has arrived it pulses release[id] for one cycle (seen by all cores) and
// clears that barrier, so the id can be reused.  Different ids are
// independent, so several barriers may be in use in a kernel.
// Timing: release follows the last arrival by one cycle.
// The paper gives this behaviour; the one-request-per-core encoding is this
// design's.
module synchronizer #(
  parameter int unsigned NUM_CORES    = virgo_pkg::NUM_CORES,
  parameter int unsigned NUM_BARRIERS = virgo_pkg::NUM_BARRIERS
) (
  input  logic                                   clk,
  input  logic                                   rst_n,
  input  logic [NUM_CORES-1:0]                   bar_valid,
  input  logic [NUM_CORES-1:0][$clog2(NUM_BARRIERS)-1:0] bar_id,
  output logic [NUM_BARRIERS-1:0]                release_o
);
  logic [NUM_BARRIERS-1:0][NUM_CORES-1:0] arrived, next;

  always_comb begin
    next = arrived;
    for (int c = 0; c < int'(NUM_CORES); c++)
      if (bar_valid[c]) next[bar_id[c]][c] = 1'b1;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      arrived   <= '0;
      release_o <= '0;
    end else begin
      for (int b = 0; b < int'(NUM_BARRIERS); b++) begin
        release_o[b] <= (next[b] == '1);
        arrived[b]   <= (next[b] == '1) ? '0 : next[b];
      end
    end
  end

  // a core does not arrive twice at a barrier that has not been released
  for (genvar c = 0; c < NUM_CORES; c++) begin : g_chk
    assert property (@(posedge clk) disable iff (!rst_n)
                     bar_valid[c] |-> !arrived[bar_id[c]][c]);
  end
endmodule

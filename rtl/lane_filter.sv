// lane_filter: the per-core front end of the shared-memory interconnect.
//
// Classifies each SIMT lane's request.  A request is 'aligned' when it falls
// in shared memory and its word index modulo LANES equals the lane number:
// it can then go straight to its subbank's crossbar through the lane's own
// port.  All other requests ('unaligned' shared-memory accesses and accesses to
// the MMIO window) are serialised: each cycle the lowest-numbered such lane is
// offered on the core's single serial port.  Purely combinational; the lane's
// ready comes back from whichever crossbar or the MMIO block accepts it.
module lane_filter
  import virgo_pkg::*;
#(
  parameter int unsigned L = LANES
) (
  input  lane_req_t [L-1:0] req,
  output logic      [L-1:0] aligned,     // request valid and aligned
  output logic      [L-1:0] is_mmio,
  output logic              ser_valid,
  output logic [$clog2(L)-1:0] ser_lane,
  output lane_req_t         ser_req
);
  always_comb begin
    ser_valid = 1'b0;
    ser_lane  = '0;
    ser_req   = '0;
    for (int l = 0; l < int'(L); l++) begin
      is_mmio[l] = (req[l].addr & MMIO_MASK) == MMIO_BASE;
      aligned[l] = req[l].valid && !is_mmio[l] && (req[l].addr < SMEM_BYTES) &&
                   (req[l].addr[2 +: $clog2(L)] == ($clog2(L))'(l));
    end
    for (int l = int'(L) - 1; l >= 0; l--) begin
      if (req[l].valid && !aligned[l]) begin
        ser_valid = 1'b1;
        ser_lane  = ($clog2(L))'(l);
        ser_req   = req[l];
      end
    end
  end
endmodule

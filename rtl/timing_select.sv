// timing_select: applies a region's latency profile entry to a request.
//
// For each of the three operations FLY-DRAM varies (activation tRCD,
// precharge tRP, restoration tRAS) it chooses the reduced latency when the
// region is profiled as fast for that operation and the mechanism is enabled,
// and the standard DDR3-1333H latency otherwise. With fly_enable low the
// controller behaves as a conventional one using the standard timings
// everywhere. The values come from parameters whose defaults are the
// published ones (see fly_pkg). Purely combinational.
module timing_select
  import fly_pkg::*;
#(
  parameter int unsigned RCD_STD  = TRCD_STD,
  parameter int unsigned RP_STD   = TRP_STD,
  parameter int unsigned RAS_STD  = TRAS_STD,
  parameter int unsigned RCD_FAST = TRCD_FAST,
  parameter int unsigned RP_FAST  = TRP_FAST,
  parameter int unsigned RAS_FAST = TRAS_FAST
) (
  input  logic       fly_enable,
  input  lat_entry_t entry,
  output timing_t    timing
);

  always_comb begin
    timing.trcd = (fly_enable && entry.rcd_fast) ? TIME_W'(RCD_FAST) : TIME_W'(RCD_STD);
    timing.trp  = (fly_enable && entry.rp_fast)  ? TIME_W'(RP_FAST)  : TIME_W'(RP_STD);
    timing.tras = (fly_enable && entry.ras_fast) ? TIME_W'(RAS_FAST) : TIME_W'(RAS_STD);
  end

endmodule

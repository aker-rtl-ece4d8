// acw_region_check -- the "Legal?" comparator of the ACW.
//
// Decides whether one AXI4 burst request (AW or AR) lies fully inside at least
// one of NUM_REGIONS address regions of the local access control policy. All
// regions are compared in parallel, so the decision is purely combinational
// and its latency does not depend on NUM_REGIONS.
//
// The burst's byte span [lo, hi] is worked out from addr/len/size/burst:
//   FIXED: lo = addr,            hi = align(addr, 2^size) + 2^size - 1
//   INCR : lo = addr,            hi = align(addr, 2^size) + (len+1)*2^size - 1
//   WRAP : lo = align(addr, T),  hi = lo + T - 1, with T = (len+1)*2^size
// A region {base, size} covers bytes [base, base+size); size 0 disables it.
// The request is legal when lo >= base and hi < base+size for some region.
// All sums are taken one bit wider than the address, so a burst or a region
// running past the top of the address space cannot wrap around and match.
// The reserved burst type, a beat wider than the data bus and a WRAP burst
// with a length other than 2, 4, 8 or 16 or an unaligned start address
// (all forbidden by AXI4) are never legal.
//
// Interface: ax (request), regions (policy) -> legal, match (per region).
// Timing: combinational.
//
// Follows the paper: "fully contained in at least one region", regions as
// base + size, checked in parallel. This design's own choices: the handling
// of malformed bursts and of regions that wrap the address space.
module acw_region_check
  import acw_pkg::*;
#(
  parameter int unsigned NUM_REGIONS = 16
) (
  input  ax_t                       ax,
  input  region_t [NUM_REGIONS-1:0] regions,
  output logic                      legal,
  output logic [NUM_REGIONS-1:0]    match
);

  localparam int unsigned MAX_SIZE = $clog2(STRB_W);

  typedef logic [ADDR_W:0] wide_t;   // one extra bit for carries

  wide_t lo, hi;
  logic  well_formed;

  always_comb begin
    wide_t beat_bytes, total_bytes, aligned;
    beat_bytes  = wide_t'(1) << ax.size;
    total_bytes = wide_t'({1'b0, ax.len}) + wide_t'(1);
    total_bytes = total_bytes << ax.size;
    aligned     = wide_t'(ax.addr) & ~(beat_bytes - wide_t'(1));
    well_formed = (32'(ax.size) <= MAX_SIZE);
    lo          = wide_t'(ax.addr);
    hi          = '0;
    unique case (ax.burst)
      BURST_FIXED: hi = aligned + beat_bytes - wide_t'(1);
      BURST_INCR:  hi = aligned + total_bytes - wide_t'(1);
      BURST_WRAP: begin
        lo = wide_t'(ax.addr) & ~(total_bytes - wide_t'(1));
        hi = lo + total_bytes - wide_t'(1);
        if (!(ax.len inside {8'd1, 8'd3, 8'd7, 8'd15})) well_formed = 1'b0;
        if (aligned != wide_t'(ax.addr))                 well_formed = 1'b0;
      end
      default: well_formed = 1'b0;
    endcase
  end

  // One comparator pair per region, all in parallel.
  for (genvar k = 0; k < NUM_REGIONS; k++) begin : g_region
    wide_t base_w, end_w;   // end_w is one past the last byte of the region
    assign base_w   = wide_t'(regions[k].base);
    assign end_w    = wide_t'(regions[k].base) + wide_t'(regions[k].size);
    assign match[k] = well_formed && (regions[k].size != '0) &&
                      (lo >= base_w) && (hi < end_w);
  end

  assign legal = |match;

endmodule

// partition_map: the IP vendor's map of memory regions to engine sets.
//
// Each engine set of the Shield's memory interface owns one address range
// [REGION_BASE[i], REGION_BASE[i] + REGION_BYTES[i]). Given a burst address
// this block reports whether it falls in a mapped region, which engine set
// owns it, and whether the whole burst (addr .. addr + bytes - 1) stays inside
// that region. The paper says the burst decoder consults such a map; making
// the regions build-time parameters and matching the lowest-numbered region
// first are this design's choices.
//
// Timing: purely combinational.
module partition_map
  import shield_pkg::*;
#(
  parameter int NUM_SETS = 2,
  parameter logic [NUM_SETS-1:0][AXI_ADDR_W-1:0] REGION_BASE  = {64'h0000_0000_0010_0000, 64'h0},
  parameter logic [NUM_SETS-1:0][AXI_ADDR_W-1:0] REGION_BYTES = {64'h0000_0000_0010_0000, 64'h0000_0000_0010_0000},
  localparam int SW = (NUM_SETS > 1) ? $clog2(NUM_SETS) : 1
) (
  input  logic [AXI_ADDR_W-1:0] addr,
  input  logic [AXI_ADDR_W-1:0] bytes,   // burst length in bytes
  output logic                  hit,
  output logic [SW-1:0]         set_idx
);
  always_comb begin
    hit     = 1'b0;
    set_idx = '0;
    for (int i = NUM_SETS - 1; i >= 0; i--) begin
      if (addr >= REGION_BASE[i] && addr - REGION_BASE[i] < REGION_BYTES[i] &&
          addr - REGION_BASE[i] + bytes <= REGION_BYTES[i]) begin
        hit     = 1'b1;
        set_idx = SW'(i);
      end
    end
  end
endmodule

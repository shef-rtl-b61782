// counter_store: on-chip per-chunk write counters for replay protection.
//
// Instead of a Merkle tree, the Shield keeps one counter per chunk of a
// protected region in on-chip RAM. The engine set increments counter i each
// time it writes chunk i back to DRAM and binds the counter value into the
// chunk's MAC (and, in this design, into its AES-CTR IV). A replayed old
// chunk and tag then fail verification because the counter has moved on.
// Following the paper: one counter per chunk, incremented by 1 on every
// write-back. This design's choices: counters start at 0 on reset, the
// counter width is a parameter and wraps silently.
//
// Interface: combinational read port (rd_idx -> rd_ctr); increment port
// (inc, inc_idx) takes effect at the next clock edge.
module counter_store #(
  parameter int ENTRIES = 2048,
  parameter int CTR_W   = 8,
  localparam int IW = (ENTRIES > 1) ? $clog2(ENTRIES) : 1
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic [IW-1:0]    rd_idx,
  output logic [CTR_W-1:0] rd_ctr,
  input  logic             inc,
  input  logic [IW-1:0]    inc_idx
);
  logic [CTR_W-1:0] ctr [ENTRIES];
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < ENTRIES; i++) ctr[i] <= '0;
    end else if (inc) begin
      ctr[inc_idx] <= ctr[inc_idx] + 1'b1;
    end
  end
  assign rd_ctr = ctr[rd_idx];
endmodule

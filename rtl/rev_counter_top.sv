// rev_counter_top: the two proposed reversible counters side by side.
//
// Both 3-bit counters share clk, the active-low asynchronous reset and the
// count input cp. sync_count counts up by one on each rising clk edge with
// cp = 1 (synchronous counter, quantum cost 109); async_count counts down by
// one on the same edges (ripple counter, quantum cost 103). cp = 0 holds
// both. Each counter's complementary outputs and its garbage outputs (the
// gate outputs nothing uses) are brought out as ports. Putting both counters
// under one top is this design's choice: they are two alternative designs
// proposed together, not parts of one larger circuit.
module rev_counter_top
  import rev_pkg::*;
(
  input  logic                        clk,
  input  logic                        rst_n,
  input  logic                        cp,
  output logic [COUNT_BITS-1:0]       sync_count,
  output logic [COUNT_BITS-1:0]       sync_count_n,
  output logic [COUNT_BITS-1:0]       async_count,
  output logic [COUNT_BITS-1:0]       async_count_n,
  output logic [3*JK_GARBAGE+2:0]     sync_garbage,
  output logic [3*JK_GARBAGE:0]       async_garbage
);

  rev_sync_counter u_sync (
    .clk, .rst_n, .cp,
    .count(sync_count), .count_n(sync_count_n), .garbage(sync_garbage)
  );

  rev_async_counter u_async (
    .clk, .rst_n, .cp,
    .count(async_count), .count_n(async_count_n), .garbage(async_garbage)
  );

endmodule

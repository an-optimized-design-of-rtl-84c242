// rev_sync_counter: 3-bit synchronous up-counter made of three reversible
// JK flip-flops (quantum cost 3*34 + 4 + 3 = 109).
//
// All three flip-flops share one clock. The CP input is copied to each
// flip-flop by a chain of three Feynman gates in copy mode (B = 0). Stage 0
// has J = K = 1 (Vcc) and toggles on every counted edge; stage 1 has
// J = K = Q0; stage 2 has J = K = Q1.Q0, formed by one MUX gate with its C
// input tied to 0. The result counts 0, 1, ..., 7, 0, ... by one on each
// rising edge of clk where cp = 1, and holds where cp = 0; count is valid
// right after the edge (no latency beyond the flip-flop itself).
//
// The gate list and the wiring are the published ones. The clk / cp split
// and the active-low asynchronous reset to 0 come from rev_jk_ff and are
// this design's choices. Q0 fans out to J1, K1 and the MUX gate, as drawn.
//
// garbage: 12 bits per flip-flop (stage 0 in the low bits), then MUX.P,
// MUX.Q and the last Feynman gate's second copy of CP.
module rev_sync_counter
  import rev_pkg::*;
(
  input  logic                               clk,
  input  logic                               rst_n,
  input  logic                               cp,
  output logic [COUNT_BITS-1:0]              count,
  output logic [COUNT_BITS-1:0]              count_n,
  output logic [3*JK_GARBAGE+2:0]            garbage
);

  logic [2:0] cp_copy;
  logic       cp_chain0, cp_chain1;
  logic       j2k2;

  // CP copied through three Feynman gates.
  feynman_gate fg_cp0 (.a(cp),        .b(1'b0), .p(cp_copy[0]), .q(cp_chain0));
  feynman_gate fg_cp1 (.a(cp_chain0), .b(1'b0), .p(cp_copy[1]), .q(cp_chain1));
  feynman_gate fg_cp2 (.a(cp_chain1), .b(1'b0), .p(cp_copy[2]), .q(garbage[3*JK_GARBAGE+2]));

  // J2 = K2 = Q1.Q0.
  mux_gate mg_and (.a(count[0]), .b(count[1]), .c(1'b0),
                   .p(garbage[3*JK_GARBAGE]), .q(garbage[3*JK_GARBAGE+1]), .r(j2k2));

  rev_jk_ff ff0 (.clk, .rst_n, .cp(cp_copy[0]), .j(1'b1),     .k(1'b1),
                 .q(count[0]), .q_n(count_n[0]), .garbage(garbage[0*JK_GARBAGE +: JK_GARBAGE]));
  rev_jk_ff ff1 (.clk, .rst_n, .cp(cp_copy[1]), .j(count[0]), .k(count[0]),
                 .q(count[1]), .q_n(count_n[1]), .garbage(garbage[1*JK_GARBAGE +: JK_GARBAGE]));
  rev_jk_ff ff2 (.clk, .rst_n, .cp(cp_copy[2]), .j(j2k2),     .k(j2k2),
                 .q(count[2]), .q_n(count_n[2]), .garbage(garbage[2*JK_GARBAGE +: JK_GARBAGE]));

endmodule

// rev_async_counter: 3-bit asynchronous (ripple) counter made of three
// reversible JK flip-flops (quantum cost 3*34 + 1 = 103).
//
// Every stage has J = K = 1 (Vcc) and toggles. Stage 0 is clocked by clk
// and receives CP through one Feynman gate in copy mode. Stages 1 and 2 are
// clocked by the Q output of the stage before them, as drawn in the
// published circuit, and their CP inputs are tied to Vcc. The flip-flops
// change on a rising edge, so a stage toggles when the stage before it goes
// from 0 to 1: the counter counts DOWN, 0, 7, 6, ..., 1, 0, one step per
// rising clk edge with cp = 1. (Clocking from Q' instead would count up.)
// The bits settle one flip-flop delay apart (ripple); in zero-delay
// simulation they are all settled before the next clk edge.
//
// The triggering edge, the clk / cp split and the active-low asynchronous
// reset to 0 are this design's choices; the gate list and the Q-to-clock
// wiring are the published ones.
//
// garbage: 12 bits per flip-flop (stage 0 in the low bits), then the
// Feynman gate's second copy of CP.
module rev_async_counter
  import rev_pkg::*;
(
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    cp,
  output logic [COUNT_BITS-1:0]   count,
  output logic [COUNT_BITS-1:0]   count_n,
  output logic [3*JK_GARBAGE:0]   garbage
);

  logic cp0;

  feynman_gate fg_cp (.a(cp), .b(1'b0), .p(cp0), .q(garbage[3*JK_GARBAGE]));

  rev_jk_ff ff0 (.clk(clk),      .rst_n, .cp(cp0),  .j(1'b1), .k(1'b1),
                 .q(count[0]), .q_n(count_n[0]), .garbage(garbage[0*JK_GARBAGE +: JK_GARBAGE]));
  rev_jk_ff ff1 (.clk(count[0]), .rst_n, .cp(1'b1), .j(1'b1), .k(1'b1),
                 .q(count[1]), .q_n(count_n[1]), .garbage(garbage[1*JK_GARBAGE +: JK_GARBAGE]));
  rev_jk_ff ff2 (.clk(count[1]), .rst_n, .cp(1'b1), .j(1'b1), .k(1'b1),
                 .q(count[2]), .q_n(count_n[2]), .garbage(garbage[2*JK_GARBAGE +: JK_GARBAGE]));

endmodule

// mux_gate: 3x3 reversible MUX gate.
//
// P = A, Q = A xor B xor C, R = A'C xor AB. R is a 2:1 multiplexer that
// passes B when A = 1 and C when A = 0; with C tied to 0 it is the AND of A
// and B, which is how the counters and the flip-flop use it. Q keeps the
// mapping one-to-one. Quantum cost 4; three XOR, two AND, one NOT.
// Purely combinational. The equations are exactly the published ones.
module mux_gate (
  input  logic a,
  input  logic b,
  input  logic c,
  output logic p,
  output logic q,
  output logic r
);
  assign p = a;
  assign q = a ^ b ^ c;
  assign r = (~a & c) ^ (a & b);
endmodule

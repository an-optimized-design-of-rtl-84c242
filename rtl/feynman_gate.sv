// feynman_gate: 2x2 reversible Feynman (controlled-NOT) gate.
//
// P = A and Q = A xor B. Two inputs, two outputs, one-to-one, so the inputs
// can always be recovered from the outputs. With B tied to 0 the gate works
// in copy mode (P = Q = A); this is how the counters and the flip-flop make a
// second copy of a signal, since plain fan-out is not allowed in a reversible
// circuit. Quantum cost 1; one XOR. Purely combinational, no timing of its
// own. The equations are exactly the published ones.
module feynman_gate (
  input  logic a,
  input  logic b,
  output logic p,
  output logic q
);
  assign p = a;
  assign q = a ^ b;
endmodule

// new_gate: 3x3 reversible "New gate".
//
// P = A, Q = AB xor C, R = A'C' xor B'. With B tied to 1, R = A'C', the NOR
// of A and C, which is the role the gate plays in the reversible JK
// flip-flop: the two New gates there form its cross-coupled NOR pair.
// Quantum cost 7; two XOR, two AND, three NOT. Purely combinational.
//
// Only the gate's name and its operator count (two XOR, two AND, three NOT)
// are given with the design; the equations are the New gate's usual
// definition from the reversible-logic literature, which has exactly that
// operator count.
module new_gate (
  input  logic a,
  input  logic b,
  input  logic c,
  output logic p,
  output logic q,
  output logic r
);
  assign p = a;
  assign q = (a & b) ^ c;
  assign r = (~a & ~c) ^ ~b;
endmodule

// rev_jk_ff: JK flip-flop built from reversible gates (4 MUX gates, 2 New
// gates, 4 Feynman gates, quantum cost 34).
//
// Function: on a rising edge of clk with cp = 1, J=K=0 holds, J=1 K=0 sets,
// J=0 K=1 resets and J=K=1 toggles. With cp = 0 the state holds. Q and Q'
// are two separate rails, as in the published circuit (here each has its
// own register), and always complement each other (checked by an
// assertion).
//
// How it works. The gate network follows the published figure:
//   MG1 (A=cp, B=k, C=0)  R = cp.k             ; MG3 likewise gives cp.j
//   MG2 (A=Q,  B=cp.k, C=0)  R = rst = Q.cp.k   ; MG4 (A=Q', B=cp.j) set = Q'.cp.j
//   NG1 (A=rst, B=1, C=Q')   R = NOR(rst, Q')   ; NG2 (A=set, B=1, C=Q) NOR(set, Q)
//   Feynman gates then carry each rail out to Q / Q' and back to the inputs.
// The published network is a clocked cross-coupled NOR latch: the two New
// gates feed each other and the outputs loop straight back to MG2/MG4 with
// no storage element, so with cp held high and J = K = 1 it would oscillate.
// This RTL breaks that loop with an edge-triggered register on each rail:
// the New gates see the stored Q and Q' instead of each other's output, and
// the first Feynman gate of each rail (FG1, FG2) XORs the NOR output with the
// set (resp. reset) term, which gives the settled value of the latch in one
// pass:  Q+ = NOR(rst, Q') xor set,  Q'+ = NOR(set, Q) xor rst.
// (NOR(rst,Q') = Q.~rst and set need Q = 0, so they are never both 1 and the
// XOR acts as an OR.) The second Feynman gate of each rail (FG3, FG4) copies
// the stored value to the output and to the MUX gate feedback, and the MUX
// gates' pass-through P outputs carry Q and Q' on to the New gates, so no
// signal fans out except cp, which feeds MG1 and MG3 as drawn.
// The separate clk, the register and the asynchronous active-low reset (to
// Q = 0, Q' = 1) are choices of this RTL; the published flip-flop has only
// the CP input.
//
// Garbage outputs (12): MG1.P, MG1.Q, MG3.P, MG3.Q, MG2.Q, MG4.Q, NG1.P,
// NG1.Q, NG2.P, NG2.Q, FG1.P, FG2.P, in that order from bit 0.
module rev_jk_ff
  import rev_pkg::*;
(
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic                  cp,
  input  logic                  j,
  input  logic                  k,
  output logic                  q,
  output logic                  q_n,
  output logic [JK_GARBAGE-1:0] garbage
);

  logic q_r, qn_r;              // stored rails
  logic q_fb, qn_fb;            // copies fed back into MG2 / MG4
  logic q_pass, qn_pass;        // MG2.P / MG4.P, fed on to the New gates
  logic cpk, cpj;               // cp.k, cp.j
  logic rst_t, set_t;           // reset / set terms
  logic nor_q, nor_qn;          // New gate NOR outputs
  logic q_next, qn_next;

  // Gating of K and J by CP.
  mux_gate mg1 (.a(cp), .b(k), .c(1'b0), .p(garbage[0]), .q(garbage[1]), .r(cpk));
  mux_gate mg3 (.a(cp), .b(j), .c(1'b0), .p(garbage[2]), .q(garbage[3]), .r(cpj));

  // Feedback gating: reset only when set, set only when reset.
  mux_gate mg2 (.a(q_fb),  .b(cpk), .c(1'b0), .p(q_pass),  .q(garbage[4]), .r(rst_t));
  mux_gate mg4 (.a(qn_fb), .b(cpj), .c(1'b0), .p(qn_pass), .q(garbage[5]), .r(set_t));

  // Cross-coupled NOR pair (B = 1 makes R the NOR of A and C).
  new_gate ng1 (.a(rst_t), .b(1'b1), .c(qn_pass), .p(garbage[6]), .q(garbage[7]), .r(nor_q));
  new_gate ng2 (.a(set_t), .b(1'b1), .c(q_pass),  .p(garbage[8]), .q(garbage[9]), .r(nor_qn));

  // Settled latch value of each rail.
  feynman_gate fg1 (.a(nor_q),  .b(set_t), .p(garbage[10]), .q(q_next));
  feynman_gate fg2 (.a(nor_qn), .b(rst_t), .p(garbage[11]), .q(qn_next));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      q_r  <= 1'b0;
      qn_r <= 1'b1;
    end else begin
      q_r  <= q_next;
      qn_r <= qn_next;
    end
  end

  // Copy mode: one copy to the output, one back into the network.
  feynman_gate fg3 (.a(q_r),  .b(1'b0), .p(q),   .q(q_fb));
  feynman_gate fg4 (.a(qn_r), .b(1'b0), .p(q_n), .q(qn_fb));

  // The two rails never agree.
  a_rails_complement: assert property (@(posedge clk) disable iff (!rst_n) q_r != qn_r)
    else $error("rev_jk_ff: Q and Q' rails equal");

endmodule

# Reversible 3-bit counters built from MUX, New and Feynman gates

A reversible gate has as many outputs as inputs, and its inputs can always be
worked out again from its outputs. Such a gate loses no information, so in
principle it need not dissipate the kT ln 2 of heat that erasing a bit costs.
This design builds two ordinary 3-bit counters, one synchronous and one ripple
(asynchronous), entirely from three kinds of reversible gate. It follows the
design proposed in "An Optimized Design of Reversible Sequential Digital
Circuits" (Singla, Gupta, Bhardwaj, Basia). The main idea there is to build
the JK flip-flop from the reversible **MUX gate** (quantum cost 4) instead of
the Fredkin gate (cost 5). That brings the synchronous counter down to a
quantum cost of 109 and the ripple counter to 103, against 122 and 115 for the
earlier designs the authors compare with.

The RTL describes each reversible gate exactly and wires the gates as the
published circuits do. There is one place where it has to depart from the
published circuit: the storage element of the flip-flop. The section
*From latch to flip-flop* below explains why and how.

## The three gates

| Gate | Module | Inputs → outputs | Quantum cost | Operators (XOR, AND, NOT) |
|------|--------|------------------|--------------|---------------------------|
| Feynman | `feynman_gate` | P = A, Q = A ⊕ B | 1 | 1, 0, 0 |
| MUX | `mux_gate` | P = A, Q = A ⊕ B ⊕ C, R = A'C ⊕ AB | 4 | 3, 2, 1 |
| New | `new_gate` | P = A, Q = AB ⊕ C, R = A'C' ⊕ B' | 7 | 2, 2, 3 |

The design uses each gate in just one way:

- **Feynman, B = 0:** copy mode, P = Q = A. A reversible circuit may not fan
  a wire out directly, so a second copy of a signal comes from a Feynman gate.
- **MUX, C = 0:** R = A·B, a two-input AND.
- **New, B = 1:** R = A'C' = NOR(A, C).

The New gate's equations are not given with the design. Only its name and its
operator count (two XOR, two AND, three NOT) are. The equations above are the
gate's usual definition in the reversible-logic literature, and they have
exactly that operator count. The New gate's quantum cost is not stated either.
The value 7 is the only one for which both published counter totals follow
from the published gate counts (109 = 13·4 + 6·n + 15·1 gives n = 7).
`rev_pkg` holds all these costs, together with the gate counts and the
totals derived from them. Quantum cost is 34 for the flip-flop, 109 for the
synchronous counter and 103 for the ripple counter. The operator counts, as
XOR/AND/NOT, are 20/12/10, 66/38/31 and 61/36/30. All six match the published
figures, and the testbenches check them.

Every gate output that nothing uses is a *garbage output*. Leaving garbage
outputs dangling would hide the cost of reversibility, so each block brings
them out on a `garbage` port: 12 per flip-flop, 39 for the synchronous
counter and 37 for the ripple counter. Each module's header lists the bit
order.

## The reversible JK flip-flop (`rev_jk_ff`)

The flip-flop uses 4 MUX gates, 2 New gates and 4 Feynman gates (cost
4·4 + 2·7 + 4·1 = 34). It has two rails, Q and Q', and they play mirror-image
roles:

```
        K ─┐                                 ┌───────── Q feedback ◄──────────┐
 CP ─┬─ MG1 (A=CP,B=K,C=0) ─ CP·K ─ MG2 (A=Q, B=CP·K) ─ rst ─ NG1 (NOR rst,Q') ─ FG ─ FG ─┴─ Q
     └─ MG3 (A=CP,B=J,C=0) ─ CP·J ─ MG4 (A=Q',B=CP·J) ─ set ─ NG2 (NOR set,Q ) ─ FG ─ FG ─┬─ Q'
        J ─┘                                 └───────── Q' feedback ◄─────────┘
```

- MG1 and MG3 gate K and J with CP.
- MG2 forms the reset term rst = Q·CP·K. It can only reset a flip-flop that is
  set.
- MG4 forms the set term set = Q'·CP·J. It can only set a flip-flop that is
  clear.
- The two New gates, with B = 1, are the classic cross-coupled NOR pair of an
  SR latch.
- The Feynman gates carry each rail out to its output and back to the MUX
  gates.

Read like this, the published flip-flop is the textbook clocked JK latch
built from NOR gates, with each logic gate replaced by a reversible one.

### From latch to flip-flop

That published circuit has no storage element. Q is held by the combinational
loop through the two New gates, and Q and Q' also loop straight back into MG2
and MG4. This gives two problems:

- Take J = K = 1 with CP high. The loop toggles Q, the new Q toggles it again,
  and so on for as long as CP stays high. This is the race-around of a
  level-sensitive JK latch. A counter needs exactly one toggle per clock.
- A combinational loop is not synthesizable logic, and a two-state simulator
  cannot settle one that oscillates.

`rev_jk_ff` therefore cuts the loop with a register on each rail, clocked by
the rising edge of a separate `clk`. **CP keeps its role as the gating input
of MG1 and MG3**: the state changes on a rising `clk` edge only while
`cp = 1`.

With the loop cut, each New gate sees the *stored* value of the other rail
rather than the other gate's new output. A single pass through the NOR pair
does not reach the value the latch would settle to. The first Feynman gate of
each rail fixes this. In the published figure its B input is tied to 0; here
it takes the rail's set (or reset) term:

```
Q+  = NOR(rst, Q') ⊕ set   = Q·rst' + set
Q'+ = NOR(set, Q)  ⊕ rst   = Q'·set' + rst
```

`NOR(rst, Q')` can be 1 only when Q = 1, and `set` only when Q = 0. They are
never both 1, so the XOR acts as the OR that the settled latch computes. The
result is the JK characteristic equation, and the two rails always stay
complementary (an assertion in the module checks this):

| CP | J | K | Q+ |
|----|---|---|----|
| 0 | x | x | Q (hold) |
| 1 | 0 | 0 | Q (hold) |
| 1 | 0 | 1 | 0 |
| 1 | 1 | 0 | 1 |
| 1 | 1 | 1 | Q' (toggle) |

The second Feynman gate of each rail is in copy mode. One copy drives the
output and the other feeds the MUX gate. The MUX gate's pass-through output P
then carries the value on to the New gate of the other rail, so neither rail
fans out. The gate count is the published 4 + 2 + 4.

In the published figure CP fans out straight to MG1 and MG3. The RTL keeps
that fan-out as drawn.

Reset is this design's own choice, since none is specified. An asynchronous,
active-low `rst_n` clears the flip-flop (Q = 0, Q' = 1).

Timing: Q and Q' change right after the rising `clk` edge, with no further
latency. J, K and CP only need to be stable around that edge.

## The synchronous counter (`rev_sync_counter`, cost 109)

It has three flip-flops on one clock, and counts up by one on each rising
`clk` edge with `cp = 1`:

- Stage 0: J0 = K0 = 1.
- Stage 1: J1 = K1 = Q0.
- Stage 2: J2 = K2 = Q1·Q0, made by one MUX gate with C = 0.

A chain of three Feynman gates in copy mode delivers CP to the three
flip-flops. The third gate's spare copy goes to the garbage port. The counter
uses 3 × 34 + 4 + 3 = 109.

Q0 fans out to J1, K1 and the MUX gate, as it does in the published circuit.

## The ripple counter (`rev_async_counter`, cost 103)

All three stages have J = K = 1, so each one toggles on every edge it sees:

- Stage 0 is clocked by `clk` and gets CP through one Feynman gate.
- Stages 1 and 2 are each clocked by the **Q output** of the stage before.
  The published circuit draws it that way.

The flip-flops trigger on a rising edge. So a stage toggles when the stage
before it goes from 0 to 1, and the counter **counts down**: 0, 7, 6, …, 1,
0. Driving each stage's clock from Q' of the stage before would make it count
up. The published circuit does not say which edge triggers the flip-flops, so
the direction of count is this design's reading. CP is tied high on stages 1
and 2, which get their "clock pulse" from their `clk` pin. The counter uses
3 × 34 + 1 = 103.

The published text gives two accounts of this counter:

- The section on counters, and the figure, feed each output to the next
  stage's clock. This design follows them.
- One sentence describes the proposed ripple counter as having a "common
  clock input".

Two practical points follow from the ripple clocking:

- Stages 1 and 2 see no `clk` edge while reset is held. So `rst_n` must
  actually fall (an edge), not just start at 0.
- In hardware the bits settle one flip-flop delay apart. In zero-delay
  simulation they have all settled by the next `clk` edge.

## Top level (`rev_counter_top`)

The two counters are alternative designs, not parts of one circuit. The top
places them side by side on shared `clk`, `rst_n` and `cp`:

- `sync_count` counts up.
- `async_count` counts down.

Both counters' complement rails and garbage outputs are ports of the top.
Nothing has parameters: the counters are 3-bit by construction, since the
AND term of stage 2 is specific to three bits.

## What follows the published design and what does not

Follows it:

- The equations of the Feynman and MUX gates.
- The gate types and counts in each block.
- The connections of both counters.
- The reading of the flip-flop as a clocked NOR latch whose set and reset are
  gated by CP and by the fed-back outputs.
- The quantum costs 34, 109 and 103, and the operator counts.

Departs from it, or fills a gap:

- The New gate's equations and its cost of 7 (see above).
- A register on each rail, clocked by a separate `clk`, in place of the
  combinational latch loop. As a result the first Feynman gate of each rail
  takes the set or reset term where the drawing shows a constant 0.
- The asynchronous active-low reset.
- The rising-edge triggering, and with it the downward count of the ripple
  counter.
- Which pin of each gate each wire enters, where the drawings cannot be read.
  The choices made are the only ones that give a working JK flip-flop and
  counter.

Not built:

- The Fredkin gate. It appears only as the gate the MUX gate replaces.
- The conventional counters and the earlier reversible counters. They are
  only compared against, and their circuits are not given.

Everything here is logic-level. Reversibility is a property of the gate
functions, and the testbenches check it for each gate. Nothing in the RTL
models energy, and a synthesis tool will simply turn these gates into
ordinary logic.

## Files

- `rtl/rev_pkg.sv`: the shared constants (costs, gate counts, garbage
  widths).
- `rtl/feynman_gate.sv`, `rtl/mux_gate.sv`, `rtl/new_gate.sv`: the gates.
- `rtl/rev_jk_ff.sv`, `rtl/rev_sync_counter.sv`,
  `rtl/rev_async_counter.sv`, `rtl/rev_counter_top.sv`: the flip-flop, the
  counters and the top.

There is one self-checking testbench per module in `tb/`. Each prints
`TB_RESULT checks=N failures=M` and ends with `$finish`, and each has a
watchdog.

- **Gates:** checked exhaustively against their truth tables. Each test also
  checks that no two input patterns give the same output (reversibility), and
  checks the gate's special use: copy, AND or NOR.
- **Flip-flop:** compared with a JK reference model under directed and random
  J, K and CP. The test checks the reset and the one-edge timing, and counts
  the hold, set, reset, toggle and CP-low cases.
- **Counters:** compared with reference up- and down-counters under a random
  `cp`. The tests also check the costs 109 and 103.
- **Top (`tb_rev_counter_top`):** runs the whole design at its only size. It
  counts that every mechanism happened at least once: counting, hold,
  wrap-around, carry or borrow into bit 2, the full ripple through all three
  stages, and an asynchronous reset in mid-count.

To simulate with Verilator 5, from the directory that holds `rtl/` and
`tb/`:

```
verilator --binary --timing --assert -Irtl -y rtl -y tb +libext+.sv \
    rtl/rev_pkg.sv tb/tb_rev_counter_top.sv --top-module tb_rev_counter_top
./obj_dir/Vtb_rev_counter_top
```

Replace the testbench name to run another one. To lint a module, run
`verilator --lint-only -Wall -Irtl -y rtl +libext+.sv rtl/rev_pkg.sv
rtl/<module>.sv`. The linter reports a `SYNCASYNCNET` warning on `rst_n`.
It appears because the flip-flop's rail assertion is disabled by the same
reset that clears the register, and it can be ignored.

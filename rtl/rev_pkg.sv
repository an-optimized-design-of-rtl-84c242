// rev_pkg: constants shared by the reversible gates, the reversible JK
// flip-flop and the two counters.
//
// Quantum costs: the Feynman gate costs 1 and the MUX gate 4, as the gate
// definitions state. The New gate's cost is not stated anywhere; 7 is the
// only value for which the published totals (109 for the synchronous and 103
// for the asynchronous counter) follow from the gate counts below, so it is
// taken as derived. The gate counts per block are the published ones and
// match the instances in the RTL one for one. Operator counts ("total logical
// calculation") are kept as (xor, and, not) triples.
package rev_pkg;

  // Quantum cost per gate type.
  localparam int unsigned QC_FEYNMAN = 1;
  localparam int unsigned QC_MUX     = 4;
  localparam int unsigned QC_NEW     = 7;  // derived, see above

  // Gate counts of the reversible JK flip-flop.
  localparam int unsigned JK_MUX     = 4;
  localparam int unsigned JK_NEW     = 2;
  localparam int unsigned JK_FEYNMAN = 4;

  // Extra gates of each counter besides its three flip-flops.
  localparam int unsigned SYNC_MUX     = 1;
  localparam int unsigned SYNC_FEYNMAN = 3;
  localparam int unsigned ASYNC_FEYNMAN = 1;

  localparam int unsigned QC_JK = JK_MUX*QC_MUX + JK_NEW*QC_NEW + JK_FEYNMAN*QC_FEYNMAN;  // 34
  localparam int unsigned QC_SYNC_COUNTER  = 3*QC_JK + SYNC_MUX*QC_MUX + SYNC_FEYNMAN*QC_FEYNMAN;  // 109
  localparam int unsigned QC_ASYNC_COUNTER = 3*QC_JK + ASYNC_FEYNMAN*QC_FEYNMAN;                   // 103

  // Number of counter bits (both counters are 3-bit designs).
  localparam int unsigned COUNT_BITS = 3;

  // Unused gate outputs of one reversible JK flip-flop, collected on its
  // garbage port (see rev_jk_ff for the list).
  localparam int unsigned JK_GARBAGE = 12;

  // Total logical calculation: counts of 2-input XOR, 2-input AND and NOT.
  typedef struct packed {
    logic [7:0] n_xor;
    logic [7:0] n_and;
    logic [7:0] n_not;
  } logic_calc_t;

  localparam logic_calc_t TLC_FEYNMAN = '{n_xor: 8'd1, n_and: 8'd0, n_not: 8'd0};
  localparam logic_calc_t TLC_MUX     = '{n_xor: 8'd3, n_and: 8'd2, n_not: 8'd1};
  localparam logic_calc_t TLC_NEW     = '{n_xor: 8'd2, n_and: 8'd2, n_not: 8'd3};

  // Operator counts of the composite blocks, summed from the gate counts
  // above: 20/12/10 for the flip-flop, 66/38/31 for the synchronous and
  // 61/36/30 for the asynchronous counter.
  localparam logic_calc_t TLC_JK = '{
    n_xor: 8'(JK_MUX*TLC_MUX.n_xor + JK_NEW*TLC_NEW.n_xor + JK_FEYNMAN*TLC_FEYNMAN.n_xor),
    n_and: 8'(JK_MUX*TLC_MUX.n_and + JK_NEW*TLC_NEW.n_and + JK_FEYNMAN*TLC_FEYNMAN.n_and),
    n_not: 8'(JK_MUX*TLC_MUX.n_not + JK_NEW*TLC_NEW.n_not + JK_FEYNMAN*TLC_FEYNMAN.n_not)};
  localparam logic_calc_t TLC_SYNC_COUNTER = '{
    n_xor: 8'(3*TLC_JK.n_xor + SYNC_MUX*TLC_MUX.n_xor + SYNC_FEYNMAN*TLC_FEYNMAN.n_xor),
    n_and: 8'(3*TLC_JK.n_and + SYNC_MUX*TLC_MUX.n_and + SYNC_FEYNMAN*TLC_FEYNMAN.n_and),
    n_not: 8'(3*TLC_JK.n_not + SYNC_MUX*TLC_MUX.n_not + SYNC_FEYNMAN*TLC_FEYNMAN.n_not)};
  localparam logic_calc_t TLC_ASYNC_COUNTER = '{
    n_xor: 8'(3*TLC_JK.n_xor + ASYNC_FEYNMAN*TLC_FEYNMAN.n_xor),
    n_and: 8'(3*TLC_JK.n_and + ASYNC_FEYNMAN*TLC_FEYNMAN.n_and),
    n_not: 8'(3*TLC_JK.n_not + ASYNC_FEYNMAN*TLC_FEYNMAN.n_not)};

endpackage

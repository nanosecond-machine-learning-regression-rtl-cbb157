// fwx_pkg -- shared types and constants of the deep-decision-tree BDT regression engine.
//
// The engine evaluates a boosted forest of regression trees in a fixed, fully parallel
// pipeline. Every terminal bin of every tree is one "parallel decision path": the AND of
// range checks  lo < x_v < hi  on all input variables. This package holds the defaults of
// the benchmark configuration (8 input variables of 16 bits, 16-bit output, 40 trees of
// maximum depth 5) and the types that carry the per-bin bounds.
//
// Bounds are signed and two bits wider than the widest input variable, so that a bound can
// sit one step outside the variable's range: lo = -1 leaves a variable unconstrained from
// below, hi = 2**W leaves it unconstrained from above, and lo >= hi marks an empty range
// (used for bin slots a shallow tree does not populate). This encoding is a choice of this
// design; the strict comparisons themselves follow the published engine.
package fwx_pkg;

  // Benchmark configuration.
  localparam int unsigned N_VAR_DEF     = 8;   // input variables
  localparam int unsigned VAR_BITS_DEF  = 16;  // bits of each input variable
  localparam int unsigned OUT_BITS_DEF  = 16;  // magnitude bits of the regression output
  localparam int unsigned N_TREE_DEF    = 40;  // trees in the forest
  localparam int unsigned MAX_DEPTH_DEF = 5;   // maximum tree depth

  // Widest input variable the bound type can hold.
  localparam int unsigned MAX_VAR_BITS = 16;
  // Bound width: sign bit plus one extra bit to reach -1 and 2**MAX_VAR_BITS.
  localparam int unsigned CUT_W = MAX_VAR_BITS + 2;

  typedef logic [MAX_VAR_BITS-1:0] var_t;      // one input variable, zero-extended
  typedef logic signed [CUT_W-1:0] cut_t;      // one bound

  // The two bounds one decision path places on one variable: lo < x < hi.
  typedef struct packed {
    cut_t lo;
    cut_t hi;
  } bounds_t;

  // How the summed tree scores are turned into the output.
  typedef enum logic {
    BOOST_ADA  = 1'b0,   // AdaBoost: bin scores are pre-weighted, the sum is the output
    BOOST_GRAD = 1'b1    // GradBoost: a supplied constant is added to the sum
  } boost_e;

  // Most input variables a width list can describe.
  localparam int unsigned MAX_VARS = 64;

  // Sum of the first n entries of a list of variable widths (entry v = width of
  // variable v): the position of variable n on the flat input bus, or, for n = N_VAR,
  // the width of the bus. Shorter lists are zero-extended on the call.
  function automatic int unsigned bits_below(logic [MAX_VARS-1:0][7:0] widths, int unsigned n);
    int unsigned s = 0;
    for (int unsigned i = 0; i < n; i++) s += int'(widths[i]);
    return s;
  endfunction

  // Bound that leaves a variable unconstrained.
  function automatic cut_t cut_open_lo();
    return cut_t'(-1);
  endfunction

  function automatic cut_t cut_open_hi(int unsigned bits);
    return cut_t'(1 << bits);
  endfunction

endpackage

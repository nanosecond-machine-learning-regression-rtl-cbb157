// fwx_ohdp -- One Hot Decision Path: the logic of one terminal bin of one tree.
//
// A terminal bin of a decision tree is reached when every comparison on the way from the
// root comes out the right way. Collected per variable, those comparisons leave one
// interval lo < x_v < hi for each variable, so the bin is reached exactly when all V
// interval checks hold. The block makes the 2V strict comparisons in parallel and ANDs
// them into one bit; across the bins of a tree exactly one such bit is high (one-hot).
// Comparisons and the AND follow the published engine. A variable the path does not test
// is given the open bounds lo = -1, hi = 2**W (fwx_pkg), which this design chose.
//
// Only the low VAR_BITS[v] bits of each variable are compared, so a narrower variable
// costs narrower comparators. Purely combinational; the caller registers the result.
module fwx_ohdp
  import fwx_pkg::*;
#(
  parameter int unsigned N_VAR = N_VAR_DEF,
  parameter logic [N_VAR-1:0][7:0] VAR_BITS = {N_VAR{8'(VAR_BITS_DEF)}}
) (
  input  var_t    x_i      [N_VAR],
  input  bounds_t bounds_i [N_VAR],
  output logic    hit_o
);

  logic [N_VAR-1:0] above_lo, below_hi;

  for (genvar v = 0; v < N_VAR; v++) begin : g_var
    localparam int unsigned W = int'(VAR_BITS[v]);
    cut_t xs;
    // Zero-extend the variable's own bits into the signed bound domain.
    assign xs          = cut_t'({1'b0, x_i[v][W-1:0]});
    assign above_lo[v] = xs > bounds_i[v].lo;
    assign below_hi[v] = xs < bounds_i[v].hi;
  end

  assign hit_o = &{above_lo, below_hi};

endmodule

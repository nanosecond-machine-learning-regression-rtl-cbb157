// fwx_ddte -- Deep Decision Tree Engine: evaluates one decision tree in two cycles.
//
// A tree with B terminal bins is evaluated without walking it: the input vector is copied
// to B One Hot Decision Paths (fwx_ohdp), one per bin, which all decide in parallel
// whether the vector lies in their bin. Their one-hot result goes to the bin LUT
// (fwx_bin_lut), which returns the score of the active bin. Cost grows with the number of
// bins (at most 2**depth), not with the number of variables. The structure follows the
// published engine; the two register stages (after the decision paths, after the LUT) are
// this design's choice of pipelining.
//
// The tree is configured through bounds_i (per bin, per variable: lo < x < hi) and
// value_i (score per bin); tie them to constants for a fixed trained forest and synthesis
// folds them into the comparators. Bin slots a shallow tree does not use must be given an
// empty range (lo >= hi).
//
// Timing: x_i/valid_i to score_o/valid_o is 2 cycles, one new vector per cycle.
module fwx_ddte
  import fwx_pkg::*;
#(
  parameter int unsigned N_VAR    = N_VAR_DEF,
  parameter logic [N_VAR-1:0][7:0] VAR_BITS = {N_VAR{8'(VAR_BITS_DEF)}},
  parameter int unsigned N_BIN    = 2 ** MAX_DEPTH_DEF,
  parameter int unsigned OUT_BITS = OUT_BITS_DEF
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     valid_i,
  input  var_t                     x_i      [N_VAR],
  input  bounds_t                  bounds_i [N_BIN][N_VAR],
  input  logic signed [OUT_BITS:0] value_i  [N_BIN],
  output logic                     valid_o,
  output logic signed [OUT_BITS:0] score_o
);

  logic [N_BIN-1:0] hit, onehot_q;
  logic             valid_q;
  logic signed [OUT_BITS:0] score_d;

  for (genvar b = 0; b < N_BIN; b++) begin : g_path
    fwx_ohdp #(
      .N_VAR   (N_VAR),
      .VAR_BITS(VAR_BITS)
    ) u_ohdp (
      .x_i     (x_i),
      .bounds_i(bounds_i[b]),
      .hit_o   (hit[b])
    );
  end

  fwx_bin_lut #(
    .N_BIN   (N_BIN),
    .OUT_BITS(OUT_BITS)
  ) u_lut (
    .onehot_i(onehot_q),
    .value_i (value_i),
    .score_o (score_d)
  );

  always_ff @(posedge clk) begin
    onehot_q <= hit;
    score_o  <= score_d;
  end

  // The bins of a tree partition the input space: a valid vector lands in exactly one.
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      valid_q <= 1'b0;
      valid_o <= 1'b0;
    end else begin
      valid_q <= valid_i;
      valid_o <= valid_q;
      if (valid_q) begin
        a_one_bin : assert (onehot_q != '0 && (onehot_q & (onehot_q - 1'b1)) == '0)
          else $error("fwx_ddte: bins %b active, expected exactly one", onehot_q);
      end
    end
  end

endmodule

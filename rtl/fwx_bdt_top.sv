// fwx_bdt_top -- boosted-decision-tree regression engine with deep decision trees.
//
// Estimates one quantity (for example missing transverse energy) from N_VAR integer
// inputs with a boosted forest of N_TREE regression trees of depth up to MAX_DEPTH, at
// one input vector per clock. The data path is
//
//   x_i -> bus tap (register, split into variables of VAR_BITS[v] bits each)
//       -> N_TREE deep decision tree engines, each with N_BIN parallel decision paths
//          and a one-hot -> score LUT (2 cycles)
//       -> adder tree over the tree scores (ceil(log2 N_TREE / LEVELS_PER_STAGE) cycles)
//       -> score processor (AdaBoost: sum; GradBoost: sum + GRAD_CONST) -> score_o
//
// With the defaults (8 variables of 16 bits, 40 trees, depth 5, 3 adder levels per stage)
// the latency is 6 cycles and the interval 1 cycle, the figures published for this
// benchmark at 320 MHz. The blocks and their order follow the published engine; the
// register placement and the saturating output are this design's choices.
//
// The forest is configured through cfg_bounds_i (per tree, per bin, per variable:
// lo < x < hi, see fwx_pkg for the open/empty encodings) and cfg_value_i (per tree, per
// bin: integer score with the boost weight folded in). For a trained forest these are
// constants; they are ports so the same netlist serves any forest, and they may only
// change while no vector is in flight.
//
// Ports: valid_i/x_i (flat bus, variable 0 in the LSBs), valid_o/score_o (signed, OUT_BITS
// magnitude bits), sat_o (the output was limited to its range). Only valid bits are reset.
module fwx_bdt_top
  import fwx_pkg::*;
#(
  parameter int unsigned N_VAR            = N_VAR_DEF,
  parameter logic [N_VAR-1:0][7:0] VAR_BITS = {N_VAR{8'(VAR_BITS_DEF)}},
  parameter int unsigned OUT_BITS         = OUT_BITS_DEF,
  parameter int unsigned N_TREE           = N_TREE_DEF,
  parameter int unsigned MAX_DEPTH        = MAX_DEPTH_DEF,
  parameter int unsigned N_BIN            = 2 ** MAX_DEPTH,
  parameter boost_e      BOOST            = BOOST_ADA,
  parameter int          GRAD_CONST       = 0,
  parameter int unsigned LEVELS_PER_STAGE = 3,
  localparam int unsigned IN_W    = bits_below((MAX_VARS * 8)'(VAR_BITS), N_VAR),
  localparam int unsigned SCORE_W = OUT_BITS + 1,
  localparam int unsigned SUM_LEVELS = (N_TREE > 1) ? $clog2(N_TREE) : 1,
  localparam int unsigned SUM_W   = SCORE_W + SUM_LEVELS,
  localparam int unsigned LATENCY = 1 + 2 + (SUM_LEVELS + LEVELS_PER_STAGE - 1) / LEVELS_PER_STAGE + 1
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     valid_i,
  input  logic [IN_W-1:0]          x_i,
  input  bounds_t                  cfg_bounds_i [N_TREE][N_BIN][N_VAR],
  input  logic signed [OUT_BITS:0] cfg_value_i  [N_TREE][N_BIN],
  output logic                     valid_o,
  output logic signed [OUT_BITS:0] score_o,
  output logic                     sat_o
);

  initial assert (N_BIN <= 2 ** MAX_DEPTH)
    else $error("fwx_bdt_top: %0d bins cannot come from a tree of depth %0d", N_BIN, MAX_DEPTH);

  // Bus tap.
  logic x_valid;
  var_t x_var [N_VAR];

  fwx_bus_tap #(
    .N_VAR   (N_VAR),
    .VAR_BITS(VAR_BITS)
  ) u_bus_tap (
    .clk    (clk),
    .rst_n  (rst_n),
    .valid_i(valid_i),
    .x_i    (x_i),
    .valid_o(x_valid),
    .x_o    (x_var)
  );

  // One engine per tree.
  logic [N_TREE-1:0]        tree_valid;
  logic signed [OUT_BITS:0] tree_score [N_TREE];

  for (genvar t = 0; t < N_TREE; t++) begin : g_tree
    fwx_ddte #(
      .N_VAR   (N_VAR),
      .VAR_BITS(VAR_BITS),
      .N_BIN   (N_BIN),
      .OUT_BITS(OUT_BITS)
    ) u_ddte (
      .clk     (clk),
      .rst_n   (rst_n),
      .valid_i (x_valid),
      .x_i     (x_var),
      .bounds_i(cfg_bounds_i[t]),
      .value_i (cfg_value_i[t]),
      .valid_o (tree_valid[t]),
      .score_o (tree_score[t])
    );
  end

  // Forest sum.
  logic                    sum_valid;
  logic signed [SUM_W-1:0] sum;

  fwx_tree_sum #(
    .N_TREE          (N_TREE),
    .IN_W            (SCORE_W),
    .LEVELS_PER_STAGE(LEVELS_PER_STAGE)
  ) u_tree_sum (
    .clk    (clk),
    .rst_n  (rst_n),
    .valid_i(&tree_valid),
    .score_i(tree_score),
    .valid_o(sum_valid),
    .sum_o  (sum)
  );

  // Score processor.
  fwx_score_processor #(
    .IN_W      (SUM_W),
    .OUT_BITS  (OUT_BITS),
    .BOOST     (BOOST),
    .GRAD_CONST(GRAD_CONST)
  ) u_score (
    .clk    (clk),
    .rst_n  (rst_n),
    .valid_i(sum_valid),
    .sum_i  (sum),
    .valid_o(valid_o),
    .score_o(score_o),
    .sat_o  (sat_o)
  );

endmodule

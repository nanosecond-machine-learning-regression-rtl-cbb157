// fwx_tree_sum -- pipelined adder tree that sums the scores of all trees of the forest.
//
// Bin scores are pre-multiplied by their tree's boost weight and converted to integers by
// a mapping that respects addition, so the forest's estimate is the plain sum of the tree
// scores. The sum is formed by a balanced binary adder tree of ceil(log2 N_TREE) levels
// (inputs padded with zeros to a power of two); a register follows every
// LEVELS_PER_STAGE levels and the last level. The sum is wide enough never to overflow.
// Summation follows the published design; the adder-tree shape and the register
// placement are this design's choice.
//
// Timing: latency STAGES = ceil(LEVELS / LEVELS_PER_STAGE) cycles (2 for 40 trees with 3
// levels per stage), one new set of scores per cycle.
module fwx_tree_sum #(
  parameter int unsigned N_TREE           = 40,
  parameter int unsigned IN_W             = 17,
  parameter int unsigned LEVELS_PER_STAGE = 3,
  localparam int unsigned LEVELS = (N_TREE > 1) ? $clog2(N_TREE) : 1,
  localparam int unsigned SUM_W  = IN_W + LEVELS,
  localparam int unsigned STAGES = (LEVELS + LEVELS_PER_STAGE - 1) / LEVELS_PER_STAGE
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    valid_i,
  input  logic signed [IN_W-1:0]  score_i [N_TREE],
  output logic                    valid_o,
  output logic signed [SUM_W-1:0] sum_o
);

  localparam int unsigned LEAVES = 2 ** LEVELS;

  // Level 0: the tree scores, sign-extended, padded with zeros.
  for (genvar l = 0; l <= LEVELS; l++) begin : g_lvl
    // Packed, so each level is one register bank; two's-complement sums need no sign.
    logic [(LEAVES >> l)-1:0][SUM_W-1:0] node;
    if (l == 0) begin : g_leaf
      for (genvar i = 0; i < LEAVES; i++) begin : g_in
        if (i < N_TREE) begin : g_used
          assign node[i] = SUM_W'(score_i[i]);
        end else begin : g_pad
          assign node[i] = '0;
        end
      end
    end else begin : g_add
      localparam bit REG = (l % LEVELS_PER_STAGE == 0) || (l == LEVELS);
      for (genvar i = 0; i < (LEAVES >> l); i++) begin : g_node
        logic [SUM_W-1:0] s;
        assign s = g_lvl[l-1].node[2*i] + g_lvl[l-1].node[2*i+1];
        if (REG) begin : g_reg
          always_ff @(posedge clk) node[i] <= s;
        end else begin : g_comb
          assign node[i] = s;
        end
      end
    end
  end

  assign sum_o = g_lvl[LEVELS].node[0];

  logic [STAGES-1:0] valid_sr;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) valid_sr <= '0;
    else        valid_sr <= STAGES'({valid_sr, valid_i});
  end
  assign valid_o = valid_sr[STAGES-1];

endmodule

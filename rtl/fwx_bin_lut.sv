// fwx_bin_lut -- converts a tree's one-hot bin vector into the tree's score.
//
// Each tree's decision paths produce a one-hot vector with one bit per terminal bin. The
// LUT returns the score stored for the active bin. Because at most one input is high, the
// lookup is built as an AND-OR selector: each score is gated by its bin's bit and the gated
// scores are ORed. No bin active (only possible with an inconsistent configuration) gives
// 0. The published engine names this stage a look-up table from the active input array to
// the output array; the AND-OR form is the simplest circuit with that function.
//
// Scores are signed with OUT_BITS magnitude bits. Purely combinational.
module fwx_bin_lut #(
  parameter int unsigned N_BIN    = 32,
  parameter int unsigned OUT_BITS = 16
) (
  input  logic [N_BIN-1:0]        onehot_i,
  input  logic signed [OUT_BITS:0] value_i [N_BIN],
  output logic signed [OUT_BITS:0] score_o
);

  always_comb begin
    score_o = '0;
    for (int unsigned b = 0; b < N_BIN; b++) begin
      score_o |= value_i[b] & {(OUT_BITS+1){onehot_i[b]}};
    end
  end

endmodule

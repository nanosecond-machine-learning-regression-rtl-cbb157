// fwx_score_processor -- turns the summed tree scores into the regression output.
//
// For AdaBoost the bin scores already carry their tree's weight, so the sum passes
// unchanged. For GradBoost a supplied constant (the initial estimate of the boosting,
// GRAD_CONST, 0 unless given) is added to the sum. Both modes follow the published score
// processor. The result is then limited to the output range -(2**OUT_BITS - 1) ..
// 2**OUT_BITS - 1; sat_o flags a vector whose value had to be limited. The limiting is
// this design's choice: it keeps the output at OUT_BITS magnitude bits whatever the
// configuration, where an integer mapping of the target chosen as intended never needs it.
//
// Timing: one register, latency 1 cycle, one new value per cycle.
module fwx_score_processor
  import fwx_pkg::*;
#(
  parameter int unsigned IN_W       = 23,
  parameter int unsigned OUT_BITS   = OUT_BITS_DEF,
  parameter boost_e      BOOST      = BOOST_ADA,
  parameter int          GRAD_CONST = 0
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     valid_i,
  input  logic signed [IN_W-1:0]   sum_i,
  output logic                     valid_o,
  output logic signed [OUT_BITS:0] score_o,
  output logic                     sat_o
);

  // Wide enough for the sum, the 32-bit constant and the output range.
  localparam int unsigned EXT_W = ((IN_W > 32) ? IN_W : 32) + 2;
  localparam logic signed [EXT_W-1:0] OUT_MAX = EXT_W'((64'sd1 <<< OUT_BITS) - 64'sd1);
  localparam logic signed [EXT_W-1:0] OUT_MIN = -OUT_MAX;
  localparam logic signed [EXT_W-1:0] OFFSET  = (BOOST == BOOST_GRAD) ? EXT_W'(GRAD_CONST) : '0;

  logic signed [EXT_W-1:0] total;
  logic signed [OUT_BITS:0] limited;
  logic sat_d;

  always_comb begin
    total = EXT_W'(sum_i) + OFFSET;
    sat_d = 1'b1;
    if (total > OUT_MAX)      limited = (OUT_BITS+1)'(OUT_MAX);
    else if (total < OUT_MIN) limited = (OUT_BITS+1)'(OUT_MIN);
    else begin
      limited = (OUT_BITS+1)'(total);
      sat_d   = 1'b0;
    end
  end

  always_ff @(posedge clk) begin
    score_o <= limited;
    sat_o   <= sat_d;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) valid_o <= 1'b0;
    else        valid_o <= valid_i;
  end

endmodule

// tb_fwx_bdt_top -- end-to-end test of the BDT regression engine.
//
// Runs two engines side by side: the benchmark configuration at its defaults (8 x 16-bit
// inputs, 40 trees of depth 5, AdaBoost) and the bit-optimised configuration with 12-bit
// and 5-bit inputs, 12-bit output and the GradBoost constant, on a smaller forest. Each
// must stream back to back with the fixed latency, leave gaps, handle unpopulated bin
// slots, vectors on cut values and saturation; a mechanism that never happened counts as
// a failure.
module tb_fwx_bdt_top;
  import fwx_pkg::*;

  logic clk = 1'b0;
  always #5 clk = ~clk;

  logic done_a, done_b;
  int   checks_a, failures_a, stream_a, bubble_a, sat_a, edge_a, shallow_a, offset_a;
  int   checks_b, failures_b, stream_b, bubble_b, sat_b, edge_b, shallow_b, offset_b;
  int   checks, failures;

  tb_fwx_bdt_bench #(.N_VEC(300), .NAME("benchmark")) u_a (
    .clk, .done(done_a), .checks(checks_a), .failures(failures_a), .n_stream(stream_a),
    .n_bubble(bubble_a), .n_sat(sat_a), .n_edge(edge_a), .n_shallow(shallow_a),
    .n_offset(offset_a));

  tb_fwx_bdt_bench #(
    .VAR_BITS  ({8'd5, 8'd5, 8'd5, 8'd12, 8'd12, 8'd12, 8'd12, 8'd12}),
    .OUT_BITS  (12),
    .N_TREE    (12),
    .MAX_DEPTH (4),
    .BOOST     (BOOST_GRAD),
    .GRAD_CONST(-123),
    .N_VEC     (300),
    .NAME      ("bit_optimised_gradboost")
  ) u_b (
    .clk, .done(done_b), .checks(checks_b), .failures(failures_b), .n_stream(stream_b),
    .n_bubble(bubble_b), .n_sat(sat_b), .n_edge(edge_b), .n_shallow(shallow_b),
    .n_offset(offset_b));

  task automatic need(string what, int count);
    checks++;
    if (count == 0) begin
      failures++;
      $display("mechanism never exercised: %s", what);
    end
  endtask

  initial begin
    checks = 0;
    failures = 0;
    wait (done_a && done_b);
    need("back-to-back streaming (benchmark)", stream_a);
    need("input gaps (benchmark)", bubble_a);
    need("output saturation (benchmark)", sat_a);
    need("vectors on cut values (benchmark)", edge_a);
    need("unpopulated bin slots (benchmark)", shallow_a);
    need("back-to-back streaming (bit-optimised)", stream_b);
    need("output saturation (bit-optimised)", sat_b);
    need("vectors on cut values (bit-optimised)", edge_b);
    need("GradBoost constant (bit-optimised)", offset_b);
    checks += checks_a + checks_b;
    failures += failures_a + failures_b;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks + 1, failures + 1);
    $finish;
  end

endmodule

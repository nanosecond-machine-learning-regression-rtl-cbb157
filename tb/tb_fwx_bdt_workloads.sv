// tb_fwx_bdt_workloads -- the forest shapes and bit widths of the published scans.
//
// Runs the engine end to end on the other three tree/depth points of the benchmark
// table (40 trees of depth 6, 20 of depth 7, 10 of depth 8; 64, 128 and 256 bin slots
// per tree), on the bit-optimised setup (five 12-bit and three 5-bit inputs, 12-bit
// output) and on the narrowest point of the bit scan (2-bit inputs), each with a random
// forest and random vectors checked against a tree walk and the fixed latency.
module tb_fwx_bdt_workloads;
  import fwx_pkg::*;

  logic clk = 1'b0;
  always #5 clk = ~clk;

  localparam int N = 5;
  logic done [N];
  int checks_w [N], failures_w [N], stream_w [N], bubble_w [N], sat_w [N], edge_w [N],
      shallow_w [N], offset_w [N];
  int checks = 0, failures = 0;

  tb_fwx_bdt_bench #(.N_TREE(40), .MAX_DEPTH(6), .N_VEC(150), .NAME("trees40_depth6")) u0 (
    .clk, .done(done[0]), .checks(checks_w[0]), .failures(failures_w[0]), .n_stream(stream_w[0]),
    .n_bubble(bubble_w[0]), .n_sat(sat_w[0]), .n_edge(edge_w[0]), .n_shallow(shallow_w[0]),
    .n_offset(offset_w[0]));
  tb_fwx_bdt_bench #(.N_TREE(20), .MAX_DEPTH(7), .N_VEC(150), .NAME("trees20_depth7")) u1 (
    .clk, .done(done[1]), .checks(checks_w[1]), .failures(failures_w[1]), .n_stream(stream_w[1]),
    .n_bubble(bubble_w[1]), .n_sat(sat_w[1]), .n_edge(edge_w[1]), .n_shallow(shallow_w[1]),
    .n_offset(offset_w[1]));
  tb_fwx_bdt_bench #(.N_TREE(10), .MAX_DEPTH(8), .N_VEC(150), .NAME("trees10_depth8")) u2 (
    .clk, .done(done[2]), .checks(checks_w[2]), .failures(failures_w[2]), .n_stream(stream_w[2]),
    .n_bubble(bubble_w[2]), .n_sat(sat_w[2]), .n_edge(edge_w[2]), .n_shallow(shallow_w[2]),
    .n_offset(offset_w[2]));
  tb_fwx_bdt_bench #(
    .VAR_BITS({8'd5, 8'd5, 8'd5, 8'd12, 8'd12, 8'd12, 8'd12, 8'd12}), .OUT_BITS(12),
    .N_VEC(150), .NAME("bit_optimised_40_5")) u3 (
    .clk, .done(done[3]), .checks(checks_w[3]), .failures(failures_w[3]), .n_stream(stream_w[3]),
    .n_bubble(bubble_w[3]), .n_sat(sat_w[3]), .n_edge(edge_w[3]), .n_shallow(shallow_w[3]),
    .n_offset(offset_w[3]));
  tb_fwx_bdt_bench #(.VAR_BITS({8{8'd2}}), .N_VEC(150), .NAME("bits2_40_5")) u4 (
    .clk, .done(done[4]), .checks(checks_w[4]), .failures(failures_w[4]), .n_stream(stream_w[4]),
    .n_bubble(bubble_w[4]), .n_sat(sat_w[4]), .n_edge(edge_w[4]), .n_shallow(shallow_w[4]),
    .n_offset(offset_w[4]));

  initial begin
    for (int i = 0; i < N; i++) wait (done[i]);
    for (int i = 0; i < N; i++) begin
      checks += checks_w[i] + 2;
      failures += failures_w[i];
      if (stream_w[i] == 0) begin failures++; $display("workload %0d never streamed", i); end
      if (edge_w[i] == 0) begin failures++; $display("workload %0d never hit a cut value", i); end
    end
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

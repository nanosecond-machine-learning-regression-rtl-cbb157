// tb_fwx_score_processor -- checks the score processor in both boosting modes.
//
// Two instances (AdaBoost, and GradBoost with a constant of -1000) receive the same
// stream of random sums, many of them beyond the 16-bit output range in either
// direction. Each output is compared one cycle later with the sum (plus the constant in
// GradBoost mode) limited to +-(2**16 - 1), and the saturation flag with whether the
// limit was applied.
module tb_fwx_score_processor;
  import fwx_pkg::*;

  localparam int IN_W = 23;
  localparam int OUT_BITS = 16;
  localparam int GC = -1000;

  logic clk = 1'b0;
  always #5 clk = ~clk;

  logic rst_n, valid_i;
  logic signed [IN_W-1:0] sum_i;
  logic va, vg, sa, sg;
  logic signed [OUT_BITS:0] oa, og;
  int checks = 0, failures = 0, n_sat = 0;

  fwx_score_processor #(.IN_W(IN_W), .OUT_BITS(OUT_BITS), .BOOST(BOOST_ADA)) u_ada (
    .clk, .rst_n, .valid_i, .sum_i, .valid_o(va), .score_o(oa), .sat_o(sa));
  fwx_score_processor #(.IN_W(IN_W), .OUT_BITS(OUT_BITS), .BOOST(BOOST_GRAD),
                        .GRAD_CONST(GC)) u_grad (
    .clk, .rst_n, .valid_i, .sum_i, .valid_o(vg), .score_o(og), .sat_o(sg));

  function automatic longint lim(longint s, output bit sat);
    longint m = 65535;
    sat = 1'b1;
    if (s > m) return m;
    if (s < -m) return -m;
    sat = 1'b0;
    return s;
  endfunction

  task automatic check(string what, longint got, longint exp);
    checks++;
    if (got != exp) begin
      failures++;
      $display("%s: got %0d expected %0d", what, got, exp);
    end
  endtask

  initial begin
    longint s, ea, eg;
    bit sat_a, sat_g;
    rst_n = 1'b0; valid_i = 1'b0; sum_i = '0;
    repeat (2) @(negedge clk);
    check("valid in reset", longint'(va), 0);
    rst_n = 1'b1;
    for (int i = 0; i < 500; i++) begin
      case (i % 5)
        0: s = longint'($urandom_range(0, 200000)) - 100000;
        1: s = 65535 + longint'($urandom_range(0, 2000)) - 1000;
        2: s = -65535 + longint'($urandom_range(0, 2000)) - 1000;
        3: s = longint'($urandom_range(0, 4000000)) - 2000000;
        default: s = longint'($urandom_range(0, 2000)) - 1000;
      endcase
      valid_i = 1'b1;
      sum_i = IN_W'(s);
      @(negedge clk);
      ea = lim(s, sat_a);
      eg = lim(s + GC, sat_g);
      if (sat_a) n_sat++;
      check("ada valid", longint'(va), 1);
      check("ada score", longint'(oa), ea);
      check("ada sat", longint'(sa), longint'(sat_a));
      check("grad valid", longint'(vg), 1);
      check("grad score", longint'(og), eg);
      check("grad sat", longint'(sg), longint'(sat_g));
    end
    valid_i = 1'b0;
    @(negedge clk);
    check("valid after stream", longint'(va), 0);
    check("saturation seen", longint'(n_sat > 0), 1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (5000) @(posedge clk);
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks + 1, failures + 1);
    $finish;
  end
endmodule

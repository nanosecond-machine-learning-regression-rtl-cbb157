// tb_fwx_tree_sum -- checks the pipelined adder tree over the tree scores.
//
// Three instances: 40 trees (6 levels, 2 stages), 10 trees (4 levels, 2 stages) and 1
// tree. Random signed 17-bit scores, including all-maximum and all-minimum sets, are
// streamed back to back with random gaps; each sum must appear exactly STAGES cycles
// later and equal the sum computed here.
module tb_fwx_tree_sum;
  localparam int W = 17;

  logic clk = 1'b0;
  always #5 clk = ~clk;

  logic rst_n, valid_i;
  logic signed [W-1:0] s40 [40];
  logic signed [W-1:0] s10 [10];
  logic signed [W-1:0] s1  [1];
  logic v40, v10, v1;
  logic signed [W+5:0] o40;
  logic signed [W+3:0] o10;
  logic signed [W:0]   o1;
  int checks = 0, failures = 0, cyc = 0;

  fwx_tree_sum #(.N_TREE(40), .IN_W(W)) u40 (.clk, .rst_n, .valid_i, .score_i(s40), .valid_o(v40), .sum_o(o40));
  fwx_tree_sum #(.N_TREE(10), .IN_W(W)) u10 (.clk, .rst_n, .valid_i, .score_i(s10), .valid_o(v10), .sum_o(o10));
  fwx_tree_sum #(.N_TREE(1),  .IN_W(W)) u1  (.clk, .rst_n, .valid_i, .score_i(s1),  .valid_o(v1),  .sum_o(o1));

  longint e40 [$], e10 [$], e1 [$];
  int c40 [$], c10 [$], c1 [$];

  task automatic check(string what, longint got, longint exp);
    checks++;
    if (got != exp) begin
      failures++;
      if (failures < 10) $display("%s: got %0d expected %0d", what, got, exp);
    end
  endtask

  // Outputs, sampled on the falling edge; each must arrive after its stage count.
  always @(negedge clk) begin
    cyc <= cyc + 1;
    if (rst_n) begin
      if (v40) begin check("sum40", longint'(o40), e40.pop_front()); check("lat40", longint'(cyc - c40.pop_front()), 2); end
      if (v10) begin check("sum10", longint'(o10), e10.pop_front()); check("lat10", longint'(cyc - c10.pop_front()), 2); end
      if (v1)  begin check("sum1",  longint'(o1),  e1.pop_front());  check("lat1",  longint'(cyc - c1.pop_front()), 1); end
    end
  end

  initial begin
    rst_n = 1'b0; valid_i = 1'b0;
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    for (int i = 0; i < 1000; i++) begin
      longint a, b, c;
      int mode;
      @(negedge clk);
      valid_i = ($urandom_range(0, 4) != 0);
      mode = int'($urandom_range(0, 9));
      a = 0; b = 0; c = 0;
      for (int t = 0; t < 40; t++) begin
        automatic longint r = (mode == 0) ? 65535 : (mode == 1) ? -65536 :
                    longint'($urandom_range(0, 131071)) - 65536;
        s40[t] = W'(r); a += r;
        if (t < 10) begin s10[t] = W'(r); b += r; end
        if (t < 1)  begin s1[t]  = W'(r); c += r; end
      end
      if (valid_i) begin
        e40.push_back(a); e10.push_back(b); e1.push_back(c);
        c40.push_back(cyc); c10.push_back(cyc); c1.push_back(cyc);
      end
    end
    @(negedge clk);
    valid_i = 1'b0;
    repeat (4) @(negedge clk);
    check("all sums out", longint'(e40.size() + e10.size() + e1.size()), 0);
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

// tb_fwx_ddte -- checks one deep decision tree engine against a tree walk.
//
// Grows random trees of depth up to 5 over 8 variables of 16 bits, configures the
// engine's 32 bin slots with the flattened leaves (shallow trees leave slots empty),
// and streams random vectors, many on or just above a cut value. Every score must equal
// the leaf reached by walking the tree and appear exactly 2 cycles after its input.
// Twenty different trees are used, the last ones fully populated.
module tb_fwx_ddte;
  import fwx_pkg::*;
  import tb_fwx_forest_pkg::*;

  localparam int N_VAR = 8;
  localparam int N_BIN = 32;
  localparam int OUT_BITS = 16;

  logic clk = 1'b0;
  always #5 clk = ~clk;

  logic rst_n, valid_i, valid_o;
  var_t x [N_VAR];
  bounds_t bounds [N_BIN][N_VAR];
  logic signed [OUT_BITS:0] value [N_BIN];
  logic signed [OUT_BITS:0] score;
  int checks = 0, failures = 0, cyc = 0, n_edge = 0, n_shallow = 0, n_full = 0;
  longint exp_q [$];
  int cyc_q [$];

  fwx_ddte #(.N_VAR(N_VAR), .N_BIN(N_BIN), .OUT_BITS(OUT_BITS)) u_dut (
    .clk, .rst_n, .valid_i, .x_i(x), .bounds_i(bounds), .value_i(value),
    .valid_o, .score_o(score));

  task automatic check(string what, longint got, longint exp);
    checks++;
    if (got != exp) begin
      failures++;
      if (failures < 10) $display("%s: got %0d expected %0d", what, got, exp);
    end
  endtask

  always @(negedge clk) begin
    cyc <= cyc + 1;
    if (rst_n && valid_o) begin
      check("score", longint'(score), exp_q.pop_front());
      check("latency", longint'(cyc - cyc_q.pop_front()), 2);
    end
  end

  initial begin
    forest_model m;
    int vb[];
    int xv[];
    bit on_edge;
    vb = new[N_VAR];
    foreach (vb[v]) vb[v] = 16;
    m = new(N_VAR, 1, 5, N_BIN, vb);
    rst_n = 1'b0; valid_i = 1'b0;
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    for (int tree = 0; tree < 20; tree++) begin
      m.build((tree < 15) ? 35 : 0, -65535, 65535);
      if (m.bins_used[0] < N_BIN) n_shallow++; else n_full++;
      for (int b = 0; b < N_BIN; b++) begin
        value[b] = (OUT_BITS+1)'(m.cfg_val[b]);
        for (int v = 0; v < N_VAR; v++) begin
          bounds[b][v].lo = cut_t'(m.cfg_lo[b * N_VAR + v]);
          bounds[b][v].hi = cut_t'(m.cfg_hi[b * N_VAR + v]);
        end
      end
      for (int i = 0; i < 200; i++) begin
        @(negedge clk);
        valid_i = ($urandom_range(0, 5) != 0);
        m.random_x(xv, 50, on_edge);
        for (int v = 0; v < N_VAR; v++) x[v] = var_t'(xv[v]);
        if (valid_i) begin
          if (on_edge) n_edge++;
          exp_q.push_back(longint'(m.tree_score(0, xv)));
          cyc_q.push_back(cyc);
        end
      end
      @(negedge clk);
      valid_i = 1'b0;
      repeat (3) @(negedge clk);
    end
    check("all scores out", longint'(exp_q.size()), 0);
    check("shallow and full trees seen", longint'(n_shallow > 0 && n_full > 0), 1);
    check("cut values seen", longint'(n_edge > 0), 1);
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

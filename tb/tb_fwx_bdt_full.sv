// tb_fwx_bdt_full -- the engine at its default size through complete operation.
//
// The benchmark configuration exactly as the RTL defaults give it: 8 inputs of 16 bits,
// 40 trees of depth 5 (32 bin slots each, 1280 decision paths), AdaBoost, 16-bit output.
// A random forest is grown and flattened by the reference model, loaded, and 2000
// vectors are streamed back to back (with occasional gaps); every output is compared
// with the tree walk and must come 6 cycles after its input, one per cycle.
module tb_fwx_bdt_full;
  import fwx_pkg::*;
  import tb_fwx_forest_pkg::*;

  localparam int N_VAR = 8, N_TREE = 40, N_BIN = 32, OUT_BITS = 16, IN_W = 128, LATENCY = 6;

  logic clk = 1'b0;
  always #5 clk = ~clk;

  logic                     rst_n, valid_i, valid_o, sat_o;
  logic [IN_W-1:0]          x_i;
  bounds_t                  cfg_bounds [N_TREE][N_BIN][N_VAR];
  logic signed [OUT_BITS:0] cfg_value  [N_TREE][N_BIN];
  logic signed [OUT_BITS:0] score_o;

  fwx_bdt_top u_dut (
    .clk, .rst_n, .valid_i, .x_i, .cfg_bounds_i(cfg_bounds), .cfg_value_i(cfg_value),
    .valid_o, .score_o, .sat_o);

  int checks = 0, failures = 0, cyc = 0, last_out = -10, n_stream = 0;
  longint exp_q [$];
  int cyc_q [$];

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
      if (cyc == last_out + 1) n_stream++;
      last_out = cyc;
      check("score", longint'(score_o), exp_q.pop_front());
      check("latency", longint'(cyc - cyc_q.pop_front()), LATENCY);
    end
  end

  initial begin
    forest_model m;
    int vb[];
    int xv[];
    bit on_edge, sat;
    vb = new[N_VAR];
    foreach (vb[v]) vb[v] = 16;
    m = new(N_VAR, N_TREE, 5, N_BIN, vb);
    m.build(25, -800, 1600);
    for (int t = 0; t < N_TREE; t++)
      for (int b = 0; b < N_BIN; b++) begin
        cfg_value[t][b] = (OUT_BITS+1)'(m.cfg_val[t * N_BIN + b]);
        for (int v = 0; v < N_VAR; v++) begin
          cfg_bounds[t][b][v].lo = cut_t'(m.cfg_lo[(t * N_BIN + b) * N_VAR + v]);
          cfg_bounds[t][b][v].hi = cut_t'(m.cfg_hi[(t * N_BIN + b) * N_VAR + v]);
        end
      end
    rst_n = 1'b0; valid_i = 1'b0; x_i = '0;
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    for (int i = 0; i < 2000; i++) begin
      @(negedge clk);
      valid_i = ($urandom_range(0, 19) != 0);
      m.random_x(xv, 30, on_edge);
      x_i = IN_W'(m.pack_x(xv));
      if (valid_i) begin
        exp_q.push_back(forest_model::limit(m.forest_sum(xv), OUT_BITS, sat));
        cyc_q.push_back(cyc);
      end
    end
    @(negedge clk);
    valid_i = 1'b0;
    repeat (LATENCY + 2) @(negedge clk);
    check("all outputs out", longint'(exp_q.size()), 0);
    check("back-to-back outputs", longint'(n_stream > 1000), 1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (10000) @(posedge clk);
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks + 1, failures + 1);
    $finish;
  end
endmodule

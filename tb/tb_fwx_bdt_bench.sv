// tb_fwx_bdt_bench -- drives one fwx_bdt_top configuration end to end and checks it.
//
// Grows a random forest with the reference model, configures the engine with its
// flattened bins, streams random vectors (including vectors on and just above cut
// values) with random gaps, and compares every output with the sum obtained by walking
// the trees. Each output must appear exactly LATENCY cycles after its input. Two
// forests are run: one with scores small enough never to saturate, one with scores that
// drive the output past both ends of its range. The bench reports, besides checks and
// failures, how often each mechanism of the engine was exercised.
module tb_fwx_bdt_bench
  import fwx_pkg::*;
  import tb_fwx_forest_pkg::*;
#(
  parameter int unsigned N_VAR            = N_VAR_DEF,
  parameter logic [N_VAR-1:0][7:0] VAR_BITS = {N_VAR{8'(VAR_BITS_DEF)}},
  parameter int unsigned OUT_BITS         = OUT_BITS_DEF,
  parameter int unsigned N_TREE           = N_TREE_DEF,
  parameter int unsigned MAX_DEPTH        = MAX_DEPTH_DEF,
  parameter boost_e      BOOST            = BOOST_ADA,
  parameter int          GRAD_CONST       = 0,
  parameter int          N_VEC            = 400,
  parameter string       NAME             = "bench"
) (
  input  logic clk,
  output logic done,
  output int   checks,
  output int   failures,
  output int   n_stream,     // outputs on consecutive cycles (interval 1)
  output int   n_bubble,     // input cycles without a vector
  output int   n_sat,        // outputs limited to the range
  output int   n_edge,       // vectors on a cut value or one above
  output int   n_shallow,    // trees with unused bin slots
  output int   n_offset      // outputs that carried the GradBoost constant
);

  localparam int unsigned N_BIN = 2 ** MAX_DEPTH;

  localparam int unsigned IN_W = bits_below((MAX_VARS * 8)'(VAR_BITS), N_VAR);
  localparam int unsigned LATENCY =
      1 + 2 + (((N_TREE > 1) ? $clog2(N_TREE) : 1) + 2) / 3 + 1;

  logic                     rst_n;
  logic                     valid_i, valid_o, sat_o;
  logic [IN_W-1:0]          x_i;
  bounds_t                  cfg_bounds [N_TREE][N_BIN][N_VAR];
  logic signed [OUT_BITS:0] cfg_value  [N_TREE][N_BIN];
  logic signed [OUT_BITS:0] score_o;

  fwx_bdt_top #(
    .N_VAR     (N_VAR),
    .VAR_BITS  (VAR_BITS),
    .OUT_BITS  (OUT_BITS),
    .N_TREE    (N_TREE),
    .MAX_DEPTH (MAX_DEPTH),
    .BOOST     (BOOST),
    .GRAD_CONST(GRAD_CONST)
  ) u_dut (
    .clk         (clk),
    .rst_n       (rst_n),
    .valid_i     (valid_i),
    .x_i         (x_i),
    .cfg_bounds_i(cfg_bounds),
    .cfg_value_i (cfg_value),
    .valid_o     (valid_o),
    .score_o     (score_o),
    .sat_o       (sat_o)
  );

  typedef struct {
    longint value;
    bit     sat;
    int     cycle;
  } expect_t;

  expect_t     q[$];
  int          cycle = 0;
  int          last_out = -10;
  forest_model m;

  task automatic load_forest(int leaf_pct, int vmin, int vmax);
    m.build(leaf_pct, vmin, vmax);
    for (int t = 0; t < N_TREE; t++) begin
      if (m.bins_used[t] < N_BIN) n_shallow++;
      for (int b = 0; b < N_BIN; b++) begin
        cfg_value[t][b] = (OUT_BITS+1)'(m.cfg_val[t * N_BIN + b]);
        for (int v = 0; v < N_VAR; v++) begin
          cfg_bounds[t][b][v].lo = cut_t'(m.cfg_lo[(t * N_BIN + b) * N_VAR + v]);
          cfg_bounds[t][b][v].hi = cut_t'(m.cfg_hi[(t * N_BIN + b) * N_VAR + v]);
        end
      end
    end
  endtask

  // Output monitor, on the falling edge.
  always @(negedge clk) begin
    cycle <= cycle + 1;
    if (rst_n && valid_o) begin
      checks++;
      if (cycle == last_out + 1) n_stream++;
      last_out = cycle;
      if (q.size() == 0) begin
        failures++;
        $display("%s: output %0d without an input", NAME, score_o);
      end else begin
        expect_t e;
        e = q.pop_front();
        if (longint'(score_o) != e.value || sat_o != e.sat) begin
          failures++;
          if (failures < 10)
            $display("%s: cycle %0d got %0d sat %0b, expected %0d sat %0b", NAME, cycle,
                     score_o, sat_o, e.value, e.sat);
        end
        if (e.sat) n_sat++;
        if (BOOST == BOOST_GRAD && GRAD_CONST != 0) n_offset++;
        checks++;
        if (cycle - e.cycle != LATENCY) begin
          failures++;
          if (failures < 10)
            $display("%s: latency %0d, expected %0d", NAME, cycle - e.cycle, LATENCY);
        end
      end
    end
  end

  task automatic stream(int n);
    int x[];
    bit on_edge, sat;
    for (int i = 0; i < n; i++) begin
      @(negedge clk);
      if ($urandom_range(0, 99) < 15) begin
        valid_i = 1'b0;
        n_bubble++;
        i--;
        continue;
      end
      m.random_x(x, 30, on_edge);
      if (on_edge) n_edge++;
      valid_i = 1'b1;
      x_i = IN_W'(m.pack_x(x));
      begin
        expect_t e;
        longint s = m.forest_sum(x) + ((BOOST == BOOST_GRAD) ? longint'(GRAD_CONST) : 0);
        e.value = forest_model::limit(s, OUT_BITS, sat);
        e.sat = sat;
        e.cycle = cycle;
        q.push_back(e);
      end
    end
    @(negedge clk);
    valid_i = 1'b0;
    repeat (LATENCY + 2) @(negedge clk);
  endtask

  initial begin
    int vb[];
    int full;
    done = 1'b0;
    checks = 0; failures = 0;
    n_stream = 0; n_bubble = 0; n_sat = 0; n_edge = 0; n_shallow = 0; n_offset = 0;
    rst_n = 1'b0;
    valid_i = 1'b0;
    x_i = '0;
    vb = new[N_VAR];
    for (int v = 0; v < N_VAR; v++) vb[v] = int'(VAR_BITS[v]);
    m = new(N_VAR, N_TREE, MAX_DEPTH, N_BIN, vb);
    full = (1 << OUT_BITS) - 1;
    load_forest(30, -full / (4 * int'(N_TREE)), full / (2 * int'(N_TREE)));
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    stream(N_VEC);
    // Second forest: large scores, so the output saturates at both ends.
    load_forest(10, -full / 4, full / 4);
    stream(N_VEC);
    checks++;
    if (q.size() != 0) begin
      failures++;
      $display("%s: %0d outputs missing", NAME, q.size());
    end
    $display("%s: checks=%0d failures=%0d stream=%0d bubble=%0d sat=%0d edge=%0d shallow=%0d offset=%0d",
             NAME, checks, failures, n_stream, n_bubble, n_sat, n_edge, n_shallow, n_offset);
    done = 1'b1;
  end

endmodule

// tb_fwx_ohdp -- checks one decision path against an independent interval test.
//
// Uses the bit-optimised widths (five variables of 12 bits, three of 5 bits) so that
// the per-variable truncation is exercised. Random bounds, open bounds (-1, 2**W) and
// empty ranges are applied with random inputs and with inputs placed exactly on, and
// one step inside, each bound; the hit bit must equal the AND over all variables of
// lo < x < hi computed here in plain integers.
module tb_fwx_ohdp;
  import fwx_pkg::*;

  localparam int N_VAR = 8;
  localparam logic [N_VAR-1:0][7:0] VB = {8'd5, 8'd5, 8'd5, 8'd12, 8'd12, 8'd12, 8'd12, 8'd12};

  var_t    x      [N_VAR];
  bounds_t bounds [N_VAR];
  logic    hit;
  int checks = 0, failures = 0, n_hit = 0, n_miss = 0, n_edge = 0;

  fwx_ohdp #(.N_VAR(N_VAR), .VAR_BITS(VB)) u_dut (.x_i(x), .bounds_i(bounds), .hit_o(hit));

  initial begin
    int lo [N_VAR], hi [N_VAR], xv [N_VAR];
    for (int i = 0; i < 20000; i++) begin
      automatic bit exp_hit = 1'b1;
      automatic bit aim = ($urandom_range(0, 1) == 1);  // aim every variable inside its range
      for (int v = 0; v < N_VAR; v++) begin
        automatic int w = int'(VB[v]);
        automatic int top = 1 << w;
        automatic int a = int'($urandom_range(0, top - 1));
        automatic int b = int'($urandom_range(0, top - 1));
        case ($urandom_range(0, 9))
          0: begin lo[v] = -1; hi[v] = top; end                       // open
          1: if (!aim) begin lo[v] = top; hi[v] = 0; end             // empty
             else begin lo[v] = -1; hi[v] = top; end
          default: begin lo[v] = (a < b) ? a : b; hi[v] = (a < b) ? b : a; end
        endcase
        if (lo[v] < -1) lo[v] = -1;
        // Mostly values inside the range, so that full hits happen often.
        if (aim && hi[v] - lo[v] < 2) begin lo[v] = -1; hi[v] = top; end
        case (aim ? (($urandom_range(0, 15) == 0) ? 0 : 5) : $urandom_range(0, 5))
          0: begin xv[v] = lo[v]; n_edge++; end
          1: begin xv[v] = lo[v] + 1; n_edge++; end
          2: begin xv[v] = hi[v]; n_edge++; end
          3: begin xv[v] = hi[v] - 1; n_edge++; end
          4: xv[v] = int'($urandom_range(0, top - 1));
          default: xv[v] = (hi[v] - lo[v] > 1) ?
                           lo[v] + 1 + int'($urandom_range(0, hi[v] - lo[v] - 2)) : 0;
        endcase
        if (xv[v] < 0) xv[v] = 0;
        if (xv[v] >= top) xv[v] = top - 1;
        // Garbage above the variable's own width must be ignored.
        x[v] = var_t'(xv[v]) | (var_t'($urandom) << w);
        bounds[v].lo = cut_t'(lo[v]);
        bounds[v].hi = cut_t'(hi[v]);
        exp_hit &= (xv[v] > lo[v]) && (xv[v] < hi[v]);
      end
      #1;
      checks++;
      if (exp_hit) n_hit++; else n_miss++;
      if (hit !== exp_hit) begin
        failures++;
        if (failures < 10) begin
          $display("vector %0d: hit %0b expected %0b", i, hit, exp_hit);
          for (int v = 0; v < N_VAR; v++) $display("  v%0d x=%0d lo=%0d hi=%0d", v, xv[v], lo[v], hi[v]);
        end
      end
    end
    checks++;
    if (n_hit < 100 || n_miss < 100) begin
      failures++;
      $display("too few hits (%0d) or misses (%0d)", n_hit, n_miss);
    end
    $display("hits=%0d misses=%0d edge values=%0d", n_hit, n_miss, n_edge);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #100000;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks + 1, failures + 1);
    $finish;
  end
endmodule

// tb_fwx_bus_tap -- checks the input register and demultiplexer.
//
// Uses the bit-optimised widths (five 12-bit, three 5-bit variables; 75 bus bits).
// Random vectors are packed here, LSB first, and each output variable must equal the
// packed value, zero-extended, one cycle after it was presented. The valid bit must
// follow valid_i with the same delay and be 0 in reset.
module tb_fwx_bus_tap;
  import fwx_pkg::*;

  localparam int N_VAR = 8;
  localparam logic [N_VAR-1:0][7:0] VB = {8'd5, 8'd5, 8'd5, 8'd12, 8'd12, 8'd12, 8'd12, 8'd12};
  localparam int IN_W = 75;

  logic clk = 1'b0;
  always #5 clk = ~clk;

  logic rst_n, valid_i, valid_o;
  logic [IN_W-1:0] x_i;
  var_t x_o [N_VAR];
  int checks = 0, failures = 0;

  fwx_bus_tap #(.N_VAR(N_VAR), .VAR_BITS(VB)) u_dut (
    .clk, .rst_n, .valid_i, .x_i, .valid_o, .x_o);

  task automatic check(string what, longint got, longint exp);
    checks++;
    if (got != exp) begin
      failures++;
      if (failures < 10) $display("%s: got %0d expected %0d", what, got, exp);
    end
  endtask

  initial begin
    int xv [N_VAR];
    bit vin;
    rst_n = 1'b0; valid_i = 1'b1; x_i = '0;
    repeat (2) @(negedge clk);
    check("valid in reset", longint'(valid_o), 0);
    rst_n = 1'b1;
    for (int i = 0; i < 2000; i++) begin
      int pos;
      pos = 0;
      vin = ($urandom_range(0, 3) != 0);
      for (int v = 0; v < N_VAR; v++) begin
        xv[v] = int'($urandom_range(0, (1 << int'(VB[v])) - 1));
        for (int b = 0; b < int'(VB[v]); b++) x_i[pos + b] = xv[v][b];
        pos += int'(VB[v]);
      end
      valid_i = vin;
      @(negedge clk);
      check("valid", longint'(valid_o), longint'(vin));
      for (int v = 0; v < N_VAR; v++) check($sformatf("x%0d", v), longint'(x_o[v]), longint'(xv[v]));
    end
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

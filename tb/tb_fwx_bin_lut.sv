// tb_fwx_bin_lut -- checks the one-hot to score lookup.
//
// For 32 bins of random signed 16-bit scores, every single-hot input must return the
// score of its bin, and the all-zero input must return 0.
module tb_fwx_bin_lut;
  localparam int N_BIN = 32;
  localparam int OUT_BITS = 16;

  logic [N_BIN-1:0] onehot;
  logic signed [OUT_BITS:0] value [N_BIN];
  logic signed [OUT_BITS:0] score;
  int checks = 0, failures = 0;

  fwx_bin_lut #(.N_BIN(N_BIN), .OUT_BITS(OUT_BITS)) u_dut (
    .onehot_i(onehot), .value_i(value), .score_o(score));

  initial begin
    for (int round = 0; round < 50; round++) begin
      for (int b = 0; b < N_BIN; b++)
        value[b] = (OUT_BITS+1)'(int'($urandom_range(0, 131070)) - 65535);
      for (int b = 0; b < N_BIN; b++) begin
        onehot = N_BIN'(1) << b;
        #1;
        checks++;
        if (score != value[b]) begin
          failures++;
          if (failures < 10) $display("bin %0d: got %0d expected %0d", b, score, value[b]);
        end
      end
      onehot = '0;
      #1;
      checks++;
      if (score != 0) begin
        failures++;
        $display("no bin: got %0d expected 0", score);
      end
    end
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

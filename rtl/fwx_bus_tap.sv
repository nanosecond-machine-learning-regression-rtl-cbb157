// fwx_bus_tap -- input register and demultiplexer of the BDT engine.
//
// The input vector x arrives as one flat bus in which every variable has its own width
// (VAR_BITS[v], variable 0 in the least significant bits). The bus tap registers the bus
// once and splits it into an array of variables, each zero-extended to the common
// MAX_VAR_BITS so that all decision paths see the same shape whatever the bit budget.
// Giving each variable its own width is how the published design trades precision for
// logic; the register itself and the LSB-first packing are choices of this design. The
// published diagram shows a tap in every tree engine and a demultiplexer in every
// decision path; here one instance serves all trees and paths.
//
// Interface: valid_i / x_i in, valid_o / x_o out. Timing: one cycle of latency, a new
// vector may be presented every cycle. Only the valid bit is reset.
module fwx_bus_tap
  import fwx_pkg::*;
#(
  parameter int unsigned N_VAR = N_VAR_DEF,
  parameter logic [N_VAR-1:0][7:0] VAR_BITS = {N_VAR{8'(VAR_BITS_DEF)}},
  localparam int unsigned IN_W = bits_below((MAX_VARS * 8)'(VAR_BITS), N_VAR)
) (
  input  logic            clk,
  input  logic            rst_n,
  input  logic            valid_i,
  input  logic [IN_W-1:0] x_i,
  output logic            valid_o,
  output var_t            x_o [N_VAR]
);

  for (genvar v = 0; v < N_VAR; v++) begin : g_var
    localparam int unsigned LSB = bits_below((MAX_VARS * 8)'(VAR_BITS), v);
    localparam int unsigned W   = int'(VAR_BITS[v]);
    initial assert (W >= 1 && W <= MAX_VAR_BITS)
      else $error("fwx_bus_tap: variable %0d has %0d bits, allowed 1..%0d", v, W, MAX_VAR_BITS);

    always_ff @(posedge clk) begin
      x_o[v] <= var_t'(x_i[LSB +: W]);
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) valid_o <= 1'b0;
    else        valid_o <= valid_i;
  end

endmodule

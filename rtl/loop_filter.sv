`timescale 1ps/1fs
// loop_filter: digital filter of the CDR loop (accumulator and 1/N divider),
// on Clk_pi/4.
//
// Each valid phase detector result (once per 4 Clk_pi cycles) is added to a
// signed accumulator; the divider output, accumulator / N with N = 2**log2n
// (N = 1, 2, 4, ... 128), taken modulo 32, is the phase code of the
// interpolator. The accumulator is 5 + 7 bits wide and wraps, so the code
// wraps around the 32 interpolator phases for every N. A larger N makes the
// loop slower and quieter. The accumulate / divide structure and the range of
// N are the paper's; reading "divided by 1/N" as this shift and the wrapping
// accumulator are this design's choice. en low freezes the code.
module loop_filter
  import serdes_pkg::*;
(
  input  logic               clk,         // Clk_pi/4
  input  logic               rst_n,
  input  logic               en,
  input  logic signed [3:0]  pd_out,
  input  logic               pd_valid,
  input  logic [2:0]         log2n,
  output logic [PI_BITS-1:0] code
);
  localparam int unsigned ACC_W = PI_BITS + 7;
  logic [ACC_W-1:0] acc;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)               acc <= '0;
    else if (en && pd_valid)  acc <= acc + ACC_W'(pd_out);   // sign-extended
  end

  assign code = PI_BITS'(acc >> log2n);
endmodule

`timescale 1ps/1fs
// clk_divider: derives the divide-by-two and divide-by-four clocks of the link.
//
// The TX uses one on Clk_fll (giving Clk_fll/2 and Clk_fll/4) and the RX one on
// the recovered clock Clk_pi (giving Clk_pi/2 and Clk_pi/4). Both outputs are
// bits of a free-running two-bit counter, so their rising edges coincide with
// a rising edge of the input clock: clk_div2 rises every 2nd and clk_div4 every
// 4th input cycle, both with 50 % duty cycle. The divide ratios are the
// paper's; the rest is this design's choice. The counter has no reset on
// purpose: the divided clocks keep running while the system is in reset, so
// that the flip-flops of the divided domains see clock edges and are reset
// (their reset synchronizers need them too). No logic depends on the phase of
// the divided clocks. A four-state simulator needs the counter forced to a
// known value once at start-up.
module clk_divider (
  input  logic clk,
  output logic clk_div2,
  output logic clk_div4
);
  logic [1:0] cnt;

  always_ff @(posedge clk) cnt <= cnt + 2'd1;

  // cnt counts 0,1,2,3; bit 0 is clk/2, bit 1 is clk/4 (both registered).
  assign clk_div2 = cnt[0];
  assign clk_div4 = cnt[1];
endmodule

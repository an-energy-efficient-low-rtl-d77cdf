`timescale 1ps/1fs
// rx_comparator: behavioural model of a clocked analog comparator pair (not
// synthesizable logic; the real part is a sense-amplifier comparator).
//
// It resolves the sign of the differential input (in_p - in_n) on both edges of
// its clock: out[0] (the even bit) is taken on the rising edge and out[1] (the
// odd bit) on the falling edge, which restores the two bits of each DDR clock
// cycle. The RX has two of them: one clocked by Clk (data) and one by the
// quadrature clock Clkq (edge samples for the phase detector). When the two
// inputs are equal (undriven line in a two-state model) the output keeps its
// last decision. Outputs start at 0.
module rx_comparator (
  input  logic       clk,
  input  logic       in_p,
  input  logic       in_n,
  output logic [1:0] out
);
  logic even_q = 1'b0;
  logic odd_q  = 1'b0;

  always @(posedge clk) if (in_p != in_n) even_q <= in_p;
  always @(negedge clk) if (in_p != in_n) odd_q  <= in_p;

  assign out = {odd_q, even_q};
endmodule

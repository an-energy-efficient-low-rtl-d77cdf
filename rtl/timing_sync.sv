`timescale 1ps/1fs
// timing_sync: timing synchronizer between the comparators and the digital RX.
//
// On every rising edge of Clk_pi it registers the two data bits and the two
// edge bits from the comparators (data_raw / edge_raw; bit 0 is the earlier
// bit of the pair). It also delivers the payload stream realigned to the TX
// pair boundaries: with shift = 0 the pairs are passed as they are, with
// shift = 1 (the Start flit was caught one bit late, see seq_detector) each
// output pair is made of the later bit of one pair and the earlier bit of the
// next. Both cases have the same latency: the first payload pair after the
// Start flit appears on data_al in the cycle in which align is high (align is
// the detector's start pulse delayed by two cycles). That the synchronizer
// buffers the comparator outputs and applies the Shift signal is the paper's;
// the register stages are this design's choice.
module timing_sync (
  input  logic       clk,          // Clk_pi
  input  logic       rst_n,
  input  logic [1:0] data_in,      // data comparator: [0] rising-edge, [1] falling-edge bit
  input  logic [1:0] edge_in,      // edge comparator (Clkq)
  input  logic       shift,
  input  logic       start_pulse,
  output logic [1:0] data_raw,
  output logic [1:0] edge_raw,
  output logic [1:0] data_al,
  output logic       align
);
  logic [1:0] r2, r3, r4;
  logic       sp_d;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      data_raw <= '0;
      edge_raw <= '0;
      r2       <= '0;
      r3       <= '0;
      r4       <= '0;
      sp_d     <= 1'b0;
      align    <= 1'b0;
    end else begin
      data_raw <= data_in;
      edge_raw <= edge_in;
      r2       <= data_raw;
      r3       <= r2;
      r4       <= r3;
      sp_d     <= start_pulse;
      align    <= sp_d;
    end
  end

  assign data_al = shift ? {r3[0], r4[1]} : r3;
endmodule

`timescale 1ps/1fs
// serializer: 40:1 serializer with double-data-rate output.
//
// Every 20 Clk_fll cycles, while en (Enable_ser from the TX controller) is
// high, the 40-bit word_in is loaded into a shift register and load_tgl
// toggles to tell the controller that word_in may now change. Each Clk_fll
// cycle two bits leave: bit 0 while clk is high and bit 1 while clk is low, so
// the line runs at twice the clock rate (0.8 Gbit/s at 400 MHz). The final
// stage is the usual clock-selected 2:1 multiplexer. With en low the shift
// register is cleared and the line is held at 0.
//
// The word length, the DDR output and the 20-cycle update period are the
// paper's; the paper takes the circuit itself from earlier work, so this
// shift-register form is this design's choice. word_in crosses from the
// Clk_fll/4 domain; it is stable for 20 Clk_fll cycles after each load.
module serializer
  import serdes_pkg::*;
(
  input  logic              clk,        // Clk_fll
  input  logic              rst_n,
  input  logic              en,
  input  logic [LINE_W-1:0] word_in,
  output logic              load_tgl,
  output logic              ser_out
);
  logic [LINE_W-1:0] shreg;
  logic [4:0]        cnt;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      shreg    <= '0;
      cnt      <= '0;
      load_tgl <= 1'b0;
    end else if (!en) begin
      shreg    <= '0;
      cnt      <= '0;
    end else if (cnt == 5'd0) begin
      shreg    <= word_in;
      load_tgl <= ~load_tgl;
      cnt      <= 5'd1;
    end else begin
      shreg    <= shreg >> 2;
      cnt      <= (cnt == 5'(PAIRS - 1)) ? 5'd0 : cnt + 5'd1;
    end
  end

  // DDR output stage: even bit in the high phase, odd bit in the low phase.
  assign ser_out = clk ? shreg[0] : shreg[1];
endmodule

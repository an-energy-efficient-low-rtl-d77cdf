`timescale 1ps/1fs
// sync2: two-flop synchronizer for a quasi-static control bit (the Warm-En /
// Comm-En / CDR settings written over APB and read in a link clock domain).
// The output follows the input after two rising edges of clk; reset clears it.
module sync2 #(
  parameter int unsigned W = 1
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic [W-1:0] d,
  output logic [W-1:0] q
);
  logic [W-1:0] meta;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      meta <= '0;
      q    <= '0;
    end else begin
      meta <= d;
      q    <= meta;
    end
  end
endmodule

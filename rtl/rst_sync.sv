`timescale 1ps/1fs
// rst_sync: reset synchronizer. rst_n_o falls together with rst_n_i (the
// output is the input ANDed with the synchronizer flop, so assertion needs no
// clock) and rises two rising edges of clk after rst_n_i rises, so that each
// clock domain of the link leaves reset cleanly.
module rst_sync (
  input  logic clk,
  input  logic rst_n_i,
  output logic rst_n_o
);
  logic meta, q;

  always_ff @(posedge clk or negedge rst_n_i) begin
    if (!rst_n_i) begin
      meta <= 1'b0;
      q    <= 1'b0;
    end else begin
      meta <= 1'b1;
      q    <= meta;
    end
  end

  assign rst_n_o = rst_n_i & q;
endmodule

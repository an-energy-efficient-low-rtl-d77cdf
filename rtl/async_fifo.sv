`timescale 1ps/1fs
// async_fifo: dual-clock FIFO between the link and the uDMA.
//
// The TX uses one to carry 32-bit words from the uDMA (system clock) into the
// Clk_fll/4 domain of the TX controller; the RX uses one to carry decoded words
// from the Clk_pi/4 domain of the RX controller back to the uDMA. That the
// interface is an asynchronous FIFO follows the paper; its depth and the
// classic implementation below (binary pointers with one extra wrap bit,
// exchanged between the domains as Gray code through two-flop synchronizers)
// are this design's choice.
//
// Write side: wr_en writes wr_data when wr_full is low. wr_free counts the free
// entries as seen from the write side (it can only underestimate).
// Read side (first-word fall-through): rd_data shows the oldest entry while
// rd_empty is low; rd_en pops it. Both sides have their own active-low reset.
module async_fifo #(
  parameter int unsigned WIDTH = 32,
  parameter int unsigned DEPTH = 8      // power of two
) (
  input  logic                     wr_clk,
  input  logic                     wr_rst_n,
  input  logic                     wr_en,
  input  logic [WIDTH-1:0]         wr_data,
  output logic                     wr_full,
  output logic [$clog2(DEPTH):0]   wr_free,

  input  logic                     rd_clk,
  input  logic                     rd_rst_n,
  input  logic                     rd_en,
  output logic [WIDTH-1:0]         rd_data,
  output logic                     rd_empty
);
  localparam int unsigned AW = $clog2(DEPTH);

  logic [WIDTH-1:0] mem [DEPTH];

  logic [AW:0] wptr_bin, wptr_gray, rptr_bin, rptr_gray;
  logic [AW:0] wq1_rgray, wq2_rgray;   // read pointer seen by the write side
  logic [AW:0] rq1_wgray, rq2_wgray;   // write pointer seen by the read side
  logic [AW:0] rptr_in_w, wptr_in_r;

  function automatic logic [AW:0] bin2gray(input logic [AW:0] b);
    return b ^ (b >> 1);
  endfunction

  function automatic logic [AW:0] gray2bin(input logic [AW:0] g);
    logic [AW:0] b;
    b[AW] = g[AW];
    for (int i = int'(AW) - 1; i >= 0; i--) b[i] = b[i+1] ^ g[i];
    return b;
  endfunction

  // ---------------- write domain ----------------
  always_ff @(posedge wr_clk or negedge wr_rst_n) begin
    if (!wr_rst_n) begin
      wptr_bin  <= '0;
      wptr_gray <= '0;
      wq1_rgray <= '0;
      wq2_rgray <= '0;
    end else begin
      wq1_rgray <= rptr_gray;
      wq2_rgray <= wq1_rgray;
      if (wr_en && !wr_full) begin
        wptr_bin  <= wptr_bin + 1'b1;
        wptr_gray <= bin2gray(wptr_bin + 1'b1);
      end
    end
  end

  always_ff @(posedge wr_clk) begin
    if (wr_en && !wr_full) mem[wptr_bin[AW-1:0]] <= wr_data;
  end

  assign rptr_in_w = gray2bin(wq2_rgray);
  assign wr_free   = (AW+1)'(DEPTH) - (wptr_bin - rptr_in_w);
  assign wr_full   = (wptr_bin - rptr_in_w) == (AW+1)'(DEPTH);

  // ---------------- read domain ----------------
  always_ff @(posedge rd_clk or negedge rd_rst_n) begin
    if (!rd_rst_n) begin
      rptr_bin  <= '0;
      rptr_gray <= '0;
      rq1_wgray <= '0;
      rq2_wgray <= '0;
    end else begin
      rq1_wgray <= wptr_gray;
      rq2_wgray <= rq1_wgray;
      if (rd_en && !rd_empty) begin
        rptr_bin  <= rptr_bin + 1'b1;
        rptr_gray <= bin2gray(rptr_bin + 1'b1);
      end
    end
  end

  assign wptr_in_r = gray2bin(rq2_wgray);
  assign rd_empty  = (wptr_in_r == rptr_bin);
  assign rd_data   = mem[rptr_bin[AW-1:0]];

`ifndef SYNTHESIS
  // The pointers may never be more than DEPTH apart.
  a_no_overflow: assert property (@(posedge wr_clk) disable iff (!wr_rst_n)
                                  (wptr_bin - rptr_in_w) <= (AW+1)'(DEPTH));
`endif
endmodule

`timescale 1ps/1fs
// deserializer: 2:8 and 8:40 deserializer of the RX, on Clk_pi.
//
// CDR path: the raw data pairs and the raw edge pairs are collected four at a
// time into 8-bit groups (grp_data, grp_edge; bit 0 is the earliest bit), which
// are handed to the phase detector in the Clk_pi/4 domain with a toggle
// (grp_tgl). Data path: from the align pulse on (first payload pair on
// data_al) the realigned pairs are collected into 40-bit words (word, bit 0
// first on the wire); each complete word is published with a toggle of
// word_tgl and stays stable for the next 20 Clk_pi cycles, which is how the RX
// controller learns that "40bit data is ready". en low (the detector has left
// its Data state, e.g. on the Stop flit) drops the word being collected.
// The 2:8 / 8:40 ratios are the paper's. Running the whole deserializer on
// Clk_pi with a pair counter, rather than on Clk_pi/2 and Clk_pi/4, is this
// design's choice: it lets the word boundary follow the Start flit at single
// pair resolution.
module deserializer
  import serdes_pkg::*;
(
  input  logic              clk,          // Clk_pi
  input  logic              rst_n,
  input  logic [1:0]        data_raw,
  input  logic [1:0]        edge_raw,
  input  logic [1:0]        data_al,
  input  logic              align,
  input  logic              en,
  output logic [7:0]        grp_data,
  output logic [7:0]        grp_edge,
  output logic              grp_tgl,
  output logic [LINE_W-1:0] word,
  output logic              word_tgl
);
  logic [1:0]        gcnt;
  logic [5:0]        gd, ge;
  logic [LINE_W-3:0] w;
  logic [4:0]        pcnt;
  logic              active;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      gcnt     <= '0;
      gd       <= '0;
      ge       <= '0;
      grp_data <= '0;
      grp_edge <= '0;
      grp_tgl  <= 1'b0;
      w        <= '0;
      pcnt     <= '0;
      active   <= 1'b0;
      word     <= '0;
      word_tgl <= 1'b0;
    end else begin
      // 2:8 for the phase detector, free running
      gcnt <= gcnt + 2'd1;
      gd   <= {data_raw, gd[5:2]};
      ge   <= {edge_raw, ge[5:2]};
      if (gcnt == 2'd3) begin
        grp_data <= {data_raw, gd};
        grp_edge <= {edge_raw, ge};
        grp_tgl  <= ~grp_tgl;
      end

      // 2:40 for the payload
      if (!en) begin
        active <= 1'b0;
        pcnt   <= '0;
      end else if (align) begin
        active <= 1'b1;
        w      <= {data_al, w[LINE_W-3:2]};
        pcnt   <= 5'd1;
      end else if (active) begin
        w <= {data_al, w[LINE_W-3:2]};
        if (pcnt == 5'(PAIRS - 1)) begin
          word     <= {data_al, w};
          word_tgl <= ~word_tgl;
          pcnt     <= '0;
        end else begin
          pcnt <= pcnt + 5'd1;
        end
      end
    end
  end
endmodule

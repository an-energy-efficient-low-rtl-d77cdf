`timescale 1ps/1fs
// enc8b10b: one 8b/10b encoder lane (Widmer-Franaszek code), combinational.
//
// The byte HGF_EDCBA is split into a 5-bit part (EDCBA -> abcdei) and a 3-bit
// part (HGF -> fghj). Each part is taken from the running-disparity -1 column
// of the standard tables and complemented when the running disparity before
// that part is +1 and the sub-block is unbalanced (or is one of the special
// balanced codes D.07 / x.3). The alternate 3b/4b code A7 is used for D.x.7
// where the standard requires it (x = 17, 18, 20 at RD -1; x = 11, 13, 14 at RD
// +1) and for the K codes K23.7, K27.7, K29.7 and K30.7; K28.y uses its own
// 3b/4b table. The output code[9:0] is {a,b,c,d,e,i,f,g,h,j}: bit 9 ('a') is
// the one sent first. rd_in / rd_out are the running disparity (1 = +1).
module enc8b10b
  import serdes_pkg::*;
(
  input  logic [7:0] din,
  input  logic       k,
  input  logic       rd_in,
  output logic [9:0] code,
  output logic       rd_out
);
  logic [4:0] x;
  logic [2:0] y;
  logic [5:0] c6_neg, c6;
  logic [3:0] c4_neg, c4;
  logic       rd_mid;
  logic       k28, use_a7;
  logic       unbal6, unbal4;

  always_comb begin
    x   = din[4:0];
    y   = din[7:5];
    k28 = k && (x == 5'd28);

    c6_neg = k28 ? K28_6B : code6_neg(x);
    unbal6 = ($countones(c6_neg) != 3);
    // Unbalanced codes and D.07 are complemented when RD is +1.
    c6     = (rd_in && (unbal6 || (!k28 && x == 5'd7))) ? ~c6_neg : c6_neg;
    rd_mid = unbal6 ? ~rd_in : rd_in;

    use_a7 = (y == 3'd7) &&
             ((k && !k28) ||
              (!rd_mid && (x == 5'd17 || x == 5'd18 || x == 5'd20)) ||
              ( rd_mid && (x == 5'd11 || x == 5'd13 || x == 5'd14)));
    if (k28)         c4_neg = code4k_neg(y);
    else if (use_a7) c4_neg = A7_4B;
    else             c4_neg = code4_neg(y);
    unbal4 = ($countones(c4_neg) != 2);
    // Unbalanced codes, D/K.x.3 and all K28 codes are complemented at RD +1.
    c4     = (rd_mid && (unbal4 || k28 || y == 3'd3)) ? ~c4_neg : c4_neg;
    rd_out = unbal4 ? ~rd_mid : rd_mid;

    code = {c6, c4};
  end
endmodule

`timescale 1ps/1fs
// enc8b10b_x4: the four parallel 8b/10b encoders of the TX.
//
// A 32-bit word is split into bytes; byte 0 (din[7:0]) is lane 0 and is sent
// first. The running disparity ripples through the lanes in that order: lane 0
// starts from rd_in, lane 3's result is rd_out, which the caller stores for the
// next word. The 40-bit result is already in line order: line[0] is the first
// bit on the wire, and line[10*i +: 10] holds lane i as a,b,c,d,e,i,f,g,h,j
// from low to high bit. Combinational; the TX controller registers the result.
module enc8b10b_x4
  import serdes_pkg::*;
(
  input  logic [WORD_W-1:0]   din,
  input  logic [3:0]          k,
  input  logic                rd_in,
  output logic [LINE_W-1:0]   line,
  output logic                rd_out
);
  logic [4:0] rd;            // rd[i] is the disparity before lane i
  logic [9:0] code [4];

  assign rd[0] = rd_in;

  for (genvar i = 0; i < 4; i++) begin : g_lane
    enc8b10b u_enc (
      .din    (din[8*i +: 8]),
      .k      (k[i]),
      .rd_in  (rd[i]),
      .code   (code[i]),
      .rd_out (rd[i+1])
    );
    // code[i][9] is 'a', the first bit of the lane on the wire.
    for (genvar j = 0; j < 10; j++) begin : g_bit
      assign line[10*i + j] = code[i][9-j];
    end
  end

  assign rd_out = rd[4];
endmodule

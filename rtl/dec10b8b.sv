`timescale 1ps/1fs
// dec10b8b: one 10b/8b decoder lane, combinational.
//
// code[9:0] is {a,b,c,d,e,i,f,g,h,j}. The 6-bit part is looked up against both
// disparity columns of the 5b/6b table (and K.28), the 4-bit part against the
// 3b/4b data table, the alternate code A7 and, after K.28, the K28 table. The
// result is the byte HGF_EDCBA, k for a control code (K28.y, K23.7, K27.7,
// K29.7, K30.7) and code_err when either part is not a valid code group. The
// running disparity is not checked (this design's simplification).
module dec10b8b
  import serdes_pkg::*;
(
  input  logic [9:0] code,
  output logic [7:0] dout,
  output logic       k,
  output logic       code_err
);
  logic [5:0] c6;
  logic [3:0] c4;
  logic [4:0] x;
  logic [2:0] y;
  logic       hit6, hit4, k28, a7;
  logic [5:0] t6;
  logic [3:0] t4;

  always_comb begin
    c6   = code[9:4];
    c4   = code[3:0];
    x    = '0;
    y    = '0;
    hit6 = 1'b0;
    hit4 = 1'b0;
    a7   = 1'b0;
    t6   = '0;
    t4   = '0;
    k28  = (c6 == K28_6B) || (c6 == ~K28_6B);

    if (k28) begin
      x    = 5'd28;
      hit6 = 1'b1;
    end else begin
      for (int i = 0; i < 32; i++) begin
        t6 = code6_neg(5'(i));
        if (c6 == t6 || (c6 == ~t6 && ($countones(t6) != 3 || i == 7))) begin
          x    = 5'(i);
          hit6 = 1'b1;
        end
      end
    end

    for (int j = 0; j < 8; j++) begin
      // K28.y: after 001111 (RD -1 column) the 4-bit part is always the
      // complement of the table entry, after 110000 it is the entry itself.
      t4 = k28 ? code4k_neg(3'(j)) : code4_neg(3'(j));
      if (k28 ? (c4 == ((c6 == K28_6B) ? ~t4 : t4))
              : (c4 == t4 || (c4 == ~t4 && ($countones(t4) != 2 || j == 3)))) begin
        y    = 3'(j);
        hit4 = 1'b1;
      end
    end
    if (!k28 && (c4 == A7_4B || c4 == ~A7_4B)) begin
      y    = 3'd7;
      hit4 = 1'b1;
      a7   = 1'b1;
    end

    dout     = {y, x};
    k        = k28 || (a7 && (x == 5'd23 || x == 5'd27 || x == 5'd29 || x == 5'd30));
    code_err = !(hit6 && hit4);
  end
endmodule

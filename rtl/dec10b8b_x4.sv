`timescale 1ps/1fs
// dec10b8b_x4: the four parallel 10b/8b decoders of the RX.
//
// line is a 40-bit deserialized word in line order (line[0] arrived first);
// line[10*i +: 10] is lane i, which becomes byte i of the 32-bit result. The
// decode is combinational; the RX controller registers its output when a new
// 40-bit word is reported by the deserializer. k[i] and err[i] flag a control
// code or an invalid code group in lane i.
module dec10b8b_x4
  import serdes_pkg::*;
(
  input  logic [LINE_W-1:0] line,
  output logic [WORD_W-1:0] dout,
  output logic [3:0]        k,
  output logic [3:0]        err
);
  for (genvar i = 0; i < 4; i++) begin : g_lane
    logic [9:0] code;
    for (genvar j = 0; j < 10; j++) begin : g_bit
      assign code[9-j] = line[10*i + j];
    end
    dec10b8b u_dec (
      .code     (code),
      .dout     (dout[8*i +: 8]),
      .k        (k[i]),
      .code_err (err[i])
    );
  end
endmodule

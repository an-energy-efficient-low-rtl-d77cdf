`timescale 1ps/1fs
// tb_dec10b8b_x4: checks the four-lane 10b/8b decoder.
//
// Known code groups from the standard tables (both disparities) must decode to
// their byte and K flag. Every one of the 256 data bytes and the control codes
// K28.0-7, K23.7, K27.7, K29.7, K30.7 is then sent through the encoder in both
// disparities and must come back unchanged with no error. Finally 10-bit
// patterns that no valid code group can have (six or more equal bits, or a
// disparity of +-4 and more) must raise the error flag of their lane.
module tb_dec10b8b_x4;
  import serdes_pkg::*;
  logic [31:0] din, dout;
  logic [3:0]  kin, kout, err;
  logic        rd_in, rd_out;
  logic [39:0] line, enc_line;
  logic        use_enc;
  int checks = 0, failures = 0;

  enc8b10b_x4 u_enc (.din(din), .k(kin), .rd_in(rd_in), .line(enc_line), .rd_out(rd_out));
  dec10b8b_x4 dut (.line(use_enc ? enc_line : line), .dout(dout), .k(kout), .err(err));

  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  function automatic logic [39:0] put(input logic [9:0] g);   // g in abcdeifghj order, all lanes
    logic [39:0] l;
    for (int i = 0; i < 4; i++) for (int j = 0; j < 10; j++) l[10*i + j] = g[9-j];
    return l;
  endfunction

  task automatic known(input logic [9:0] g, input logic [7:0] b, input bit kk);
    use_enc = 0; line = put(g); #10;
    check(dout == {4{b}} && kout == {4{kk}} && err == 4'h0,
          $sformatf("code %b: got %h k=%b err=%b", g, dout, kout, err));
  endtask

  task automatic bad(input logic [9:0] g);
    use_enc = 0; line = put(g); #10;
    check(err == 4'hF, $sformatf("invalid code %b not flagged", g));
  endtask

  logic [7:0] kl[12] = '{8'h1C, 8'h3C, 8'h5C, 8'h7C, 8'h9C, 8'hBC, 8'hDC, 8'hFC,
                         8'hF7, 8'hFB, 8'hFD, 8'hFE};
  initial begin
    known(10'b1001110100, 8'h00, 0);
    known(10'b0110001011, 8'h00, 0);
    known(10'b1010101010, 8'hB5, 0);
    known(10'b0011111010, 8'hBC, 1);
    known(10'b1100000101, 8'hBC, 1);
    known(10'b1101101000, 8'hFB, 1);
    known(10'b1011101000, 8'hFD, 1);
    known(10'b1000110111, 8'hF1, 0);
    use_enc = 1;
    for (int r = 0; r < 2; r++) begin
      for (int b = 0; b < 256; b++) begin
        din = {4{8'(b)}}; kin = 4'h0; rd_in = r[0]; #10;
        check(dout == din && kout == 4'h0 && err == 4'h0, $sformatf("D byte %h rd %0d", b, r));
      end
      foreach (kl[i]) begin
        din = {4{kl[i]}}; kin = 4'hF; rd_in = r[0]; #10;
        check(dout == din && kout == 4'hF && err == 4'h0, $sformatf("K byte %h rd %0d", kl[i], r));
      end
    end
    bad(10'b0000000000);
    bad(10'b1111111111);
    bad(10'b1111110000);
    bad(10'b0000001111);
    bad(10'b1110111011);
    bad(10'b0001000100);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #10_000_000;
    failures++;
    $display("watchdog timeout");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

`timescale 1ps/1fs
// tb_enc8b10b_x4: checks the four-lane 8b/10b encoder.
//
// Part 1 compares lane 0 against code groups copied from the standard 8b/10b
// tables (written abcdei fghj, 'a' sent first) for both running disparities,
// with the other lanes held at the neutral D21.5. Part 2 encodes 2000 random
// words (with random K28.5 / K27.7 / K29.7 lanes) and checks, without any
// table, properties every valid 8b/10b stream has: each code group has
// disparity -2, 0 or +2, the sign of a non-zero disparity is opposite to the
// running disparity before it, rd_out follows from the ones count, and the
// line never holds more than five equal bits in a row.
module tb_enc8b10b_x4;
  import serdes_pkg::*;
  logic [31:0] din;
  logic [3:0]  k;
  logic        rd_in, rd_out;
  logic [39:0] line;
  int checks = 0, failures = 0;

  enc8b10b_x4 dut (.din(din), .k(k), .rd_in(rd_in), .line(line), .rd_out(rd_out));

  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  // group in transmission order, leftmost = first bit sent
  function automatic logic [9:0] lane(input int i);
    logic [9:0] g;
    for (int j = 0; j < 10; j++) g[9-j] = line[10*i + j];
    return g;
  endfunction

  task automatic vec(input logic [7:0] b, input bit kk, input bit rd,
                     input logic [9:0] exp, input bit exp_rd, input string name);
    din = {24'hB5B5B5, b}; k = {3'b000, kk}; rd_in = rd;
    #10;
    check(lane(0) == exp, $sformatf("%s rd%0d: got %b exp %b", name, rd, lane(0), exp));
    check(rd_out == exp_rd, $sformatf("%s rd%0d: rd_out %0d", name, rd, rd_out));
  endtask

  int run, rdv, last, ones, disp;
  initial begin
    //   byte   K  RD  abcdeifghj      RDout
    vec(8'h00, 0, 0, 10'b1001110100, 0, "D0.0");
    vec(8'h00, 0, 1, 10'b0110001011, 1, "D0.0");
    vec(8'hB5, 0, 0, 10'b1010101010, 0, "D21.5");
    vec(8'hB5, 0, 1, 10'b1010101010, 1, "D21.5");
    vec(8'h03, 0, 0, 10'b1100011011, 1, "D3.0");
    vec(8'h03, 0, 1, 10'b1100010100, 0, "D3.0");
    vec(8'hF1, 0, 0, 10'b1000110111, 1, "D17.7");
    vec(8'hF1, 0, 1, 10'b1000110001, 0, "D17.7");
    vec(8'hBC, 1, 0, 10'b0011111010, 1, "K28.5");
    vec(8'hBC, 1, 1, 10'b1100000101, 0, "K28.5");
    vec(8'hFB, 1, 0, 10'b1101101000, 0, "K27.7");
    vec(8'hFB, 1, 1, 10'b0010010111, 1, "K27.7");
    vec(8'hFD, 1, 0, 10'b1011101000, 0, "K29.7");
    vec(8'hFD, 1, 1, 10'b0100010111, 1, "K29.7");
    vec(8'h7F, 0, 0, 10'b1010110011, 1, "D31.3");
    vec(8'h7F, 0, 1, 10'b0101001100, 0, "D31.3");

    rdv = 0; run = 0; last = 2;
    for (int t = 0; t < 2000; t++) begin
      for (int i = 0; i < 4; i++) begin
        din[8*i +: 8] = 8'($urandom);
        k[i] = 1'b0;
        if ($urandom % 16 == 0) begin
          k[i] = 1'b1;
          case ($urandom % 3)
            0: din[8*i +: 8] = 8'hBC;
            1: din[8*i +: 8] = 8'hFB;
            default: din[8*i +: 8] = 8'hFD;
          endcase
        end
      end
      rd_in = rdv[0];
      #10;
      for (int i = 0; i < 4; i++) begin
        ones = $countones(lane(i));
        disp = 2 * ones - 10;
        check(disp == 0 || disp == 2 || disp == -2, $sformatf("lane %0d disparity %0d", i, disp));
        if (disp != 0) begin
          check((disp > 0) == (rdv == 0), $sformatf("lane %0d disparity sign", i));
          rdv = (disp > 0) ? 1 : 0;
        end
      end
      check(rd_out == rdv[0], "rd_out");
      for (int j = 0; j < 40; j++) begin
        if (int'(line[j]) == last) run++; else run = 1;
        last = int'(line[j]);
        if (run > 5) begin check(0, $sformatf("run length %0d", run)); run = 0; end
      end
    end
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

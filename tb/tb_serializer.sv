`timescale 1ps/1fs
// tb_serializer: checks the 40:1 double-data-rate serializer.
//
// Random 40-bit words are offered; each time load_tgl toggles the testbench
// presents the next word. The serial output is sampled in the middle of every
// Clk_fll half period and reassembled. The check is that bit 0 of each word is
// sent in the high phase right after the load edge, that the bits follow in
// order at two per Clk_fll cycle, and that loads are exactly 20 Clk_fll cycles
// (one 40-bit word at DDR) apart. With en low the output must stay 0.
module tb_serializer;
  import serdes_pkg::*;
  logic clk = 0, rst_n = 0, en = 0;
  logic [39:0] word_in;
  logic load_tgl, ser_out;
  int checks = 0, failures = 0;
  int cyc = 0;

  serializer dut (.clk(clk), .rst_n(rst_n), .en(en), .word_in(word_in), .load_tgl(load_tgl), .ser_out(ser_out));

  always #1250 clk = ~clk;
  always @(posedge clk) cyc++;

  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  initial begin
    logic [39:0] got, exp, cur;
    logic tgl_last;
    int t_last;
    word_in = {$urandom, 8'($urandom)};
    #5000 rst_n = 1;
    repeat (5) @(posedge clk);
    repeat (10) begin #625; check(ser_out == 0, "output not 0 while disabled"); #625; end
    @(negedge clk); en = 1;
    tgl_last = load_tgl;
    t_last = -1;
    for (int w = 0; w < 30; w++) begin
      // wait for the clock edge on which the serializer loads
      do begin @(posedge clk); cur = word_in; #1; end while (load_tgl == tgl_last);
      tgl_last = load_tgl;
      if (t_last >= 0) check(cyc - t_last == 20, $sformatf("load spacing %0d", cyc - t_last));
      t_last = cyc;
      exp = cur;
      word_in = {$urandom, 8'($urandom)};
      for (int p = 0; p < 20; p++) begin
        if (p > 0) @(posedge clk);
        #624  got[2*p]   = ser_out;
        #1250 got[2*p+1] = ser_out;
      end
      check(got == exp, $sformatf("word %0d got %h exp %h", w, got, exp));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #5_000_000;
    failures++;
    $display("watchdog timeout");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

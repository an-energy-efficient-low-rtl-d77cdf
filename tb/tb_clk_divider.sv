`timescale 1ps/1fs
// tb_clk_divider: checks the free-running /2 and /4 clock divider.
//
// The divider has no reset, so its counter starts anywhere. The testbench
// therefore checks relations, not absolute values: clk_div2 must invert on
// every rising input edge, clk_div4 must invert on every rising edge of
// clk_div2's complement (i.e. every second input edge), and over 400 input
// cycles each output must show exactly 1/2 and 1/4 as many rising edges.
module tb_clk_divider;
  logic clk = 1'b0;
  logic clk_div2, clk_div4;
  int checks = 0, failures = 0;

  clk_divider dut (.clk(clk), .clk_div2(clk_div2), .clk_div4(clk_div4));

  always #1250 clk = ~clk;

  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  int n2 = 0, n4 = 0;
  always @(posedge clk_div2) n2++;
  always @(posedge clk_div4) n4++;

  initial begin
    logic p2, p4;
    repeat (3) @(posedge clk);
    #1;
    n2 = 0; n4 = 0;
    for (int i = 0; i < 400; i++) begin
      p2 = clk_div2; p4 = clk_div4;
      @(posedge clk); #1;
      check(clk_div2 == !p2, "clk_div2 did not toggle");
      // clk_div4 toggles exactly when clk_div2 falls
      check(clk_div4 == (p4 ^ (p2 & !clk_div2)), "clk_div4 wrong toggle");
    end
    check(n2 == 200, $sformatf("clk_div2 rising edges %0d, expected 200", n2));
    check(n4 == 100, $sformatf("clk_div4 rising edges %0d, expected 100", n4));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #(2500 * 5000);
    failures++;
    $display("watchdog timeout");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

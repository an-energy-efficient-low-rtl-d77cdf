`timescale 1ps/1fs
// tb_rx_comparator: checks the behavioural clocked comparator pair.
//
// A random DDR bit stream is put on the differential input, changing in the
// middle of each clock half period. out[0] must equal the bit present at the
// rising clock edge and out[1] the bit at the falling edge. A stretch with
// in_p == in_n (no differential signal) must leave both outputs unchanged.
module tb_rx_comparator;
  logic clk = 0, in_p = 0, in_n = 1;
  logic [1:0] out;
  int checks = 0, failures = 0;

  rx_comparator dut (.clk(clk), .in_p(in_p), .in_n(in_n), .out(out));

  always #1250 clk = ~clk;

  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  initial begin
    logic b0, b1;
    @(negedge clk);
    for (int i = 0; i < 200; i++) begin
      // bit for the rising edge
      #625 b0 = 1'($urandom); in_p = b0; in_n = !b0;
      @(posedge clk); #1 check(out[0] == b0, "rising-edge sample");
      #624 b1 = 1'($urandom); in_p = b1; in_n = !b1;
      @(negedge clk); #1 check(out[1] == b1, "falling-edge sample");
      check(out[0] == b0, "rising-edge sample held");
    end
    b0 = out[0]; b1 = out[1];
    #100 in_p = !out[0]; in_n = !out[0];
    repeat (4) @(posedge clk);
    #1 check(out == {b1, b0}, "changed with no differential input");
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

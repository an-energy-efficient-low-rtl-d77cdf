`timescale 1ps/1fs
// tb_loop_filter: checks the accumulator and 1/N divider of the CDR.
//
// Random phase detector results (-7..+7) are fed with random pd_valid and en.
// A reference accumulator in the testbench, with the same 12-bit wrap, gives
// the expected code = (acc / N) mod 32 for every N = 1, 2, 4, ..., 128.
module tb_loop_filter;
  logic clk = 0, rst_n = 0, en = 0, pd_valid = 0;
  logic signed [3:0] pd_out = 0;
  logic [2:0] log2n = 0;
  logic [4:0] code;
  int checks = 0, failures = 0;
  logic [11:0] ref_acc;

  loop_filter dut (.clk(clk), .rst_n(rst_n), .en(en), .pd_out(pd_out), .pd_valid(pd_valid),
                   .log2n(log2n), .code(code));

  always #5000 clk = ~clk;

  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  initial begin
    ref_acc = 0;
    #12000 rst_n = 1;
    for (int i = 0; i < 4000; i++) begin
      @(negedge clk);
      check(code == 5'(ref_acc >> log2n), $sformatf("code %0d exp %0d (N=%0d)", code, 5'(ref_acc >> log2n), 1 << log2n));
      if (i % 500 == 0) log2n = 3'(i / 500);
      en = ($urandom % 8) != 0;
      pd_valid = $urandom % 2;
      // biased walk so the code sweeps and wraps
      pd_out = 4'($signed(int'($urandom % 15) - 7 + ((i / 250) % 2 ? 2 : -2)));
      if (pd_out == -8) pd_out = -7;
      if (en && pd_valid) ref_acc = ref_acc + 12'(pd_out);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #100_000_000;
    failures++;
    $display("watchdog timeout");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

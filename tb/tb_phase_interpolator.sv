`timescale 1ps/1fs
// tb_phase_interpolator: checks the behavioural phase interpolator model.
//
// With a 400 MHz reference, the output period must be 2500 ps and Clkq must
// follow Clk by a quarter period. For random codes the rising edges of Clk
// must sit at code * 2500/32 ps after the reference's rising edge (modulo the
// period): this covers single steps, large jumps and the wrap from 31 to 0.
module tb_phase_interpolator;
  localparam real T = 2500.0;
  logic clk_ref = 0;
  logic [4:0] code = 0;
  logic clk, clkq;
  int checks = 0, failures = 0;
  realtime t_ref, t_clk, t_q, t_prev;

  phase_interpolator #(.T_PS(T)) dut (.clk_ref(clk_ref), .code(code), .clk(clk), .clkq(clkq));

  always #1250 clk_ref = ~clk_ref;
  always @(posedge clk_ref) t_ref = $realtime;

  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  function automatic real phase_of(input realtime t);
    real p;
    p = t - t_ref;
    while (p < 0.0) p += T;
    while (p >= T - 0.5) p -= T;
    return p;
  endfunction

  initial begin
    real ph, expph, diff;
    logic [4:0] seq[$];
    seq = '{5'd0, 5'd1, 5'd2, 5'd3, 5'd31, 5'd0, 5'd30, 5'd1, 5'd16, 5'd15};
    repeat (40) seq.push_back(5'($urandom));
    repeat (4) @(posedge clk);
    @(posedge clk) t_prev = $realtime;
    @(posedge clk) check($realtime - t_prev > T - 0.5 && $realtime - t_prev < T + 0.5, "period");
    foreach (seq[i]) begin
      @(negedge clk) code = seq[i];
      repeat (3) @(posedge clk);
      t_clk = $realtime;
      ph = phase_of(t_clk);
      expph = (T / 32.0) * real'(code);
      diff = ph - expph;
      if (diff > T / 2) diff -= T;
      if (diff < -T / 2) diff += T;
      check(diff < 1.0 && diff > -1.0, $sformatf("code %0d: phase %0.1f exp %0.1f", code, ph, expph));
      @(posedge clkq) t_q = $realtime;
      check(t_q - t_clk > T / 4 - 0.5 && t_q - t_clk < T / 4 + 0.5, "clkq not a quarter period late");
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

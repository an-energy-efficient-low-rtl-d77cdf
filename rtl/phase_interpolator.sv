`timescale 1ps/1fs
// phase_interpolator: behavioural model of the charge-based phase
// interpolator of the CDR loop (an analog block, not synthesizable).
//
// It produces the recovered clock Clk_pi (clk) and its quadrature copy Clkq
// (clkq, a quarter period later) from the local FLL clock, shifted by
// code * 2*pi/32. The model is an oscillator of period T_PS that starts on the
// first rising edge of clk_ref; whenever code has moved since the last edge,
// the next half period is stretched or shortened by the signed distance
// (taken modulo 32, so the phase wraps smoothly from 31 to 0) times T_PS/32.
// A larger code therefore means a later clock. The 32-step resolution is the
// paper's; T_PS must equal the period of clk_ref.
module phase_interpolator #(
  parameter real T_PS = 2500.0       // 400 MHz
) (
  input  logic       clk_ref,
  input  logic [4:0] code,
  output logic       clk,
  output logic       clkq
);
  logic [4:0] applied;
  int         delta;

  // Signed shortest distance from applied to code, in steps (-16 .. 15).
  function automatic int step_delta(input logic [4:0] to, input logic [4:0] from);
    logic [4:0] d;
    d = to - from;
    return d[4] ? int'(d) - 32 : int'(d);
  endfunction

  initial begin
    clk     = 1'b0;
    applied = 5'd0;
    @(posedge clk_ref);
    applied = code;
    #((T_PS / 32.0) * real'(code));
    forever begin
      clk = ~clk;
      // the code change since the last edge moves the next edge
      delta   = step_delta(code, applied);
      applied = code;
      #(T_PS / 2.0 + (T_PS / 32.0) * real'(delta));
    end
  end

  initial clkq = 1'b0;
  always @(clk) clkq <= #(T_PS / 4.0) clk;
endmodule

`timescale 1ps/1fs
// tb_timing_sync: checks the timing synchronizer registers and bit realignment.
//
// A random bit stream is fed two bits per Clk_pi cycle (pair[0] the earlier
// bit). A history of the pairs gives the expected outputs: data_raw/edge_raw
// are the inputs one cycle late; with Shift = 0 data_al is the pair three
// cycles late; with Shift = 1 it is the pair that starts one bit earlier in
// the stream (the later bit of the four-cycle-old pair followed by the earlier
// bit of the three-cycle-old pair); align is the start pulse two cycles late.
module tb_timing_sync;
  logic clk = 0, rst_n = 0, shift = 0, start_pulse = 0;
  logic [1:0] data_in = 0, edge_in = 0, data_raw, edge_raw, data_al;
  logic align;
  int checks = 0, failures = 0;
  logic [1:0] hd[$], he[$];
  bit hs[$];

  timing_sync dut (.*);

  always #1250 clk = ~clk;

  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  initial begin
    logic [1:0] e;
    #6000 rst_n = 1;
    for (int i = 0; i < 600; i++) begin
      @(negedge clk);
      if (i % 100 == 50) shift = ~shift;
      data_in = 2'($urandom); edge_in = 2'($urandom); start_pulse = ($urandom % 10 == 0);
      hd.push_front(data_in); he.push_front(edge_in); hs.push_front(start_pulse);
      @(posedge clk); #1;
      if (i >= 5) begin
        check(data_raw == hd[0] && edge_raw == he[0], "raw registers");
        check(align == hs[1], "align");
        // pair history: index k holds bits 2k (hd[k][0]) and 2k+1 (hd[k][1]).
        // Shift 1 takes the pair that starts one bit later: {hd[2][0], hd[3][1]}
        e = shift ? {hd[2][0], hd[3][1]} : hd[2];
        check(data_al == e, $sformatf("data_al %b exp %b shift %0d", data_al, e, shift));
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #50_000_000;
    failures++;
    $display("watchdog timeout");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

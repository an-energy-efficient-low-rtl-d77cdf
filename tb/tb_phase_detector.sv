`timescale 1ps/1fs
// tb_phase_detector: checks the seven Alexander phase detectors and counter.
//
// Random 8-bit data and edge groups are presented, each with a toggle of
// grp_tgl. For every neighbouring bit pair with a transition the testbench
// calls the edge sample 'early' when it equals the earlier data bit and 'late'
// when it equals the later one; pd_out must equal #early - #late one cycle
// later and pd_valid must pulse once per group, only while en is high.
module tb_phase_detector;
  logic clk = 0, rst_n = 0, en = 0, grp_tgl = 0;
  logic [7:0] gd = 0, ge = 0;
  logic signed [3:0] pd_out;
  logic pd_valid;
  int checks = 0, failures = 0;

  phase_detector dut (.clk(clk), .rst_n(rst_n), .en(en), .grp_data(gd), .grp_edge(ge),
                      .grp_tgl(grp_tgl), .pd_out(pd_out), .pd_valid(pd_valid));

  always #5000 clk = ~clk;

  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  initial begin
    int e, l, nval;
    #12000 rst_n = 1;
    @(negedge clk);
    for (int i = 0; i < 300; i++) begin
      en = (i % 50) < 45;
      gd = 8'($urandom); ge = 8'($urandom);
      if (i % 7 == 0) ge = gd;                 // all early
      if (i % 7 == 1) ge = {gd[7], gd[7:1]};   // all late
      grp_tgl = ~grp_tgl;
      e = 0; l = 0;
      for (int b = 0; b < 7; b++)
        if (gd[b] != gd[b+1]) begin
          if (ge[b] == gd[b]) e++; else l++;
        end
      @(negedge clk);
      check(pd_valid == en, "pd_valid");
      check(int'(pd_out) == e - l, $sformatf("pd_out %0d exp %0d", pd_out, e - l));
      // no new group: no valid
      @(negedge clk);
      check(!pd_valid, "pd_valid without new group");
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

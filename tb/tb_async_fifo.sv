`timescale 1ps/1fs
// tb_async_fifo: random traffic through the dual-clock FIFO.
//
// The write clock (10 ns) and read clock (7.3 ns, then 23 ns) are unrelated.
// The writer pushes random words whenever the FIFO is not full and a coin toss
// allows it; the reader pops whenever data is shown and its own coin allows.
// A queue scoreboard checks every word comes out once and in order, that
// wr_free never exceeds DEPTH, that full is seen (slow reader phase) and that
// empty is seen (fast reader phase).
module tb_async_fifo;
  localparam int unsigned W = 32, D = 8;
  logic wclk = 0, rclk = 0, wrst_n = 0, rrst_n = 0;
  logic wr_en, rd_en, wr_full, rd_empty;
  logic [W-1:0] wr_data, rd_data;
  logic [$clog2(D):0] wr_free;
  int checks = 0, failures = 0;
  int rhalf = 3650;
  logic [W-1:0] sb[$];
  int n_full = 0, n_empty = 0, n_out = 0;
  bit wdone = 0;

  async_fifo #(.WIDTH(W), .DEPTH(D)) dut (
    .wr_clk(wclk), .wr_rst_n(wrst_n), .wr_en(wr_en), .wr_data(wr_data), .wr_full(wr_full), .wr_free(wr_free),
    .rd_clk(rclk), .rd_rst_n(rrst_n), .rd_en(rd_en), .rd_data(rd_data), .rd_empty(rd_empty));

  always #5000 wclk = ~wclk;
  always #(rhalf) rclk = ~rclk;

  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  // writer
  initial begin
    wr_en = 0; wr_data = 0;
    #30000 wrst_n = 1; rrst_n = 1;
    for (int i = 0; i < 600; i++) begin
      @(negedge wclk);
      wr_en = 0;
      if (i == 300) rhalf = 11500;       // slow reader: FIFO fills up
      if (!wr_full && ($urandom % 4 != 0)) begin
        wr_en = 1; wr_data = $urandom;
        sb.push_back(wr_data);
      end
      if (wr_full) n_full++;
      checks++; if (wr_free > D) begin failures++; $display("FAIL: wr_free %0d", wr_free); end
    end
    @(negedge wclk); wr_en = 0;
    wdone = 1;
  end

  // reader
  initial begin
    rd_en = 0;
    wait (rrst_n);
    forever begin
      @(negedge rclk);
      rd_en = 0;
      if (rd_empty) n_empty++;
      if (!rd_empty && ($urandom % 3 != 0)) begin
        rd_en = 1;
        if (sb.size() == 0) check(0, "read with empty scoreboard");
        else check(rd_data == sb.pop_front(), "data mismatch");
        n_out++;
      end
    end
  end

  initial begin
    wait (wdone);
    wait (sb.size() == 0);
    repeat (10) @(posedge rclk);
    check(rd_empty, "not empty at end");
    check(n_full > 0, "full never seen");
    check(n_empty > 0, "empty never seen");
    check(n_out > 300, $sformatf("only %0d words out", n_out));
    $display("words=%0d full_cycles=%0d empty_cycles=%0d", n_out, n_full, n_empty);
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

`timescale 1ps/1fs
// tb_deserializer: checks the 2:8 sample groups and the 40-bit word assembly.
//
// Random data and edge pairs are fed every Clk_pi cycle. Every fourth cycle a
// new 8-bit group of data samples and of edge samples must appear (grp_tgl
// toggles), holding the last four pairs with the oldest in the low bits. For
// the payload path, an align pulse starts a frame of random 40-bit words
// given as realigned pairs; each word must come out whole, exactly 20 cycles
// after the previous one, until en falls. A second align restarts the count.
module tb_deserializer;
  import serdes_pkg::*;
  logic clk = 0, rst_n = 0, en = 0, align = 0;
  logic [1:0] data_raw = 0, edge_raw = 0, data_al = 0;
  logic [7:0] grp_data, grp_edge;
  logic grp_tgl, word_tgl;
  logic [39:0] word;
  int checks = 0, failures = 0;

  deserializer dut (.*);

  always #1250 clk = ~clk;

  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  logic [1:0] hd[$], he[$];
  int n_grp = 0, last_grp = -1, cyc = 0;
  logic tgl_q = 0, wtgl_q = 0;
  logic [39:0] exp_words[$];
  int n_words = 0, last_word = -1;

  always @(posedge clk) if (rst_n) begin
    cyc++;
    #1;
    if (grp_tgl != tgl_q) begin
      tgl_q = grp_tgl;
      n_grp++;
      check(grp_data == {hd[0], hd[1], hd[2], hd[3]} && grp_edge == {he[0], he[1], he[2], he[3]}, "group contents");
      if (last_grp >= 0) check(cyc - last_grp == 4, "group spacing");
      last_grp = cyc;
    end
    if (word_tgl != wtgl_q) begin
      wtgl_q = word_tgl;
      n_words++;
      if (exp_words.size() == 0) check(0, "unexpected word");
      else check(word == exp_words.pop_front(), "word contents");
      if (last_word >= 0) check(cyc - last_word == 20, $sformatf("word spacing %0d", cyc - last_word));
      last_word = cyc;
    end
  end

  task automatic frame(input int nw);
    logic [39:0] w;
    last_word = -1;
    for (int i = 0; i < nw; i++) begin
      w = {$urandom, 8'($urandom)};
      exp_words.push_back(w);
      for (int p = 0; p < 20; p++) begin
        @(negedge clk);
        align = (i == 0 && p == 0);
        data_al = w[2*p +: 2];
      end
    end
    @(negedge clk); align = 0;
  endtask

  // raw samples change every cycle, independently of the payload path
  always @(negedge clk) begin
    data_raw = 2'($urandom); edge_raw = 2'($urandom);
    hd.push_front(data_raw); he.push_front(edge_raw);
  end

  initial begin
    #6000 rst_n = 1;
    en = 1;
    frame(5);
    repeat (3) @(negedge clk);
    en = 0;
    repeat (30) @(negedge clk);
    en = 1;
    frame(7);
    @(negedge clk); en = 0;
    repeat (30) @(negedge clk);
    check(exp_words.size() == 0, $sformatf("%0d words missing", exp_words.size()));
    check(n_words == 12, $sformatf("%0d words", n_words));
    check(n_grp > 60, "too few groups");
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

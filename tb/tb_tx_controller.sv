`timescale 1ps/1fs
// tb_tx_controller: checks the TX mode FSM and the flit multiplexer.
//
// The serializer is modelled by a load slot every 5 Clk_fll/4 cycles (one
// 40-bit word per 20 Clk_fll cycles); at each slot the testbench records what
// the controller offers (word_out, en_ser). A queue stands in for the TX FIFO
// and the real 8b/10b encoder is used. Recorded slots are classified as
// training word (1010...), Start flit, Stop flit, flush word, disabled or data
// (decoded with the 10b/8b decoder). The checks: warm-up sends only training
// words; a transfer is Start, the queued words in order with no gap, Stop,
// one flush slot, then the serializer is disabled (back to warm-up at once
// while an enable is still set); the FIFO running dry in the
// middle of a burst ends the transfer with a Stop flit; every data word
// decodes without error and the running disparity stays consistent.
module tb_tx_controller;
  import serdes_pkg::*;
  logic clk = 0, rst_n = 0;
  logic warm_en = 0, comm_en = 0;
  logic fifo_empty, fifo_rd_en, enc_train, enc_rd, enc_rd_out, load_tgl = 0, en_ser;
  logic [31:0] fifo_rdata;
  logic [39:0] enc_line, word_out;
  tx_state_e state;
  int checks = 0, failures = 0;

  logic [31:0] q[$];
  logic [31:0] pushed[$];
  logic [40:0] slots[$];   // {en_ser, word}

  enc8b10b_x4 u_enc (.din(enc_train ? {4{TRAIN_BYTE}} : fifo_rdata), .k(4'h0), .rd_in(enc_rd),
                     .line(enc_line), .rd_out(enc_rd_out));
  tx_controller dut (.clk(clk), .rst_n(rst_n), .warm_en(warm_en), .comm_en(comm_en),
                     .fifo_empty(fifo_empty), .fifo_rd_en(fifo_rd_en), .enc_train(enc_train),
                     .enc_rd(enc_rd), .enc_line(enc_line), .enc_rd_out(enc_rd_out),
                     .load_tgl(load_tgl), .en_ser(en_ser), .word_out(word_out), .state(state));

  logic [31:0] dec_out; logic [3:0] dec_k, dec_err;
  logic [39:0] dec_in;
  dec10b8b_x4 u_dec (.line(dec_in), .dout(dec_out), .k(dec_k), .err(dec_err));

  always #5000 clk = ~clk;

  assign fifo_empty = (q.size() == 0);
  assign fifo_rdata = (q.size() == 0) ? 32'd0 : q[0];

  // serializer model
  int ph = 0;
  always @(posedge clk) if (rst_n) begin
    if (ph == 4) begin
      ph = 0;
      slots.push_back({en_ser, word_out});
      load_tgl <= ~load_tgl;
    end else ph = ph + 1;
  end
  // FIFO pops happen between clock edges
  logic pop;
  always @(posedge clk) pop <= fifo_rd_en;
  always @(negedge clk) if (pop) begin void'(q.pop_front()); pop = 0; end

  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  task automatic push(input int n);
    for (int i = 0; i < n; i++) begin
      logic [31:0] w;
      w = $urandom;
      q.push_back(w); pushed.push_back(w);
    end
  endtask

  task automatic slots_wait(input int n);
    repeat (5 * n) @(negedge clk);
  endtask

  initial begin
    int n_start = 0, n_stop = 0, n_data = 0, n_train = 0, rdv = 0;
    string st;
    #12000 rst_n = 1;
    slots_wait(3);
    // warm-up only
    warm_en = 1; slots_wait(8);
    // one burst from a full queue
    push(12); comm_en = 1;
    wait (state == TX_FLUSH); @(negedge clk);
    // FIFO running dry: words arrive one by one, slower than the line
    for (int i = 0; i < 4; i++) begin
      push(1); slots_wait(4);
    end
    wait (q.size() == 0); slots_wait(6);
    comm_en = 0; slots_wait(4);
    warm_en = 0; slots_wait(6);
    check(state == TX_IDLE && !en_ser, "not idle after enables dropped");

    // walk the recorded slots
    st = "off";
    foreach (slots[i]) begin
      logic [39:0] w;
      bit en;
      w = slots[i][39:0];
      en = slots[i][40];
      if (!en) begin
        check(st == "off" || st == "flush" || st == "train", $sformatf("slot %0d: disabled after %s", i, st));
        st = "off";
      end else if (w == 40'h5555555555) begin
        check(st == "off" || st == "train" || st == "flush", $sformatf("slot %0d: training after %s", i, st));
        st = "train"; n_train++;
      end else if (w == START_FLIT) begin
        check(st == "train", $sformatf("slot %0d: Start after %s", i, st));
        st = "start"; n_start++;
      end else if (w == STOP_FLIT) begin
        check(st == "start" || st == "data", $sformatf("slot %0d: Stop after %s", i, st));
        st = "stop"; n_stop++;
      end else if (w == 40'd0) begin
        check(st == "stop", $sformatf("slot %0d: flush after %s", i, st));
        st = "flush";
      end else begin
        dec_in = w; #1;
        check(st == "start" || st == "data", $sformatf("slot %0d: data after %s", i, st));
        check(dec_err == 0 && dec_k == 0, $sformatf("slot %0d: data word does not decode", i));
        for (int l = 0; l < 4; l++) begin
          int d;
          d = 2 * $countones(w[10*l +: 10]) - 10;
          if (d != 0) begin check((d > 0) == (rdv == 0), "running disparity"); rdv = (d > 0); end
        end
        if (pushed.size() == 0) check(0, "more data than pushed");
        else check(dec_out == pushed.pop_front(), $sformatf("slot %0d: data word out of order", i));
        st = "data"; n_data++;
      end
    end
    check(pushed.size() == 0, $sformatf("%0d words never sent", pushed.size()));
    check(n_data == 16, $sformatf("data words %0d", n_data));
    check(n_start >= 3 && n_start == n_stop, $sformatf("start %0d stop %0d", n_start, n_stop));
    check(n_train >= 8, "warm-up too short");
    $display("slots=%0d train=%0d start=%0d data=%0d stop=%0d", slots.size(), n_train, n_start, n_data, n_stop);
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

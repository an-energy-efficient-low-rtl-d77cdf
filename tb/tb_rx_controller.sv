`timescale 1ps/1fs
// tb_rx_controller: checks the RX mode FSM, word capture and FIFO write side.
//
// The testbench plays the deserializer (a word_tgl toggle with a new 40-bit
// word every 5 Clk_pi/4 cycles while in_data is high) and uses the real
// encoder and decoder around the controller. Checks: the mode follows
// idle -> warm-up (an enable set) -> data-comm (in_data) -> warm-up (Stop flit,
// enable still set) -> idle (enables cleared); cdr_en and det_en follow the
// mode and Comm-En; every decoded word is written once, in order, while the
// FIFO has room; with the FIFO held full the words that cannot be written are
// counted as overflows and the newest word is written once room appears;
// corrupted code groups are counted as errors (such words are still written,
// so a transfer keeps its word count).
module tb_rx_controller;
  import serdes_pkg::*;
  logic clk = 0, rst_n = 0, warm_en = 0, comm_en = 0, in_data = 0, word_tgl = 0, fifo_full = 0;
  logic [39:0] word = 0, dec_in;
  logic [31:0] dec_out, fifo_wdata;
  logic [3:0] dec_err, dec_k;
  logic fifo_wr, cdr_en, det_en;
  rx_state_e state;
  logic [7:0] overflow_cnt, err_cnt;
  int checks = 0, failures = 0;

  rx_controller dut (.*);
  dec10b8b_x4 u_dec (.line(dec_in), .dout(dec_out), .k(dec_k), .err(dec_err));
  logic [31:0] din; logic rd = 0, rd_out; logic [39:0] enc_line;
  enc8b10b_x4 u_enc (.din(din), .k(4'h0), .rd_in(rd), .line(enc_line), .rd_out(rd_out));

  always #5000 clk = ~clk;

  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  logic [31:0] exp_q[$];
  bit          any_q[$];   // 1: word was corrupted, its value is not checked
  int n_wr = 0;
  always @(posedge clk) if (rst_n && fifo_wr) begin
    n_wr++;
    if (exp_q.size() == 0) check(0, $sformatf("unexpected FIFO write %h at %0t", fifo_wdata, $time));
    else begin
      logic [31:0] e;
      bit a;
      e = exp_q.pop_front(); a = any_q.pop_front();
      check(a || fifo_wdata == e, $sformatf("FIFO data %h exp %h", fifo_wdata, e));
    end
  end

  task automatic frame(input int nw, input int n_bad, input bit expect_write);
    @(negedge clk); in_data = 1;
    for (int i = 0; i < nw; i++) begin
      repeat (5) @(negedge clk);
      din = $urandom; #1;
      word = enc_line; rd = rd_out;
      if (i < n_bad) word[9:0] = 10'b1111100000;
      if (expect_write || i == nw - 1) begin exp_q.push_back(din); any_q.push_back(i < n_bad); end
      word_tgl = ~word_tgl;
    end
    repeat (5) @(negedge clk);
    in_data = 0;
    repeat (3) @(negedge clk);
  endtask

  initial begin
    int ov0;
    #12000 rst_n = 1;
    repeat (3) @(negedge clk);
    check(state == RX_IDLE && !cdr_en && !det_en, "not idle after reset");
    warm_en = 1; repeat (2) @(negedge clk);
    check(state == RX_WARM && cdr_en && !det_en, "warm-up: cdr on, detector off");
    comm_en = 1; @(negedge clk);
    check(det_en, "det_en with Comm-En");
    @(negedge clk) in_data = 1; repeat (3) @(negedge clk);
    check(state == RX_DATA, "data-comm on in_data");
    in_data = 0; repeat (3) @(negedge clk);
    check(state == RX_WARM, "back to warm-up after Stop flit");
    frame(10, 0, 1);
    repeat (4) @(negedge clk);
    check(exp_q.size() == 0 && n_wr == 10, $sformatf("writes %0d", n_wr));
    // FIFO full: nothing written, overflows counted
    fifo_full = 1; ov0 = overflow_cnt;
    frame(6, 0, 0);
    check(n_wr == 10, "write while full");
    check(exp_q.size() == 1, "held word");
    check(int'(overflow_cnt) - ov0 == 5, $sformatf("overflow count %0d", int'(overflow_cnt) - ov0));
    @(negedge clk) fifo_full = 0;     // the held word goes out now
    repeat (2) @(negedge clk);
    check(n_wr == 11 && exp_q.size() == 0, "held word written when FIFO has room");
    // bad code groups
    frame(6, 2, 1);
    repeat (4) @(negedge clk);
    check(err_cnt == 2, $sformatf("error count %0d", err_cnt));
    warm_en = 0; comm_en = 0; repeat (3) @(negedge clk);
    check(state == RX_IDLE && !cdr_en, "idle after enables cleared");
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

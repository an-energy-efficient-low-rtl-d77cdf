`timescale 1ps/1fs
// tb_seq_detector: checks Start / Stop flit detection and the Shift decision.
//
// The detector is driven through the timing synchronizer, as in the receiver.
// A line stream is built as the transmitter sends it: training words
// (1010...), a Start flit, random 8b/10b-encoded payload words, a Stop flit and
// training again, bit 0 of each word first. The stream is cut into bit pairs
// with a random offset of 0 or 1 bit, which is what the receiver sees when the
// recovered clock lands on either half of a pair. For every frame the checks
// are: exactly one start pulse and one stop pulse; Shift equals the offset;
// in_data is high from the start pulse to the stop pulse; and the realigned
// pairs taken from the align marker on give back exactly the payload words,
// which proves that the chosen Shift puts the word boundary in the right place.
// Comm-En low must keep the detector in Start.
module tb_seq_detector;
  import serdes_pkg::*;
  logic clk = 0, rst_n = 0, en = 0;
  logic [1:0] pair = 0, data_raw, edge_raw, data_al;
  logic shift, start_pulse, stop_pulse, in_data, align;
  sd_state_e state;
  int checks = 0, failures = 0;

  timing_sync u_ts (.clk(clk), .rst_n(rst_n), .data_in(pair), .edge_in(2'b00), .shift(shift),
                    .start_pulse(start_pulse), .data_raw(data_raw), .edge_raw(edge_raw),
                    .data_al(data_al), .align(align));
  seq_detector dut (.clk(clk), .rst_n(rst_n), .en(en), .pair(data_raw), .data_al(data_al),
                    .align(align), .shift(shift), .start_pulse(start_pulse), .stop_pulse(stop_pulse),
                    .in_data(in_data), .state(state));

  logic [31:0] din; logic rd_in = 0, rd_out; logic [39:0] enc_line;
  enc8b10b_x4 u_enc (.din(din), .k(4'h0), .rd_in(rd_in), .line(enc_line), .rd_out(rd_out));

  always #1250 clk = ~clk;

  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  bit stream[$];
  task automatic add_word(input logic [39:0] w);
    for (int i = 0; i < 40; i++) stream.push_back(w[i]);
  endtask

  int n_start, n_stop, n_data_cyc, n_frames_shift[2];
  logic [39:0] got[$];
  logic [39:0] cur; int pc; bit collecting;
  always @(posedge clk) if (rst_n) begin
    if (start_pulse) n_start++;
    if (stop_pulse) n_stop++;
    if (in_data) n_data_cyc++;
    if (align) begin collecting = 1; pc = 0; end
    if (collecting) begin
      cur = {data_al, cur[39:2]};
      pc++;
      if (pc == 20) begin got.push_back(cur); pc = 0; end
    end
    if (stop_pulse) collecting = 0;
  end

  initial begin
    logic [39:0] words[$];
    int off, nw;
    #6000 rst_n = 1;
    // Comm-En low: nothing detected
    stream.delete();
    repeat (2) add_word(40'h5555555555);
    add_word(START_FLIT); add_word(40'h5555555555);
    for (int i = 0; i < stream.size() / 2; i++) begin @(negedge clk); pair = {stream[2*i+1], stream[2*i]}; end
    repeat (4) @(negedge clk);
    check(n_start == 0 && state == SD_START, "detected with Comm-En low");
    en = 1;
    for (int f = 0; f < 24; f++) begin
      off = (f < 2) ? f : int'($urandom % 2);
      nw = 1 + int'($urandom % 6);
      stream.delete(); words.delete(); got.delete();
      n_start = 0; n_stop = 0; n_data_cyc = 0; collecting = 0;
      if (off) stream.push_back(1'b0);
      repeat (3 + $urandom % 3) add_word(40'h5555555555);
      add_word(START_FLIT);
      for (int i = 0; i < nw; i++) begin
        din = $urandom; #1; add_word(enc_line); words.push_back(enc_line); rd_in = rd_out;
      end
      add_word(STOP_FLIT);
      repeat (3) add_word(40'h5555555555);
      if (stream.size() % 2) stream.push_back(1'b1);
      for (int i = 0; i < stream.size() / 2; i++) begin
        @(negedge clk); pair = {stream[2*i+1], stream[2*i]};
        if (start_pulse) check(shift == off[0], $sformatf("frame %0d: Shift %0d, offset %0d", f, shift, off));
      end
      check(n_start == 1, $sformatf("frame %0d: %0d start pulses", f, n_start));
      check(n_stop == 1, $sformatf("frame %0d: %0d stop pulses", f, n_stop));
      check(!in_data, "in_data still high after Stop flit");
      check(n_data_cyc >= 20 * nw + 4 && n_data_cyc <= 20 * nw + 8,
            $sformatf("frame %0d: in_data for %0d cycles", f, n_data_cyc));
      check(got.size() >= nw, $sformatf("frame %0d: %0d words realigned", f, got.size()));
      for (int i = 0; i < nw && i < got.size(); i++)
        check(got[i] == words[i], $sformatf("frame %0d word %0d: %h exp %h", f, i, got[i], words[i]));
      n_frames_shift[off]++;
    end
    check(n_frames_shift[0] > 0 && n_frames_shift[1] > 0, "both Shift values not exercised");
    $display("frames shift0=%0d shift1=%0d", n_frames_shift[0], n_frames_shift[1]);
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

`timescale 1ps/1fs
// tb_serdes_workload: the two transfer workloads of the link, chip 0 -> chip 1.
//
// 1. Maximum bandwidth: a 16 KB RX buffer (4096 words, RX_SIZE = 16384) is
//    filled by one uninterrupted transfer. The uDMA models always have data
//    and always drain, so the link must carry the whole buffer with one Start
//    and one Stop flit, at one 32-bit word per 20 Clk_fll cycles: 0.8 Gbit/s
//    on the line, 0.64 Gbit/s of payload, 204.8 us for the buffer.
// 2. Duty-cycled: four bursts of 256 words, one every 128 us, each with its
//    own idle -> warm-up -> data-comm -> idle cycle. The average payload rate
//    over the four periods must be 256 * 32 bit / 128 us = 64 Mbit/s (a tenth
//    of the maximum), and each burst must finish inside its period.
// Every received word is compared with the sent sequence. All parameters of
// the design are at their defaults.
module tb_serdes_workload;
  import serdes_pkg::*;

  localparam real T_FLL   = 2500.0;
  localparam int  BUF_BYTES = 16384;           // RX buffer in L2
  localparam int  NWORDS    = BUF_BYTES / 4;   // 4096 words
  localparam int  DC_WORDS  = 256;             // words per duty-cycled burst
  localparam int  DC_BURSTS = 4;
  localparam real DC_PERIOD = 128_000_000.0;   // ps, one burst every 128 us

  int checks = 0, failures = 0;

  // ---------------- clocks ----------------
  logic [1:0] sys_clk = '0, clk_fll = '0;
  logic       rst_n = 1'b1;
  initial forever #5000 sys_clk[0] = ~sys_clk[0];
  initial begin #1300; forever #6000 sys_clk[1] = ~sys_clk[1]; end
  initial forever #(T_FLL/2) clk_fll[0] = ~clk_fll[0];
  initial begin #(837.0); forever #(T_FLL/2) clk_fll[1] = ~clk_fll[1]; end

  // ---------------- DUT signals ----------------
  logic [11:0] paddr   [2];
  logic [1:0]  psel = '0, penable = '0, pwrite = '0;
  logic [31:0] pwdata  [2];
  logic [31:0] prdata  [2];
  logic [1:0]  pready, pslverr;
  logic [1:0]  tx_req, tx_gnt, tx_valid;
  logic [31:0] tx_data [2];
  logic [31:0] rx_data [2];
  logic [1:0]  rx_valid, rx_ready;
  logic [31:0] c_tx_addr[2], c_tx_size[2], c_rx_addr[2], c_rx_size[2];
  logic [1:0]  tx_ser, tx_drv_en;
  logic [1:0]  rx_p = '0;
  logic [1:0]  rx_n;
  assign rx_n = ~rx_p;

  // channel delays (chip 0 -> chip 1, chip 1 -> chip 0)
  real d01 = 900.0, d10 = 1700.0;
  // transport delay: every transition is kept, however long the delay
  always @(tx_ser[0]) fork
    automatic logic v = tx_ser[0];
    begin #(d01) rx_p[1] = v; end
  join_none
  always @(tx_ser[1]) fork
    automatic logic v = tx_ser[1];
    begin #(d10) rx_p[0] = v; end
  join_none

  for (genvar c = 0; c < 2; c++) begin : g_chip
    serdes_top u_dut (
      .sys_clk(sys_clk[c]), .rst_n(rst_n), .clk_fll(clk_fll[c]),
      .apb_paddr(paddr[c]), .apb_psel(psel[c]), .apb_penable(penable[c]),
      .apb_pwrite(pwrite[c]), .apb_pwdata(pwdata[c]), .apb_prdata(prdata[c]),
      .apb_pready(pready[c]), .apb_pslverr(pslverr[c]),
      .udma_tx_req(tx_req[c]), .udma_tx_gnt(tx_gnt[c]), .udma_tx_data(tx_data[c]),
      .udma_tx_valid(tx_valid[c]),
      .udma_rx_data(rx_data[c]), .udma_rx_valid(rx_valid[c]), .udma_rx_ready(rx_ready[c]),
      .cfg_tx_addr(c_tx_addr[c]), .cfg_tx_size(c_tx_size[c]),
      .cfg_rx_addr(c_rx_addr[c]), .cfg_rx_size(c_rx_size[c]),
      .tx_ser(tx_ser[c]), .tx_drv_en(tx_drv_en[c]), .rx_p(rx_p[c]), .rx_n(rx_n[c])
    );
  end

  // ---------------- uDMA models ----------------
  function automatic logic [31:0] word_of(input int chip, input int idx);
    logic [31:0] x;
    x = 32'(idx) * 32'h9E37_79B9 + 32'(chip) * 32'h7F4A_7C15 + 32'h1234_5678;
    x = x ^ (x >> 15);
    return x * 32'h2C1B_3C6D;
  endfunction

  int  granted [2] = '{0, 0};
  int  quota   [2] = '{0, 0};      // words the uDMA may still hand out
  int  received[2] = '{0, 0};
  bit  drain_slow = 0;
  bit  running    = 0;       // uDMA models active (set after reset)
  longint t_first[2], t_last[2];

  for (genvar c = 0; c < 2; c++) begin : g_udma
    assign tx_gnt[c] = tx_req[c] && (granted[c] < quota[c]);
    always @(posedge sys_clk[c]) begin
      tx_valid[c] <= tx_gnt[c];
      if (tx_gnt[c]) begin
        tx_data[c] <= word_of(c, granted[c]);
        granted[c] <= granted[c] + 1;
      end
      rx_ready[c] <= !running ? 1'b0 : drain_slow ? ($urandom_range(1) == 0) : 1'b1;
      if (running && rx_valid[c] && rx_ready[c]) begin
        checks++;
        if (rx_data[c] !== word_of(1 - c, received[c])) begin
          failures++;
          $display("FAIL chip %0d word %0d: got %08h expected %08h", c, received[c],
                   rx_data[c], word_of(1 - c, received[c]));
        end
        if (received[c] == 0) t_first[c] = $time;
        t_last[c] = $time;
        received[c] <= received[c] + 1;
      end
    end
  end

  // ---------------- APB ----------------
  task automatic apb_write(input int c, input logic [11:0] a, input logic [31:0] d);
    @(posedge sys_clk[c]);
    paddr[c] <= a; pwdata[c] <= d; pwrite[c] <= 1'b1; psel[c] <= 1'b1; penable[c] <= 1'b0;
    @(posedge sys_clk[c]);
    penable[c] <= 1'b1;
    @(posedge sys_clk[c]);
    psel[c] <= 1'b0; penable[c] <= 1'b0; pwrite[c] <= 1'b0;
  endtask

  task automatic apb_read(input int c, input logic [11:0] a, output logic [31:0] d);
    @(posedge sys_clk[c]);
    paddr[c] <= a; pwrite[c] <= 1'b0; psel[c] <= 1'b1; penable[c] <= 1'b0;
    @(posedge sys_clk[c]);
    penable[c] <= 1'b1;
    @(posedge sys_clk[c]);
    d = prdata[c];
    psel[c] <= 1'b0; penable[c] <= 1'b0;
  endtask


  function automatic void check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL %s", what);
    end
  endfunction

  int n_start = 0, n_stop = 0;
  tx_state_e tprev = TX_IDLE;
  always @(posedge clk_fll[0]) begin
    if (running && g_chip[0].u_dut.u_tx.state != tprev) begin
      if (g_chip[0].u_dut.u_tx.state == TX_START) n_start++;
      if (g_chip[0].u_dut.u_tx.state == TX_STOP)  n_stop++;
    end
    tprev = g_chip[0].u_dut.u_tx.state;
  end

  task automatic burst(input int nw, input int b);
    automatic int r1 = received[1];
    apb_write(0, REG_TX_CTRL, 32'h1); apb_write(1, REG_RX_CTRL, 32'h1);
    #3_000_000;                           // warm-up time for the CDR
    apb_write(1, REG_RX_CTRL, 32'h3);
    #100_000;
    quota[0] += nw;
    apb_write(0, REG_TX_CTRL, 32'h3);
    for (int t = 0; t < nw * 6 + 1000 && received[1] != r1 + nw; t++) #10_000;
    check(received[1] == r1 + nw, $sformatf("burst %0d: %0d of %0d words", b, received[1] - r1, nw));
    #1_000_000;
    apb_write(0, REG_TX_CTRL, 32'h0); apb_write(1, REG_RX_CTRL, 32'h0);
  endtask

  logic [31:0] rd;
  initial begin
    real per, avg, t0, t_end;
    int s0;
    for (int c = 0; c < 2; c++) begin
      paddr[c] = '0; pwdata[c] = '0; tx_data[c] = '0; tx_valid[c] = 1'b0; rx_ready[c] = 1'b1;
    end
    #1000 rst_n = 1'b0;
    #20000 rst_n = 1'b1;
    #200000;
    running = 1;
    apb_write(1, REG_RX_ADDR, 32'h1C00_4000);
    apb_write(1, REG_RX_SIZE, 32'(BUF_BYTES));
    apb_read (1, REG_RX_SIZE, rd); check(rd == 32'(BUF_BYTES), "RX_SIZE holds 16 KB");
    check(c_rx_size[1] == 32'(BUF_BYTES), "RX size passed to the uDMA");

    // ---- 1: one 16 KB transfer at full rate ----
    s0 = n_start;
    burst(NWORDS, 0);
    per = real'(t_last[1] - t_first[1]) / real'(NWORDS - 1);
    $display("16 KB buffer: %0d words, %0.2f ns per word, %0.1f Mbit/s payload, %0.1f us",
             received[1], per / 1000.0, 32.0e6 / per, real'(t_last[1] - t_first[1]) / 1.0e6);
    check(received[1] == NWORDS, "whole buffer received");
    check(n_start - s0 == 1 && n_stop == n_start, $sformatf("one uninterrupted transfer (%0d Start, %0d Stop flits)", n_start - s0, n_stop));
    check(per > 0.999 * 20 * T_FLL && per < 1.001 * 20 * T_FLL, "one word per 20 Clk_fll cycles");
    apb_read(1, REG_STATUS, rd);
    check(rd[31:16] == 16'd0, "no code errors or overflows");

    // ---- 2: duty-cycled bursts ----
    t0 = $realtime;
    for (int b = 0; b < DC_BURSTS; b++) begin
      burst(DC_WORDS, b + 1);
      check($realtime - t0 < real'(b + 1) * DC_PERIOD, $sformatf("burst %0d fits in its period", b + 1));
      #(t0 + real'(b + 1) * DC_PERIOD - $realtime);
      check(g_chip[0].u_dut.u_tx.state == TX_IDLE && g_chip[1].u_dut.u_rx.rx_state == RX_IDLE,
            $sformatf("period %0d ends in idle", b + 1));
    end
    t_end = $realtime;
    avg = real'(DC_BURSTS * DC_WORDS * 32) / ((t_end - t0) * 1.0e-12) / 1.0e6;
    $display("duty-cycled: %0d words in %0.1f us, average %0.2f Mbit/s payload", DC_BURSTS * DC_WORDS,
             (t_end - t0) / 1.0e6, avg);
    check(avg > 63.9 && avg < 64.1, "average payload rate 64 Mbit/s");
    check(received[1] == NWORDS + DC_BURSTS * DC_WORDS, "total words");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #1_000_000_000;
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

`timescale 1ps/1fs
// tb_serdes_top: end-to-end test of the link between two chips.
//
// Two serdes_top instances (chip 0 and chip 1) run on their own 400 MHz FLL
// clocks with an arbitrary phase between them and their own system clocks.
// Chip 0's serial output reaches chip 1's receiver through a channel with a
// delay, and chip 1's output reaches chip 0 the same way; the driver and the
// input amplifier are modelled as an ideal differential pair. A uDMA model on
// each chip answers TX requests with a known word sequence and drains the RX
// channel, comparing every received word with the sequence of the other chip.
//
// The run is a duty-cycled sequence of bursts, as software would drive it:
// idle -> warm-up (Warm-En on both sides, CDR settles) -> Comm-En on the RX,
// then on the TX -> the TX sends Start flit, payload, Stop flit -> back to
// idle. Between bursts the channel delay grows by half a clock period, which
// moves the stream by one bit, so that both values of the detector's Shift
// occur. Checked: every word arrives once and in order, the payload rate is one
// word per 20 Clk_fll cycles, and each mechanism of the design happened.
module tb_serdes_top;
  import serdes_pkg::*;

  localparam real T_FLL   = 2500.0;
  localparam int  NWORDS  = 48;
  localparam int  NBURSTS = 4;

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

  // ---------------- mechanism counters ----------------
  int n_warm = 0, n_start = 0, n_data = 0, n_stop_tx = 0, n_idle_after = 0;
  int n_det_start = 0, n_shift0 = 0, n_shift1 = 0, n_det_stop = 0;
  int n_rx_back_warm = 0, n_cdr_step = 0, n_cdr_wrap = 0, n_txfifo_full = 0, n_rx_bp = 0;
  int n_duty_idle = 0;

  for (genvar c = 0; c < 2; c++) begin : g_mon
    tx_state_e tprev = TX_IDLE;
    rx_state_e rprev = RX_IDLE;
    logic [4:0] cprev = '0;
    always @(posedge clk_fll[c]) begin
      automatic tx_state_e ts = g_chip[c].u_dut.u_tx.state;
      automatic rx_state_e rs = g_chip[c].u_dut.u_rx.rx_state;
      automatic logic [4:0] pc = g_chip[c].u_dut.u_rx.pi_code;
      if (ts != tprev) begin
        if (ts == TX_WARM)  n_warm++;
        if (ts == TX_START) n_start++;
        if (ts == TX_DATA)  n_data++;
        if (ts == TX_STOP)  n_stop_tx++;
        if (ts == TX_IDLE && tprev == TX_FLUSH) n_idle_after++;
      end
      if (rs != rprev && rprev == RX_DATA && rs == RX_WARM) n_rx_back_warm++;
      if (pc != cprev) n_cdr_step++;
      if ((pc == 5'd0 && cprev == 5'd31) || (pc == 5'd31 && cprev == 5'd0)) n_cdr_wrap++;
      tprev = ts; rprev = rs; cprev = pc;
    end
    always @(posedge g_chip[c].u_dut.u_rx.clk_pi) begin
      if (g_chip[c].u_dut.u_rx.start_pulse) begin
        n_det_start++;
        if (g_chip[c].u_dut.u_rx.shift) n_shift1++; else n_shift0++;
      end
      if (g_chip[c].u_dut.u_rx.stop_pulse) n_det_stop++;
    end
    always @(posedge sys_clk[c]) begin
      if (!tx_req[c] && granted[c] < quota[c] && g_chip[c].u_dut.u_tx.wr_full) n_txfifo_full++;
      if (rx_valid[c] && !rx_ready[c]) n_rx_bp++;
    end
  end

  function automatic void check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL %s", what);
    end
  endfunction

  // ---------------- sequence ----------------
  logic [31:0] rd;
  initial begin
    for (int c = 0; c < 2; c++) begin
      paddr[c] = '0; pwdata[c] = '0; tx_data[c] = '0; tx_valid[c] = 1'b0; rx_ready[c] = 1'b1;
    end
    #1000 rst_n = 1'b0;
    #20000 rst_n = 1'b1;
    #200000;
    // every domain is out of reset and its FIFOs are empty
    for (int c = 0; c < 2; c++) check(!rx_valid[c] && tx_req[c], $sformatf("chip %0d FIFOs empty after reset", c));
    running = 1;

    // buffer registers (for the uDMA) read back
    apb_write(1, REG_RX_ADDR, 32'h1C00_8000);
    apb_write(1, REG_RX_SIZE, 32'(NWORDS * 4));
    apb_read (1, REG_RX_ADDR, rd); check(rd == 32'h1C00_8000, "RX_ADDR readback");
    apb_read (1, REG_RX_SIZE, rd); check(rd == 32'(NWORDS * 4), "RX_SIZE readback");
    apb_write(0, REG_TX_ADDR, 32'h1C00_0000);
    apb_read (0, REG_TX_ADDR, rd); check(rd == 32'h1C00_0000, "TX_ADDR readback");
    check(c_rx_addr[1] == 32'h1C00_8000 && c_tx_addr[0] == 32'h1C00_0000, "cfg outputs");

    for (int b = 0; b < NBURSTS; b++) begin
      automatic int r0 = received[0], r1 = received[1];
      automatic bit both = (b == 0);     // first burst in both directions
      // warm-up on both sides
      fork
        begin apb_write(0, REG_TX_CTRL, 32'h1); apb_write(1, REG_RX_CTRL, 32'h1); end
        begin if (both) begin apb_write(1, REG_TX_CTRL, 32'h1); apb_write(0, REG_RX_CTRL, 32'h1); end end
      join
      #3_000_000;                         // fixed warm-up time (3 us)
      apb_read(1, REG_STATUS, rd);
      check(rd[4:3] == 2'(RX_WARM), $sformatf("burst %0d: RX of chip 1 in warm-up", b));
      // RX ready (sequence detector on), then TX data-comm
      apb_write(1, REG_RX_CTRL, 32'h3);
      if (both) apb_write(0, REG_RX_CTRL, 32'h3);
      #100_000;
      drain_slow = (b == 1);
      quota[0] += NWORDS;
      if (both) quota[1] += NWORDS;
      apb_write(0, REG_TX_CTRL, 32'h3);
      if (both) apb_write(1, REG_TX_CTRL, 32'h3);
      // wait for the words
      fork : wait_words
        wait (received[1] == r1 + NWORDS && (!both || received[0] == r0 + NWORDS));
        #40_000_000;
      join_any
      disable wait_words;
      check(received[1] == r1 + NWORDS, $sformatf("burst %0d: chip 1 got %0d of %0d words",
                                               b, received[1] - r1, NWORDS));
      if (both) check(received[0] == r0 + NWORDS, $sformatf("burst %0d: chip 0 got %0d words",
                                                      b, received[0] - r0));
      if (b == 0) begin
        // payload rate: one word per 20 Clk_fll cycles (50 ns)
        automatic real per = real'(t_last[1] - t_first[1]) / real'(NWORDS - 1);
        $display("burst 0: %0.1f ps per received word", per);
        check(per > 0.97 * 20 * T_FLL && per < 1.03 * 20 * T_FLL, "payload rate 1 word / 20 cycles");
      end
      #2_000_000;
      apb_read(1, REG_STATUS, rd);
      check(rd[14] == 1'b1, $sformatf("burst %0d: stop flit seen", b));
      check(rd[31:24] == 8'd0 && rd[23:16] == 8'd0, $sformatf("burst %0d: no code errors/overflows", b));
      // duty cycle: everything off (idle), channel drifts by one bit
      apb_write(0, REG_TX_CTRL, 32'h0); apb_write(1, REG_RX_CTRL, 32'h0);
      apb_write(1, REG_TX_CTRL, 32'h0); apb_write(0, REG_RX_CTRL, 32'h0);
      #1_000_000;
      check(g_chip[0].u_dut.u_tx.state == TX_IDLE && g_chip[1].u_dut.u_rx.rx_state == RX_IDLE,
            $sformatf("burst %0d: idle mode", b));
      n_duty_idle++;
      d01 = d01 + T_FLL / 2.0 + 130.0;
    end

    $display("mechanisms: warm=%0d start=%0d data=%0d stop=%0d idle_after=%0d det_start=%0d shift0=%0d shift1=%0d det_stop=%0d rx_back_warm=%0d cdr_steps=%0d cdr_wrap=%0d txfifo_full=%0d rx_backpressure=%0d duty_idle=%0d",
             n_warm, n_start, n_data, n_stop_tx, n_idle_after, n_det_start, n_shift0, n_shift1,
             n_det_stop, n_rx_back_warm, n_cdr_step, n_cdr_wrap, n_txfifo_full, n_rx_bp, n_duty_idle);
    check(n_warm > 0, "mechanism: TX warm-up");
    check(n_start > 0, "mechanism: Start flit");
    check(n_data > 0, "mechanism: data-comm");
    check(n_stop_tx > 0, "mechanism: Stop flit");
    check(n_idle_after > 0, "mechanism: back to idle after Stop");
    check(n_det_start > 0, "mechanism: Start flit detected");
    check(n_shift0 > 0, "mechanism: Shift = 0");
    check(n_shift1 > 0, "mechanism: Shift = 1");
    check(n_det_stop > 0, "mechanism: Stop flit detected");
    check(n_rx_back_warm > 0, "mechanism: RX back to warm-up after Stop");
    check(n_cdr_step > 0, "mechanism: CDR phase steps");
    check(n_txfifo_full > 0, "mechanism: TX FIFO full, request withheld");
    check(n_rx_bp > 0, "mechanism: RX FIFO back-pressure");
    check(n_duty_idle > 1, "mechanism: duty-cycled idle between bursts");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #400_000_000;
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

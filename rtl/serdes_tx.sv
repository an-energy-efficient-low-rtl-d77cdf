`timescale 1ps/1fs
// serdes_tx: digital transmitter of the link.
//
// uDMA (system clock) -> async FIFO -> four 8b/10b encoders -> flit mux in the
// TX controller (Clk_fll/4) -> 40:1 DDR serializer (Clk_fll) -> ser_out, which
// goes to the pre-driver and the low-swing driver (analog, outside). Clk_fll/4
// comes from a clk_divider; Warm-En / Comm-En are synchronized into it.
//
// uDMA side, system clock: the TX asserts tx_req while the FIFO has room for
// one more word than it has been granted; the uDMA answers with tx_gnt and
// later delivers the word with tx_valid. Counting granted but undelivered
// words keeps the FIFO from overflowing. This request logic is this design's
// reading of the Valid / Grant / Request signals in the paper's block diagram.
module serdes_tx
  import serdes_pkg::*;
#(
  parameter int unsigned FIFO_DEPTH = 8
) (
  input  logic              clk_fll,
  input  logic              sys_clk,
  input  logic              rst_n,
  input  logic              warm_en,     // system clock domain
  input  logic              comm_en,
  output logic              tx_req,
  input  logic              tx_gnt,
  input  logic [WORD_W-1:0] tx_data,
  input  logic              tx_valid,
  output logic              ser_out,
  output logic              drv_en,
  output tx_state_e         state
);
  localparam int unsigned CW = $clog2(FIFO_DEPTH) + 1;

  logic clk_div2, clk_div4;
  logic rst_fll_n, rst_div4_n, rst_sys_n;
  logic warm_s, comm_s;

  clk_divider u_div (.clk(clk_fll), .clk_div2(clk_div2), .clk_div4(clk_div4));

  rst_sync u_rst_fll  (.clk(clk_fll),  .rst_n_i(rst_n), .rst_n_o(rst_fll_n));
  rst_sync u_rst_div4 (.clk(clk_div4), .rst_n_i(rst_n), .rst_n_o(rst_div4_n));
  rst_sync u_rst_sys  (.clk(sys_clk),  .rst_n_i(rst_n), .rst_n_o(rst_sys_n));

  sync2 #(.W(2)) u_sync_en (.clk(clk_div4), .rst_n(rst_div4_n),
                            .d({comm_en, warm_en}), .q({comm_s, warm_s}));

  // ---------------- uDMA request logic (system clock) ----------------
  logic [CW-1:0] wr_free, outstanding;
  logic          wr_full;

  assign tx_req = (wr_free > outstanding);

  always_ff @(posedge sys_clk or negedge rst_sys_n) begin
    if (!rst_sys_n) outstanding <= '0;
    else            outstanding <= outstanding + CW'(tx_gnt && tx_req) - CW'(tx_valid);
  end

  // ---------------- FIFO ----------------
  logic              fifo_empty, fifo_rd_en;
  logic [WORD_W-1:0] fifo_rdata;

  async_fifo #(.WIDTH(WORD_W), .DEPTH(FIFO_DEPTH)) u_fifo (
    .wr_clk(sys_clk), .wr_rst_n(rst_sys_n), .wr_en(tx_valid), .wr_data(tx_data),
    .wr_full(wr_full), .wr_free(wr_free),
    .rd_clk(clk_div4), .rd_rst_n(rst_div4_n), .rd_en(fifo_rd_en),
    .rd_data(fifo_rdata), .rd_empty(fifo_empty)
  );

  // ---------------- encoders + controller ----------------
  logic              enc_train, enc_rd, enc_rd_out;
  logic [LINE_W-1:0] enc_line, word_out;
  logic              load_tgl, en_ser;

  enc8b10b_x4 u_enc (
    .din    (enc_train ? {4{TRAIN_BYTE}} : fifo_rdata),
    .k      (4'b0000),
    .rd_in  (enc_rd),
    .line   (enc_line),
    .rd_out (enc_rd_out)
  );

  tx_controller u_ctrl (
    .clk(clk_div4), .rst_n(rst_div4_n), .warm_en(warm_s), .comm_en(comm_s),
    .fifo_empty(fifo_empty), .fifo_rd_en(fifo_rd_en),
    .enc_train(enc_train), .enc_rd(enc_rd), .enc_line(enc_line), .enc_rd_out(enc_rd_out),
    .load_tgl(load_tgl), .en_ser(en_ser), .word_out(word_out), .state(state)
  );

  serializer u_ser (
    .clk(clk_fll), .rst_n(rst_fll_n), .en(en_ser), .word_in(word_out),
    .load_tgl(load_tgl), .ser_out(ser_out)
  );

  assign drv_en = en_ser;

`ifndef SYNTHESIS
  // The uDMA never delivers more words than it was granted.
  a_valid_granted: assert property (@(posedge sys_clk) disable iff (!rst_sys_n)
                                    tx_valid |-> (outstanding != '0 || (tx_gnt && tx_req)));
  a_no_full_write: assert property (@(posedge sys_clk) disable iff (!rst_sys_n)
                                    tx_valid |-> !wr_full);
`endif
endmodule

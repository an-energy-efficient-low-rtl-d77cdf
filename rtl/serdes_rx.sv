`timescale 1ps/1fs
// serdes_rx: receiver of the link, including the behavioural models of its
// analog parts (comparators, phase interpolator).
//
// rx_p/rx_n (the amplified line) are sampled by two clocked comparators, one
// on the recovered clock Clk_pi and one on its quadrature Clkq, both on both
// edges. The timing synchronizer registers the bits on Clk_pi; the sequence
// detector finds the Start flit and its bit Shift, the deserializer builds
// 8-bit groups for the CDR and 40-bit payload words. On Clk_pi/4 the phase
// detector, loop filter and RX controller run; the controller feeds the four
// 10b/8b decoders and writes the words into the async FIFO, read by the uDMA
// on the system clock (rx_valid / rx_ready).
// The loop: phase detector -> accumulator / N -> 5-bit code -> interpolator,
// which shifts the phase of the local FLL clock (clk_fll).
module serdes_rx
  import serdes_pkg::*;
#(
  parameter int unsigned FIFO_DEPTH = 8,
  parameter real         T_PS       = 2500.0
) (
  input  logic              clk_fll,
  input  logic              sys_clk,
  input  logic              rst_n,
  input  logic              warm_en,     // system clock domain
  input  logic              comm_en,
  input  logic [2:0]        cdr_log2n,
  input  logic              rx_p,
  input  logic              rx_n,
  output logic [WORD_W-1:0] rx_data,
  output logic              rx_valid,
  input  logic              rx_ready,
  output logic [31:0]       status_rx
);
  logic clk_pi, clkq, clk_pi_div2, clk_pi_div4;
  logic rst_pi_n, rst_div4_n, rst_sys_n;
  logic [PI_BITS-1:0] pi_code;

  // ---------------- analog front end (behavioural) ----------------
  logic [1:0] cmp_data, cmp_edge;

  phase_interpolator #(.T_PS(T_PS)) u_pi (.clk_ref(clk_fll), .code(pi_code), .clk(clk_pi), .clkq(clkq));
  rx_comparator u_cmp_data (.clk(clk_pi), .in_p(rx_p), .in_n(rx_n), .out(cmp_data));
  rx_comparator u_cmp_edge (.clk(clkq),   .in_p(rx_p), .in_n(rx_n), .out(cmp_edge));

  // ---------------- clocks, resets, synchronizers ----------------
  clk_divider u_div (.clk(clk_pi), .clk_div2(clk_pi_div2), .clk_div4(clk_pi_div4));
  rst_sync u_rst_pi   (.clk(clk_pi),      .rst_n_i(rst_n), .rst_n_o(rst_pi_n));
  rst_sync u_rst_div4 (.clk(clk_pi_div4), .rst_n_i(rst_n), .rst_n_o(rst_div4_n));
  rst_sync u_rst_sys  (.clk(sys_clk),     .rst_n_i(rst_n), .rst_n_o(rst_sys_n));

  logic       warm_s, comm_s, det_en_pi;
  logic [2:0] log2n_s;
  logic       det_en;

  sync2 #(.W(5)) u_sync_cfg (.clk(clk_pi_div4), .rst_n(rst_div4_n),
                             .d({cdr_log2n, comm_en, warm_en}), .q({log2n_s, comm_s, warm_s}));
  sync2 #(.W(1)) u_sync_det (.clk(clk_pi), .rst_n(rst_pi_n), .d(det_en), .q(det_en_pi));

  // ---------------- Clk_pi domain ----------------
  logic [1:0] data_raw, edge_raw, data_al;
  logic       shift, start_pulse, stop_pulse, in_data, align;
  sd_state_e  sd_state;
  logic [7:0] grp_data, grp_edge;
  logic       grp_tgl, word_tgl;
  logic [LINE_W-1:0] word;

  timing_sync u_tsync (
    .clk(clk_pi), .rst_n(rst_pi_n), .data_in(cmp_data), .edge_in(cmp_edge),
    .shift(shift), .start_pulse(start_pulse),
    .data_raw(data_raw), .edge_raw(edge_raw), .data_al(data_al), .align(align)
  );

  seq_detector u_det (
    .clk(clk_pi), .rst_n(rst_pi_n), .en(det_en_pi), .pair(data_raw), .data_al(data_al),
    .align(align), .shift(shift), .start_pulse(start_pulse), .stop_pulse(stop_pulse),
    .in_data(in_data), .state(sd_state)
  );

  deserializer u_deser (
    .clk(clk_pi), .rst_n(rst_pi_n), .data_raw(data_raw), .edge_raw(edge_raw),
    .data_al(data_al), .align(align), .en(in_data),
    .grp_data(grp_data), .grp_edge(grp_edge), .grp_tgl(grp_tgl),
    .word(word), .word_tgl(word_tgl)
  );

  // ---------------- Clk_pi/4 domain ----------------
  logic signed [3:0] pd_out;
  logic              pd_valid, cdr_en;
  logic [LINE_W-1:0] dec_in;
  logic [WORD_W-1:0] dec_out, fifo_wdata;
  logic [3:0]        dec_k, dec_err;
  logic              fifo_wr, fifo_full, fifo_wr_full;
  rx_state_e         rx_state;
  logic [7:0]        overflow_cnt, err_cnt;

  phase_detector u_pd (
    .clk(clk_pi_div4), .rst_n(rst_div4_n), .en(cdr_en), .grp_data(grp_data),
    .grp_edge(grp_edge), .grp_tgl(grp_tgl), .pd_out(pd_out), .pd_valid(pd_valid)
  );

  loop_filter u_lf (
    .clk(clk_pi_div4), .rst_n(rst_div4_n), .en(cdr_en), .pd_out(pd_out),
    .pd_valid(pd_valid), .log2n(log2n_s), .code(pi_code)
  );

  dec10b8b_x4 u_dec (.line(dec_in), .dout(dec_out), .k(dec_k), .err(dec_err));

  rx_controller u_ctrl (
    .clk(clk_pi_div4), .rst_n(rst_div4_n), .warm_en(warm_s), .comm_en(comm_s),
    .in_data(in_data), .word_tgl(word_tgl), .word(word), .dec_in(dec_in),
    .dec_out(dec_out), .dec_err(dec_err | dec_k), .fifo_wr(fifo_wr), .fifo_wdata(fifo_wdata),
    .fifo_full(fifo_full), .cdr_en(cdr_en), .det_en(det_en), .state(rx_state),
    .overflow_cnt(overflow_cnt), .err_cnt(err_cnt)
  );

  logic rx_empty;
  logic [$clog2(FIFO_DEPTH):0] rx_free;

  async_fifo #(.WIDTH(WORD_W), .DEPTH(FIFO_DEPTH)) u_fifo (
    .wr_clk(clk_pi_div4), .wr_rst_n(rst_div4_n), .wr_en(fifo_wr), .wr_data(fifo_wdata),
    .wr_full(fifo_wr_full), .wr_free(rx_free),
    .rd_clk(sys_clk), .rd_rst_n(rst_sys_n), .rd_en(rx_ready),
    .rd_data(rx_data), .rd_empty(rx_empty)
  );
  assign fifo_full = fifo_wr_full;
  assign rx_valid  = !rx_empty;

  // status: [4:3] rx state, [7:5] detector state, [8] shift, [13:9] PI code,
  //         [14] stop seen since start, [23:16] overflows, [31:24] code errors
  logic stop_seen;
  always_ff @(posedge clk_pi or negedge rst_pi_n) begin
    if (!rst_pi_n)        stop_seen <= 1'b0;
    else if (start_pulse) stop_seen <= 1'b0;
    else if (stop_pulse)  stop_seen <= 1'b1;
  end
  assign status_rx = {err_cnt, overflow_cnt, 1'b0, stop_seen, pi_code, shift, sd_state, rx_state, 3'b000};
endmodule

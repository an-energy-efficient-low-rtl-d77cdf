`timescale 1ps/1fs
// rx_controller: receiver controller, on Clk_pi/4.
//
// Modes (paper): idle when neither Warm-En nor Comm-En is set; warm-up, in
// which only the CDR loop runs (cdr_en) and, once software sets Comm-En, the
// sequence detector is enabled; data-comm, entered when the sequence detector
// reports the Start flit (in_data). In data-comm each 40-bit word announced by
// the deserializer (a toggle of word_tgl) is captured into the decoder input
// register; one cycle later the decoded 32-bit word is registered with Valid
// and written into the RX FIFO while it is not full (Ready). When the Stop
// flit ends data-comm the controller falls back to warm-up if an enable is
// still set, otherwise to idle.
//
// This design's additions: a decoded word that is still waiting for Ready
// when the next one arrives is overwritten and counted in overflow_cnt, and
// words with an invalid code group are counted in err_cnt (and still
// delivered). Both counters saturate and are cleared by reset.
module rx_controller
  import serdes_pkg::*;
(
  input  logic              clk,          // Clk_pi/4
  input  logic              rst_n,
  input  logic              warm_en,
  input  logic              comm_en,
  input  logic              in_data,      // sequence detector is in Data
  input  logic              word_tgl,
  input  logic [LINE_W-1:0] word,
  output logic [LINE_W-1:0] dec_in,       // decoder input register
  input  logic [WORD_W-1:0] dec_out,
  input  logic [3:0]        dec_err,
  output logic              fifo_wr,      // Valid
  output logic [WORD_W-1:0] fifo_wdata,
  input  logic              fifo_full,    // Ready = !fifo_full
  output logic              cdr_en,
  output logic              det_en,
  output rx_state_e         state,
  output logic [7:0]        overflow_cnt,
  output logic [7:0]        err_cnt
);
  logic tgl_seen, in_data_q;
  logic dec_pend;                   // dec_in holds a word not decoded yet
  logic valid_q;

  assign cdr_en  = (state != RX_IDLE);
  assign det_en  = (state != RX_IDLE) && comm_en;
  assign fifo_wr = valid_q && !fifo_full;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state        <= RX_IDLE;
      tgl_seen     <= 1'b0;
      in_data_q    <= 1'b0;
      dec_in       <= '0;
      dec_pend     <= 1'b0;
      valid_q      <= 1'b0;
      fifo_wdata   <= '0;
      overflow_cnt <= '0;
      err_cnt      <= '0;
    end else begin
      tgl_seen  <= word_tgl;
      in_data_q <= in_data;

      case (state)
        RX_IDLE: if (warm_en || comm_en) state <= RX_WARM;
        RX_WARM: begin
          if (!warm_en && !comm_en) state <= RX_IDLE;
          else if (in_data_q)       state <= RX_DATA;
        end
        RX_DATA: if (!in_data_q) state <= (warm_en || comm_en) ? RX_WARM : RX_IDLE;
        default: state <= RX_IDLE;
      endcase

      // Stage 1: capture the deserialized word.
      dec_pend <= 1'b0;
      if ((word_tgl != tgl_seen) && in_data_q) begin
        dec_in   <= word;
        dec_pend <= 1'b1;
      end

      // Stage 2: register the decoder output with Valid.
      if (fifo_wr) valid_q <= 1'b0;
      if (dec_pend) begin
        if (valid_q && !fifo_wr && overflow_cnt != 8'hFF) overflow_cnt <= overflow_cnt + 8'd1;
        if (|dec_err && err_cnt != 8'hFF)                  err_cnt      <= err_cnt + 8'd1;
        fifo_wdata <= dec_out;
        valid_q    <= 1'b1;
      end
    end
  end
endmodule

`timescale 1ps/1fs
// tx_controller: finite state machine of the transmitter, with the flit
// multiplexer in front of the serializer. Runs on Clk_fll/4.
//
// States (paper): idle, warm-up, start flit, data-comm, stop flit. Warm-En (or
// Comm-En) takes it out of idle and the encoders then produce the training
// word. When Comm-En is set and the TX FIFO holds data (Valid), the Start flit
// is sent, then one encoded FIFO word per 40-bit slot. As soon as the FIFO is
// empty at a slot boundary the Stop flit is sent and the controller returns to
// idle. This design adds one FLUSH slot after the Stop flit so that the flit
// leaves the serializer completely before Enable_ser drops.
//
// Timing: every load of the serializer (a toggle of load_tgl, once per 20
// Clk_fll cycles = 5 cycles of this clock) the controller chooses the next
// word and registers it on word_out; the serializer takes it at its next load.
// The FIFO is read (fifo_rd_en, the Ready of the paper's handshake) in the
// cycle the word is registered; the encoders' running disparity is kept here.
module tx_controller
  import serdes_pkg::*;
(
  input  logic              clk,          // Clk_fll/4
  input  logic              rst_n,
  input  logic              warm_en,      // synchronized Warm-En
  input  logic              comm_en,      // synchronized Comm-En
  // TX FIFO read side (Valid = !fifo_empty)
  input  logic              fifo_empty,
  output logic              fifo_rd_en,
  // encoders
  output logic              enc_train,    // 1: encoders get the training bytes
  output logic              enc_rd,       // running disparity into lane 0
  input  logic [LINE_W-1:0] enc_line,
  input  logic              enc_rd_out,
  // serializer
  input  logic              load_tgl,
  output logic              en_ser,
  output logic [LINE_W-1:0] word_out,
  output tx_state_e         state
);
  logic load_seen;
  logic load_ev;

  assign load_ev    = (load_tgl != load_seen);
  assign enc_train  = (state == TX_IDLE) || (state == TX_WARM) || (state == TX_FLUSH);
  // Pop a word exactly when its code word is registered.
  assign fifo_rd_en = load_ev && !fifo_empty &&
                      ((state == TX_START) || (state == TX_DATA));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state     <= TX_IDLE;
      load_seen <= 1'b0;
      en_ser    <= 1'b0;
      word_out  <= '0;
      enc_rd    <= 1'b0;
    end else begin
      load_seen <= load_tgl;
      case (state)
        TX_IDLE: begin
          if (warm_en || comm_en) begin
            state    <= TX_WARM;
            en_ser   <= 1'b1;
            word_out <= enc_line;          // training word
          end
        end
        TX_WARM: if (load_ev) begin
          if (!warm_en && !comm_en) begin
            state  <= TX_IDLE;
            en_ser <= 1'b0;
          end else if (comm_en && !fifo_empty) begin
            state    <= TX_START;
            word_out <= START_FLIT;
          end else begin
            word_out <= enc_line;          // training word (D21.5 is neutral)
          end
        end
        TX_START, TX_DATA: if (load_ev) begin
          if (!fifo_empty) begin
            state    <= TX_DATA;
            word_out <= enc_line;
            enc_rd   <= enc_rd_out;
          end else begin
            state    <= TX_STOP;
            word_out <= STOP_FLIT;
          end
        end
        TX_STOP: if (load_ev) begin        // Stop flit now in the serializer
          state    <= TX_FLUSH;
          word_out <= '0;
        end
        TX_FLUSH: if (load_ev) begin       // Stop flit has left the serializer
          state  <= TX_IDLE;
          en_ser <= 1'b0;
        end
        default: state <= TX_IDLE;
      endcase
    end
  end

`ifndef SYNTHESIS
  // The FIFO is never read while empty.
  a_no_underflow: assert property (@(posedge clk) disable iff (!rst_n)
                                   fifo_rd_en |-> !fifo_empty);
`endif
endmodule

`timescale 1ps/1fs
// seq_detector: Start/Stop flit detector of the RX, on Clk_pi.
//
// It inspects the raw bit pair of each cycle (pair[0] earlier, pair[1] later)
// for the Start marker 1101_1111 (K27.7). The states and transitions are those
// of the paper's state diagram:
//   Start  -> Check1  when the pair holds the first marker bit (later bit 1);
//   Check1 -> Check2  on "01" after "11" (Shift = 0) or on "10" (Shift = 1:
//                     the marker is one bit late, seen as x1 10 11 11 1x);
//   Check2 -> Check3  on "11";
//   Check3 -> Data    on "11" with Shift = 0, -> Check4 on "11" with Shift = 1;
//   Check4 -> Data    when the earlier bit (last marker bit) is 1;
//   any other pair    returns to Start.
// Entering Data raises start_pulse for one cycle; shift is held for the
// timing synchronizer. In Data the realigned payload stream (data_al, valid
// from align on) is watched for the Stop marker 1011_1111 (K29.7) at pair
// boundaries; on it stop_pulse rises for one cycle and the state returns to
// Start. en (Comm-En) low forces Start. The way the first bit and the stop
// marker are matched is this design's reading of the diagram.
module seq_detector
  import serdes_pkg::*;
(
  input  logic       clk,          // Clk_pi
  input  logic       rst_n,
  input  logic       en,
  input  logic [1:0] pair,         // raw pair
  input  logic [1:0] data_al,      // realigned pair
  input  logic       align,
  output logic       shift,
  output logic       start_pulse,
  output logic       stop_pulse,
  output logic       in_data,
  output sd_state_e  state
);
  logic       both1;          // the pair that led to Check1 was "11"
  logic       armed;          // data_al carries payload
  logic [5:0] win;            // last three realigned pairs, [0] oldest
  logic [7:0] win8;
  logic       stop_hit;

  always_comb begin
    win8     = {data_al, win};
    stop_hit = 1'b1;
    for (int i = 0; i < 8; i++) if (win8[i] != K29_7_SEQ[7-i]) stop_hit = 1'b0;
  end

  assign in_data = (state == SD_DATA);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state       <= SD_START;
      shift       <= 1'b0;
      both1       <= 1'b0;
      armed       <= 1'b0;
      win         <= '0;
      start_pulse <= 1'b0;
      stop_pulse  <= 1'b0;
    end else begin
      start_pulse <= 1'b0;
      stop_pulse  <= 1'b0;
      win         <= {data_al, win[5:2]};
      if (!en) begin
        state <= SD_START;
        armed <= 1'b0;
      end else begin
        case (state)
          SD_START: if (pair[1]) begin
            state <= SD_CHECK1;
            both1 <= pair[0];
          end
          SD_CHECK1: begin
            if (both1 && !pair[0] && pair[1]) begin
              state <= SD_CHECK2;
              shift <= 1'b0;
            end else if (pair[0] && !pair[1]) begin
              state <= SD_CHECK2;
              shift <= 1'b1;
            end else begin
              state <= SD_START;
            end
          end
          SD_CHECK2: state <= (pair == 2'b11) ? SD_CHECK3 : SD_START;
          SD_CHECK3: begin
            if (pair == 2'b11) begin
              if (shift) state <= SD_CHECK4;
              else begin
                state       <= SD_DATA;
                start_pulse <= 1'b1;
                armed       <= 1'b0;
              end
            end else state <= SD_START;
          end
          SD_CHECK4: begin
            if (pair[0]) begin
              state       <= SD_DATA;
              start_pulse <= 1'b1;
              armed       <= 1'b0;
            end else state <= SD_START;
          end
          SD_DATA: begin
            if (align) armed <= 1'b1;
            // The window holds payload once three pairs followed align.
            if (armed && stop_hit) begin
              state      <= SD_START;
              stop_pulse <= 1'b1;
              armed      <= 1'b0;
            end
          end
          default: state <= SD_START;
        endcase
      end
    end
  end
endmodule

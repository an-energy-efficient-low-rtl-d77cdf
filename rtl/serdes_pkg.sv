`timescale 1ps/1fs
// serdes_pkg: types and constants shared by the low-swing serial link.
//
// Line format. Every transfer on the wire is a 40-bit word, sent least
// significant bit first at double data rate (two bits per Clk_fll cycle, so a
// word takes 20 cycles). A payload word is a 32-bit uDMA word turned into four
// 10-bit 8b/10b code groups; byte 0 goes first and inside a code group bit 'a'
// goes first. Outside a transfer the TX sends a training word (D21.5 on all four
// lanes, i.e. 1010... on the wire) so that the RX clock recovery has an edge on
// every bit. A transfer is framed by a Start flit and a Stop flit. The Start
// flit ends with the 8-bit marker 1101_1111 (the K27.7 byte, bits in A..H
// order) and the Stop flit begins with 1011_1111 (K29.7); the receiver's
// sequence detector looks for these raw bit patterns on the line. The other 32
// bits of each flit are this design's choice: a 1010 run and a run of zeros
// that keep the 40-bit flit at 20 ones and 20 zeros and contain no "11".
//
// The register map of the APB configuration block is also defined here.
package serdes_pkg;

  localparam int unsigned WORD_W  = 32;   // uDMA word
  localparam int unsigned LINE_W  = 40;   // serializer / deserializer word
  localparam int unsigned PAIRS   = LINE_W / 2;  // Clk_fll cycles per word (DDR)
  localparam int unsigned PI_BITS = 5;    // 2*pi/32 phase interpolator resolution

  // Marker bytes in transmission order (first bit on the left).
  localparam logic [7:0] K27_7_SEQ = 8'b1101_1111;
  localparam logic [7:0] K29_7_SEQ = 8'b1011_1111;

  // Builds a 40-bit word whose bit 0 is sent first from a string written in
  // transmission order (leftmost character first).
  function automatic logic [LINE_W-1:0] line_word(input logic [LINE_W-1:0] first_left);
    logic [LINE_W-1:0] w;
    for (int i = 0; i < int'(LINE_W); i++) w[i] = first_left[LINE_W-1-i];
    return w;
  endfunction

  // Start flit: 26 bits of 1010..., six zeros, then the K27.7 marker.
  localparam logic [LINE_W-1:0] START_FLIT =
      line_word({26'b10101010101010101010101010, 6'b000000, K27_7_SEQ});
  // Stop flit: the K29.7 marker, six zeros, then 26 bits of 1010...
  localparam logic [LINE_W-1:0] STOP_FLIT =
      line_word({K29_7_SEQ, 6'b000000, 26'b10101010101010101010101010});

  // Training byte sent through the encoders during warm-up (D21.5).
  localparam logic [7:0] TRAIN_BYTE = 8'hB5;

  // TX controller states.
  typedef enum logic [2:0] {
    TX_IDLE  = 3'd0,
    TX_WARM  = 3'd1,
    TX_START = 3'd2,
    TX_DATA  = 3'd3,
    TX_STOP  = 3'd4,
    TX_FLUSH = 3'd5
  } tx_state_e;

  // RX controller states.
  typedef enum logic [1:0] {
    RX_IDLE = 2'd0,
    RX_WARM = 2'd1,
    RX_DATA = 2'd2
  } rx_state_e;

  // Sequence detector states (names follow the state diagram).
  typedef enum logic [2:0] {
    SD_START  = 3'd0,
    SD_CHECK1 = 3'd1,
    SD_CHECK2 = 3'd2,
    SD_CHECK3 = 3'd3,
    SD_CHECK4 = 3'd4,
    SD_DATA   = 3'd5
  } sd_state_e;

  // APB register map (byte addresses, 32-bit registers).
  localparam logic [5:0] REG_TX_CTRL  = 6'h00;  // [0] Warm-En, [1] Comm-En
  localparam logic [5:0] REG_RX_CTRL  = 6'h04;  // [0] Warm-En, [1] Comm-En
  localparam logic [5:0] REG_CDR      = 6'h08;  // [2:0] log2(N) of the loop filter divider
  localparam logic [5:0] REG_TX_ADDR  = 6'h0C;  // TX buffer address in L2 (for the uDMA)
  localparam logic [5:0] REG_TX_SIZE  = 6'h10;  // TX transfer size in bytes
  localparam logic [5:0] REG_RX_ADDR  = 6'h14;  // RX buffer address in L2
  localparam logic [5:0] REG_RX_SIZE  = 6'h18;  // RX buffer size in bytes
  localparam logic [5:0] REG_STATUS   = 6'h1C;  // read only, see serdes_cfg_regs

  // 5b/6b code for the running disparity -1 column, written abcdei.
  function automatic logic [5:0] code6_neg(input logic [4:0] x);
    case (x)
      5'd0:  return 6'b100111;  5'd1:  return 6'b011101;
      5'd2:  return 6'b101101;  5'd3:  return 6'b110001;
      5'd4:  return 6'b110101;  5'd5:  return 6'b101001;
      5'd6:  return 6'b011001;  5'd7:  return 6'b111000;
      5'd8:  return 6'b111001;  5'd9:  return 6'b100101;
      5'd10: return 6'b010101;  5'd11: return 6'b110100;
      5'd12: return 6'b001101;  5'd13: return 6'b101100;
      5'd14: return 6'b011100;  5'd15: return 6'b010111;
      5'd16: return 6'b011011;  5'd17: return 6'b100011;
      5'd18: return 6'b010011;  5'd19: return 6'b110010;
      5'd20: return 6'b001011;  5'd21: return 6'b101010;
      5'd22: return 6'b011010;  5'd23: return 6'b111010;
      5'd24: return 6'b110011;  5'd25: return 6'b100110;
      5'd26: return 6'b010110;  5'd27: return 6'b110110;
      5'd28: return 6'b001110;  5'd29: return 6'b101110;
      5'd30: return 6'b011110;  default: return 6'b101011;
    endcase
  endfunction

  // 3b/4b data code for the running disparity -1 column, written fghj
  // (y = 7 gives the primary code P7).
  function automatic logic [3:0] code4_neg(input logic [2:0] y);
    case (y)
      3'd0: return 4'b1011;  3'd1: return 4'b1001;
      3'd2: return 4'b0101;  3'd3: return 4'b1100;
      3'd4: return 4'b1101;  3'd5: return 4'b1010;
      3'd6: return 4'b0110;  default: return 4'b1110;
    endcase
  endfunction

  // 3b/4b code of K28.y for the running disparity -1 column.
  function automatic logic [3:0] code4k_neg(input logic [2:0] y);
    case (y)
      3'd0: return 4'b1011;  3'd1: return 4'b0110;
      3'd2: return 4'b1010;  3'd3: return 4'b1100;
      3'd4: return 4'b1101;  3'd5: return 4'b0101;
      3'd6: return 4'b1001;  default: return 4'b0111;
    endcase
  endfunction

  localparam logic [5:0] K28_6B  = 6'b001111;  // K.28 sub-block, RD -1
  localparam logic [3:0] A7_4B   = 4'b0111;    // alternate D.x.7 / K.x.7, RD -1

endpackage

`timescale 1ps/1fs
// serdes_cfg_regs: configuration registers of the link on the APB bus.
//
// Holds what software sets: Warm-En and Comm-En for the TX and for the RX, the
// CDR parameter (log2 of the loop filter divider N) and the address and size
// of the TX and RX buffers in L2, which are handed to the uDMA channels. A
// read-only status word shows the TX/RX/detector states, the Shift decision,
// the interpolator code and the RX error counters (sampled from the link clock
// domains; software reads them as slowly changing values).
// The fields are those the paper names; the register map (serdes_pkg), the
// reset values and the APB details (no wait states, no error response) are
// this design's choice. Writes and reads take the usual two APB cycles. The
// registers occupy a 64-byte window; other addresses read 0 and ignore writes.
module serdes_cfg_regs
  import serdes_pkg::*;
(
  input  logic        clk,
  input  logic        rst_n,
  // APB slave
  input  logic [11:0] paddr,
  input  logic        psel,
  input  logic        penable,
  input  logic        pwrite,
  input  logic [31:0] pwdata,
  output logic [31:0] prdata,
  output logic        pready,
  output logic        pslverr,
  // configuration
  output logic        tx_warm_en,
  output logic        tx_comm_en,
  output logic        rx_warm_en,
  output logic        rx_comm_en,
  output logic [2:0]  cdr_log2n,
  output logic [31:0] tx_addr,
  output logic [31:0] tx_size,
  output logic [31:0] rx_addr,
  output logic [31:0] rx_size,
  // status
  input  logic [31:0] status
);
  localparam logic [2:0] CDR_LOG2N_RST = 3'd3;   // N = 8

  logic wr, hit;
  assign hit     = (paddr[11:6] == 6'd0);   // 64-byte register window
  assign wr      = psel && penable && pwrite && hit;
  assign pready  = 1'b1;
  assign pslverr = 1'b0;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      tx_warm_en <= 1'b0;
      tx_comm_en <= 1'b0;
      rx_warm_en <= 1'b0;
      rx_comm_en <= 1'b0;
      cdr_log2n  <= CDR_LOG2N_RST;
      tx_addr    <= '0;
      tx_size    <= '0;
      rx_addr    <= '0;
      rx_size    <= '0;
    end else if (wr) begin
      case (paddr[5:0])
        REG_TX_CTRL: {tx_comm_en, tx_warm_en} <= pwdata[1:0];
        REG_RX_CTRL: {rx_comm_en, rx_warm_en} <= pwdata[1:0];
        REG_CDR:     cdr_log2n <= pwdata[2:0];
        REG_TX_ADDR: tx_addr   <= pwdata;
        REG_TX_SIZE: tx_size   <= pwdata;
        REG_RX_ADDR: rx_addr   <= pwdata;
        REG_RX_SIZE: rx_size   <= pwdata;
        default: ;
      endcase
    end
  end

  always_comb begin
    if (!hit) prdata = '0;
    else case (paddr[5:0])
      REG_TX_CTRL: prdata = {30'd0, tx_comm_en, tx_warm_en};
      REG_RX_CTRL: prdata = {30'd0, rx_comm_en, rx_warm_en};
      REG_CDR:     prdata = {29'd0, cdr_log2n};
      REG_TX_ADDR: prdata = tx_addr;
      REG_TX_SIZE: prdata = tx_size;
      REG_RX_ADDR: prdata = rx_addr;
      REG_RX_SIZE: prdata = rx_size;
      REG_STATUS:  prdata = status;
      default:     prdata = '0;
    endcase
  end

`ifndef SYNTHESIS
  // APB: the access phase follows a setup phase with stable address.
  a_apb_setup: assert property (@(posedge clk) disable iff (!rst_n)
                                (psel && !penable) |=> (psel && penable && $stable(paddr)));
`endif
endmodule

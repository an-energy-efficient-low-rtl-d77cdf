`timescale 1ps/1fs
// serdes_top: the low-voltage-swing serial link peripheral of one chip.
//
// One TX, one RX and the APB configuration registers. The TX takes 32-bit words
// from a uDMA TX channel, frames them between a Start and a Stop flit, 8b/10b
// encodes them and sends them at double data rate on tx_ser (0.8 Gbit/s with
// a 400 MHz Clk_fll). The RX recovers the clock of the incoming stream with
// its CDR loop, finds the Start flit, decodes the payload and hands the words
// to a uDMA RX channel. Mode control is by software: Warm-En alone is the
// warm-up mode (training sequence, CDR settling), Warm-En with Comm-En lets
// the TX start a transfer as soon as it has data, and the RX accept one;
// neither is idle.
//
// Ports that would connect to parts outside this RTL:
//   clk_fll          clock from the FLL (not modelled here)
//   tx_ser, tx_drv_en  serial data and enable for the pre-driver / low-swing
//                    driver and its LDO (analog, not modelled here)
//   rx_p, rx_n       outputs of the RX input amplifier (analog, not modelled)
//   udma_*, cfg_*    uDMA channel handshakes and the buffer address / size
//                    registers the uDMA reads
//   apb_*            peripheral bus
// The phase interpolator and comparators are included as behavioural models.
module serdes_top
  import serdes_pkg::*;
#(
  parameter int unsigned FIFO_DEPTH = 8,
  parameter real         T_PS       = 2500.0     // Clk_fll period (400 MHz)
) (
  input  logic              sys_clk,
  input  logic              rst_n,
  input  logic              clk_fll,
  // APB
  input  logic [11:0]       apb_paddr,
  input  logic              apb_psel,
  input  logic              apb_penable,
  input  logic              apb_pwrite,
  input  logic [31:0]       apb_pwdata,
  output logic [31:0]       apb_prdata,
  output logic              apb_pready,
  output logic              apb_pslverr,
  // uDMA TX channel
  output logic              udma_tx_req,
  input  logic              udma_tx_gnt,
  input  logic [WORD_W-1:0] udma_tx_data,
  input  logic              udma_tx_valid,
  // uDMA RX channel
  output logic [WORD_W-1:0] udma_rx_data,
  output logic              udma_rx_valid,
  input  logic              udma_rx_ready,
  // buffer configuration for the uDMA
  output logic [31:0]       cfg_tx_addr,
  output logic [31:0]       cfg_tx_size,
  output logic [31:0]       cfg_rx_addr,
  output logic [31:0]       cfg_rx_size,
  // line
  output logic              tx_ser,
  output logic              tx_drv_en,
  input  logic              rx_p,
  input  logic              rx_n
);
  logic       tx_warm_en, tx_comm_en, rx_warm_en, rx_comm_en;
  logic [2:0] cdr_log2n;
  tx_state_e  tx_state;
  logic [31:0] status_rx, status;

  serdes_cfg_regs u_regs (
    .clk(sys_clk), .rst_n(rst_n),
    .paddr(apb_paddr), .psel(apb_psel), .penable(apb_penable), .pwrite(apb_pwrite),
    .pwdata(apb_pwdata), .prdata(apb_prdata), .pready(apb_pready), .pslverr(apb_pslverr),
    .tx_warm_en(tx_warm_en), .tx_comm_en(tx_comm_en),
    .rx_warm_en(rx_warm_en), .rx_comm_en(rx_comm_en), .cdr_log2n(cdr_log2n),
    .tx_addr(cfg_tx_addr), .tx_size(cfg_tx_size), .rx_addr(cfg_rx_addr), .rx_size(cfg_rx_size),
    .status(status)
  );

  serdes_tx #(.FIFO_DEPTH(FIFO_DEPTH)) u_tx (
    .clk_fll(clk_fll), .sys_clk(sys_clk), .rst_n(rst_n),
    .warm_en(tx_warm_en), .comm_en(tx_comm_en),
    .tx_req(udma_tx_req), .tx_gnt(udma_tx_gnt), .tx_data(udma_tx_data), .tx_valid(udma_tx_valid),
    .ser_out(tx_ser), .drv_en(tx_drv_en), .state(tx_state)
  );

  serdes_rx #(.FIFO_DEPTH(FIFO_DEPTH), .T_PS(T_PS)) u_rx (
    .clk_fll(clk_fll), .sys_clk(sys_clk), .rst_n(rst_n),
    .warm_en(rx_warm_en), .comm_en(rx_comm_en), .cdr_log2n(cdr_log2n),
    .rx_p(rx_p), .rx_n(rx_n),
    .rx_data(udma_rx_data), .rx_valid(udma_rx_valid), .rx_ready(udma_rx_ready),
    .status_rx(status_rx)
  );

  // status register: [2:0] TX state, the rest from the RX (see serdes_rx)
  assign status = {status_rx[31:3], tx_state};
endmodule

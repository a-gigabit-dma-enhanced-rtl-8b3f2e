// eth_idma_top: bufferless, DMA-enhanced Gigabit Ethernet controller.
//
// Data path, transmit: system memory -> iDMA (AXI4 read, system clock) ->
// wide AXI-Stream -> TX CDC FIFO -> 125 MHz transmit clock -> down-sizer
// (one byte per cycle) -> MAC transmitter -> RGMII pins.
// Data path, receive: RGMII pins -> MAC receiver (PHY receive clock) ->
// up-sizer -> RX CDC FIFO -> system clock -> iDMA (AXI4 write) -> memory.
// Control: the register file on the register bus programs the iDMA and the
// MAC and collects status; status events from the Ethernet clocks are
// carried over with pulse synchronizers.
//
// No frame is ever stored whole inside the controller: the only storage on
// the data path is the two small CDC FIFOs and the iDMA's realignment
// buffer, so frame length is not bounded by an internal memory. The price is
// that the iDMA must keep up with line rate (125 MB/s), which a 64-bit
// system bus does at any system clock above about 16 MHz, and that the
// iDMA runs one transfer at a time: a frame that arrives while a transmit
// transfer is running is lost once the RX FIFO fills (RX_OVERFLOW).
//
// Clocks: clk_i (system), clk_125_i (transmit, 125 MHz), phy_rxc_i (receive,
// from the PHY). rst_ni is asynchronous, active low, and is synchronized into
// each domain here. The AXI4 manager port, the register bus, the interrupt
// and the RGMII pins are the ports; the system crossbar and the PHY are
// outside.
//
// Follows the published block diagram: iDMA as AXI4 manager, TX and RX CDC
// FIFOs next to the iDMA, down-sizer and up-sizer next to the RGMII MAC, a
// unified register bus. The clocking of the receive path from the PHY's
// clock, the synchronizers, FIFO depths and bus widths are this design's.
module eth_idma_top
  import eth_pkg::*;
#(
  parameter int unsigned TX_FIFO_DEPTH = 8,
  parameter int unsigned RX_FIFO_DEPTH = 8,
  parameter int unsigned MAX_BEATS     = 256
) (
  input  logic     clk_i,
  input  logic     rst_ni,
  input  logic     clk_125_i,
  // AXI4 manager port towards the system crossbar
  output axi_req_t axi_req_o,
  input  axi_rsp_t axi_rsp_i,
  // register bus
  input  reg_req_t reg_req_i,
  output reg_rsp_t reg_rsp_o,
  output logic     irq_o,
  // RGMII
  output logic       phy_txc_o,
  output logic [3:0] phy_txd_o,
  output logic       phy_tx_ctl_o,
  input  logic       phy_rxc_i,
  input  logic [3:0] phy_rxd_i,
  input  logic       phy_rx_ctl_i
);
  logic sys_rst_n, tx_rst_n, rx_rst_n;

  rst_sync i_rst_sys (.clk_i(clk_i),     .rst_ni, .rst_no(sys_rst_n));
  rst_sync i_rst_tx  (.clk_i(clk_125_i), .rst_ni, .rst_no(tx_rst_n));
  rst_sync i_rst_rx  (.clk_i(phy_rxc_i), .rst_ni, .rst_no(rx_rst_n));

  // ---------------------------------------------------------------- registers
  idma_req_t dma_req;
  idma_rsp_t dma_rsp;
  logic      dma_req_valid, dma_req_ready, dma_busy, dma_rsp_valid, dma_frame_err;
  logic      rx_en, rx_en_rx;
  logic      ev_ok, ev_fcs, ev_ovf, ev_und, ev_sent;
  logic      rx_ok, rx_fcs, rx_ovf, tx_und, tx_sent;

  eth_regs i_regs (
    .clk_i          (clk_i),
    .rst_ni         (sys_rst_n),
    .reg_req_i      (reg_req_i),
    .reg_rsp_o      (reg_rsp_o),
    .dma_req_o      (dma_req),
    .dma_req_valid_o(dma_req_valid),
    .dma_req_ready_i(dma_req_ready),
    .dma_busy_i     (dma_busy),
    .dma_rsp_valid_i(dma_rsp_valid),
    .dma_rsp_i      (dma_rsp),
    .dma_frame_err_i(dma_frame_err),
    .rx_en_o        (rx_en),
    .ev_frame_ok_i  (ev_ok),
    .ev_fcs_err_i   (ev_fcs),
    .ev_overflow_i  (ev_ovf),
    .ev_underrun_i  (ev_und),
    .ev_frame_sent_i(ev_sent),
    .irq_o          (irq_o)
  );

  // ---------------------------------------------------------------- iDMA
  axis_wide_t tx_wide, rx_wide;
  logic       tx_wide_valid, tx_wide_ready, rx_wide_valid, rx_wide_ready;

  idma_backend #(.MAX_BEATS(MAX_BEATS)) i_idma (
    .clk_i          (clk_i),
    .rst_ni         (sys_rst_n),
    .req_i          (dma_req),
    .req_valid_i    (dma_req_valid),
    .req_ready_o    (dma_req_ready),
    .rsp_o          (dma_rsp),
    .rsp_frame_err_o(dma_frame_err),
    .rsp_valid_o    (dma_rsp_valid),
    .busy_o         (dma_busy),
    .axi_req_o      (axi_req_o),
    .axi_rsp_i      (axi_rsp_i),
    .rx_data_i      (rx_wide),
    .rx_valid_i     (rx_wide_valid),
    .rx_ready_o     (rx_wide_ready),
    .tx_data_o      (tx_wide),
    .tx_valid_o     (tx_wide_valid),
    .tx_ready_i     (tx_wide_ready)
  );

  // ---------------------------------------------------------------- transmit path
  axis_wide_t tx_wide_125;
  logic       tx_wide_125_valid, tx_wide_125_ready;
  axis_byte_t tx_byte;
  logic       tx_byte_valid, tx_byte_ready;

  cdc_fifo_gray #(.T(axis_wide_t), .DEPTH(TX_FIFO_DEPTH)) i_tx_cdc_fifo (
    .src_clk_i  (clk_i),
    .src_rst_ni (sys_rst_n),
    .src_data_i (tx_wide),
    .src_valid_i(tx_wide_valid),
    .src_ready_o(tx_wide_ready),
    .dst_clk_i  (clk_125_i),
    .dst_rst_ni (tx_rst_n),
    .dst_data_o (tx_wide_125),
    .dst_valid_o(tx_wide_125_valid),
    .dst_ready_i(tx_wide_125_ready)
  );

  axis_downsizer i_tx_downsizer (
    .clk_i    (clk_125_i),
    .rst_ni   (tx_rst_n),
    .s_data_i (tx_wide_125),
    .s_valid_i(tx_wide_125_valid),
    .s_ready_o(tx_wide_125_ready),
    .m_data_o (tx_byte),
    .m_valid_o(tx_byte_valid),
    .m_ready_i(tx_byte_ready)
  );

  // ---------------------------------------------------------------- receive path
  axis_byte_t rx_byte;
  logic       rx_byte_valid, rx_byte_ready;
  axis_wide_t rx_wide_phy;
  logic       rx_wide_phy_valid, rx_wide_phy_ready;

  axis_upsizer i_rx_upsizer (
    .clk_i    (phy_rxc_i),
    .rst_ni   (rx_rst_n),
    .s_data_i (rx_byte),
    .s_valid_i(rx_byte_valid),
    .s_ready_o(rx_byte_ready),
    .m_data_o (rx_wide_phy),
    .m_valid_o(rx_wide_phy_valid),
    .m_ready_i(rx_wide_phy_ready)
  );

  cdc_fifo_gray #(.T(axis_wide_t), .DEPTH(RX_FIFO_DEPTH)) i_rx_cdc_fifo (
    .src_clk_i  (phy_rxc_i),
    .src_rst_ni (rx_rst_n),
    .src_data_i (rx_wide_phy),
    .src_valid_i(rx_wide_phy_valid),
    .src_ready_o(rx_wide_phy_ready),
    .dst_clk_i  (clk_i),
    .dst_rst_ni (sys_rst_n),
    .dst_data_o (rx_wide),
    .dst_valid_o(rx_wide_valid),
    .dst_ready_i(rx_wide_ready)
  );

  // ---------------------------------------------------------------- MAC + RGMII
  sync_2ff #(.WIDTH(1)) i_sync_rx_en (
    .clk_i(phy_rxc_i), .rst_ni(rx_rst_n), .d_i(rx_en), .q_o(rx_en_rx)
  );

  eth_rgmii i_eth_rgmii (
    .tx_clk_i       (clk_125_i),
    .tx_rst_ni      (tx_rst_n),
    .tx_data_i      (tx_byte),
    .tx_valid_i     (tx_byte_valid),
    .tx_ready_o     (tx_byte_ready),
    .tx_underrun_o  (tx_und),
    .tx_frame_sent_o(tx_sent),
    .rx_rst_ni      (rx_rst_n),
    .rx_en_i        (rx_en_rx),
    .rx_data_o      (rx_byte),
    .rx_valid_o     (rx_byte_valid),
    .rx_ready_i     (rx_byte_ready),
    .rx_frame_ok_o  (rx_ok),
    .rx_fcs_err_o   (rx_fcs),
    .rx_overflow_o  (rx_ovf),
    .phy_txc_o      (phy_txc_o),
    .phy_txd_o      (phy_txd_o),
    .phy_tx_ctl_o   (phy_tx_ctl_o),
    .phy_rxc_i      (phy_rxc_i),
    .phy_rxd_i      (phy_rxd_i),
    .phy_rx_ctl_i   (phy_rx_ctl_i)
  );

  // ---------------------------------------------------------------- status events
  sync_pulse i_sp_ok   (.src_clk_i(phy_rxc_i), .src_rst_ni(rx_rst_n), .src_pulse_i(rx_ok),
                        .dst_clk_i(clk_i), .dst_rst_ni(sys_rst_n), .dst_pulse_o(ev_ok));
  sync_pulse i_sp_fcs  (.src_clk_i(phy_rxc_i), .src_rst_ni(rx_rst_n), .src_pulse_i(rx_fcs),
                        .dst_clk_i(clk_i), .dst_rst_ni(sys_rst_n), .dst_pulse_o(ev_fcs));
  sync_pulse i_sp_ovf  (.src_clk_i(phy_rxc_i), .src_rst_ni(rx_rst_n), .src_pulse_i(rx_ovf),
                        .dst_clk_i(clk_i), .dst_rst_ni(sys_rst_n), .dst_pulse_o(ev_ovf));
  sync_pulse i_sp_und  (.src_clk_i(clk_125_i), .src_rst_ni(tx_rst_n), .src_pulse_i(tx_und),
                        .dst_clk_i(clk_i), .dst_rst_ni(sys_rst_n), .dst_pulse_o(ev_und));
  sync_pulse i_sp_sent (.src_clk_i(clk_125_i), .src_rst_ni(tx_rst_n), .src_pulse_i(tx_sent),
                        .dst_clk_i(clk_i), .dst_rst_ni(sys_rst_n), .dst_pulse_o(ev_sent));
endmodule

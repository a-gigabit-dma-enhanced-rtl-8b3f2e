// eth_rgmii: Ethernet MAC with RGMII, exposing AXI-Stream byte ports.
//
// This is the block that faces the PHY. Its transmit side takes a byte stream
// in the 125 MHz transmit clock domain, frames it (eth_mac_tx) and drives the
// RGMII pins (rgmii_phy_if). Its receive side samples the RGMII pins on the
// PHY's receive clock, deframes and checks the frame (eth_mac_rx) and emits a
// byte stream in that clock domain. Unlike a buffered MAC it holds no frame
// memory: both streams are exposed directly and must run at line rate.
//
// Status pulses come out in the domain of the side that raises them; the
// controller top carries them to the system clock.
//
// The grouping (MAC plus RGMII with AXI-Stream on both sides, no frame
// memory) follows the published architecture; the split into three
// sub-blocks and the status pulses are this design's.
module eth_rgmii
  import eth_pkg::*;
(
  // transmit, 125 MHz
  input  logic       tx_clk_i,
  input  logic       tx_rst_ni,
  input  axis_byte_t tx_data_i,
  input  logic       tx_valid_i,
  output logic       tx_ready_o,
  output logic       tx_underrun_o,
  output logic       tx_frame_sent_o,
  // receive, PHY receive clock (phy_rxc_i)
  input  logic       rx_rst_ni,
  input  logic       rx_en_i,
  output axis_byte_t rx_data_o,
  output logic       rx_valid_o,
  input  logic       rx_ready_i,
  output logic       rx_frame_ok_o,
  output logic       rx_fcs_err_o,
  output logic       rx_overflow_o,
  // RGMII pins
  output logic       phy_txc_o,
  output logic [3:0] phy_txd_o,
  output logic       phy_tx_ctl_o,
  input  logic       phy_rxc_i,
  input  logic [3:0] phy_rxd_i,
  input  logic       phy_rx_ctl_i
);
  logic [7:0] txd, rxd;
  logic       tx_en, tx_er, rx_dv, rx_er;

  eth_mac_tx i_mac_tx (
    .clk_i       (tx_clk_i),
    .rst_ni      (tx_rst_ni),
    .s_data_i    (tx_data_i),
    .s_valid_i   (tx_valid_i),
    .s_ready_o   (tx_ready_o),
    .txd_o       (txd),
    .tx_en_o     (tx_en),
    .tx_er_o     (tx_er),
    .underrun_o  (tx_underrun_o),
    .frame_sent_o(tx_frame_sent_o)
  );

  eth_mac_rx i_mac_rx (
    .clk_i     (phy_rxc_i),
    .rst_ni    (rx_rst_ni),
    .rx_en_i   (rx_en_i),
    .rxd_i     (rxd),
    .rx_dv_i   (rx_dv),
    .rx_er_i   (rx_er),
    .m_data_o  (rx_data_o),
    .m_valid_o (rx_valid_o),
    .m_ready_i (rx_ready_i),
    .frame_ok_o(rx_frame_ok_o),
    .fcs_err_o (rx_fcs_err_o),
    .overflow_o(rx_overflow_o)
  );

  rgmii_phy_if i_phy_if (
    .tx_clk_i    (tx_clk_i),
    .tx_rst_ni   (tx_rst_ni),
    .txd_i       (txd),
    .tx_en_i     (tx_en),
    .tx_er_i     (tx_er),
    .phy_txc_o   (phy_txc_o),
    .phy_txd_o   (phy_txd_o),
    .phy_tx_ctl_o(phy_tx_ctl_o),
    .phy_rxc_i   (phy_rxc_i),
    .rx_rst_ni   (rx_rst_ni),
    .phy_rxd_i   (phy_rxd_i),
    .phy_rx_ctl_i(phy_rx_ctl_i),
    .rxd_o       (rxd),
    .rx_dv_o     (rx_dv),
    .rx_er_o     (rx_er)
  );
endmodule

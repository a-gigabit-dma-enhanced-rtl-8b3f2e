// rgmii_phy_if: RGMII pin interface (4-bit double data rate at 125 MHz).
//
// Transmit: the MAC's byte bus (txd, tx_en, tx_er) is registered on the
// rising edge of the 125 MHz clock; bits [3:0] are driven while the clock is
// high and bits [7:4] while it is low, the latter re-registered on the
// falling edge so that each half-cycle comes from a flop. TX_CTL carries
// tx_en in the high phase and tx_en XOR tx_er in the low phase, as RGMII
// defines. The transmit clock is forwarded unshifted; the PHY is expected
// to add the 2 ns clock-to-data skew (RGMII-ID mode). That, and building the
// DDR output from two flops and a clock-selected multiplexer instead of a
// technology's DDR cell, are this design's choices.
//
// Receive: RXD and RX_CTL are sampled on both edges of the PHY's receive
// clock (low nibble and RX_DV on the rising edge, high nibble and
// RX_DV XOR RX_ER on the falling edge) and presented as one byte per rising
// edge, one receive cycle after the rising edge that sampled the low nibble.
module rgmii_phy_if (
  // transmit, 125 MHz domain
  input  logic       tx_clk_i,
  input  logic       tx_rst_ni,
  input  logic [7:0] txd_i,
  input  logic       tx_en_i,
  input  logic       tx_er_i,
  output logic       phy_txc_o,
  output logic [3:0] phy_txd_o,
  output logic       phy_tx_ctl_o,
  // receive, PHY clock domain
  input  logic       phy_rxc_i,
  input  logic       rx_rst_ni,
  input  logic [3:0] phy_rxd_i,
  input  logic       phy_rx_ctl_i,
  output logic [7:0] rxd_o,
  output logic       rx_dv_o,
  output logic       rx_er_o
);
  // ---------------------------------------------------------------- transmit
  logic [3:0] lo_q, hi_q, hi_n;
  logic       ctl_r_q, ctl_f_q, ctl_f_n;

  always_ff @(posedge tx_clk_i or negedge tx_rst_ni) begin
    if (!tx_rst_ni) begin
      lo_q    <= '0;
      hi_q    <= '0;
      ctl_r_q <= 1'b0;
      ctl_f_q <= 1'b0;
    end else begin
      lo_q    <= txd_i[3:0];
      hi_q    <= txd_i[7:4];
      ctl_r_q <= tx_en_i;
      ctl_f_q <= tx_en_i ^ tx_er_i;
    end
  end

  always_ff @(negedge tx_clk_i or negedge tx_rst_ni) begin
    if (!tx_rst_ni) begin
      hi_n    <= '0;
      ctl_f_n <= 1'b0;
    end else begin
      hi_n    <= hi_q;
      ctl_f_n <= ctl_f_q;
    end
  end

  assign phy_txc_o    = tx_clk_i;
  assign phy_txd_o    = tx_clk_i ? lo_q : hi_n;
  assign phy_tx_ctl_o = tx_clk_i ? ctl_r_q : ctl_f_n;

  // ---------------------------------------------------------------- receive
  logic [3:0] rx_lo_q, rx_hi_n;
  logic       rx_ctl_r_q, rx_ctl_f_n;

  always_ff @(posedge phy_rxc_i or negedge rx_rst_ni) begin
    if (!rx_rst_ni) begin
      rx_lo_q    <= '0;
      rx_ctl_r_q <= 1'b0;
      rxd_o      <= '0;
      rx_dv_o    <= 1'b0;
      rx_er_o    <= 1'b0;
    end else begin
      rx_lo_q    <= phy_rxd_i;
      rx_ctl_r_q <= phy_rx_ctl_i;
      rxd_o      <= {rx_hi_n, rx_lo_q};
      rx_dv_o    <= rx_ctl_r_q;
      rx_er_o    <= rx_ctl_r_q ^ rx_ctl_f_n;
    end
  end

  always_ff @(negedge phy_rxc_i or negedge rx_rst_ni) begin
    if (!rx_rst_ni) begin
      rx_hi_n    <= '0;
      rx_ctl_f_n <= 1'b0;
    end else begin
      rx_hi_n    <= phy_rxd_i;
      rx_ctl_f_n <= phy_rx_ctl_i;
    end
  end
endmodule

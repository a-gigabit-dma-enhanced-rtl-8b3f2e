// tb_rgmii_phy_if: checks the RGMII double-data-rate pins.
//
// Transmit: random bytes with tx_en / tx_er are put on the byte bus; a PHY
// model samples TXD and TX_CTL 2 ns after each TXC edge (as an RGMII-ID PHY
// does) and must find bits [3:0] after the rising edge, bits [7:4] after the
// falling edge, TX_EN on TX_CTL in the high phase and TX_EN XOR TX_ER in the
// low phase, one clock after the byte was presented.
// Receive: a PHY model drives nibbles centred on the edges of its own RXC;
// the byte bus must return each byte with RX_DV and RX_ER decoded.
//
// The DDR nibble order and TX_CTL encoding follow the RGMII
// specification; the 2 ns sampling delay models an RGMII-ID PHY.
`timescale 1ns/1ps
module tb_rgmii_phy_if;
  logic tclk = 0, rxc = 0, rst_n = 1;
  always #4 tclk = ~tclk;
  initial begin #1.7; forever #4 rxc = ~rxc; end

  logic [7:0] txd, rxd_o;
  logic tx_en, tx_er, txc, tx_ctl, rx_ctl, rx_dv, rx_er;
  logic [3:0] ptxd, prxd;

  rgmii_phy_if dut (
    .tx_clk_i(tclk), .tx_rst_ni(rst_n), .txd_i(txd), .tx_en_i(tx_en), .tx_er_i(tx_er),
    .phy_txc_o(txc), .phy_txd_o(ptxd), .phy_tx_ctl_o(tx_ctl),
    .phy_rxc_i(rxc), .rx_rst_ni(rst_n), .phy_rxd_i(prxd), .phy_rx_ctl_i(rx_ctl),
    .rxd_o(rxd_o), .rx_dv_o(rx_dv), .rx_er_o(rx_er)
  );

  int checks = 0, failures = 0;
  task automatic check(bit c, string what);
    checks++;
    if (!c) begin failures++; $display("FAIL: %s", what); end
  endtask

  typedef struct packed { logic [7:0] d; logic en; logic er; } sym_t;
  sym_t tx_sent[$], tx_seen[$], rx_sent[$], rx_seen[$];

  // PHY transmit sampler
  logic [3:0] lo; logic ctl_r;
  always @(posedge txc) begin #2; lo = ptxd; ctl_r = tx_ctl; end
  always @(negedge txc) begin
    #2;
    if (rst_n) tx_seen.push_back('{d: {ptxd, lo}, en: ctl_r, er: ctl_r ^ tx_ctl});
  end

  // receive byte bus monitor
  always @(posedge rxc) if (rst_n) rx_seen.push_back('{d: rxd_o, en: rx_dv, er: rx_er});

  initial begin
    repeat (20000) @(posedge tclk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // transmit stimulus
  initial begin
    txd = 0; tx_en = 0; tx_er = 0; prxd = 0; rx_ctl = 0;
    #0.5 rst_n = 0;
    #20 rst_n = 1;
    @(posedge tclk); #0.1;
    tx_seen.delete();
    for (int i = 0; i < 300; i++) begin
      sym_t v;
      v = '{d: 8'($urandom), en: ($urandom_range(4) != 0), er: ($urandom_range(9) == 0)};
      txd = v.d; tx_en = v.en; tx_er = v.er;
      tx_sent.push_back(v);
      @(posedge tclk); #0.1;
    end
    txd = 0; tx_en = 0; tx_er = 0;
  end

  // receive stimulus: data changes 1 ns after each RXC edge
  initial begin
    sym_t v;
    @(posedge rst_n);
    repeat (3) @(posedge rxc);
    for (int i = 0; i < 300; i++) begin
      v = '{d: 8'($urandom), en: ($urandom_range(4) != 0), er: ($urandom_range(9) == 0)};
      rx_sent.push_back(v);
      @(negedge rxc); #1; prxd = v.d[3:0]; rx_ctl = v.en;
      @(posedge rxc); #1; prxd = v.d[7:4]; rx_ctl = v.en ^ v.er;
    end
    @(negedge rxc); #1; prxd = 0; rx_ctl = 0;
    repeat (10) @(posedge tclk);
    // transmit: the byte presented before rising edge k is seen in cycle k+1
    begin
      int off, n_ok;
      off = -1;
      for (int k = 0; k < 4 && off < 0; k++)
        if (tx_seen.size() > k + 299 && tx_seen[k] == tx_sent[0] && tx_seen[k+1] == tx_sent[1]) off = k;
      check(off >= 0 && off <= 2, $sformatf("transmit bytes appear on the pins (offset %0d)", off));
      n_ok = 0;
      if (off >= 0) for (int i = 0; i < 300; i++) n_ok += (tx_seen[off + i] == tx_sent[i]);
      check(n_ok == 300, $sformatf("transmit: %0d of 300 symbols correct (data, TX_EN, TX_ER)", n_ok));
    end
    begin
      int off, n_ok;
      off = -1;
      for (int k = 0; k < 8 && off < 0; k++)
        if (rx_seen.size() > k + 299 && rx_seen[k] == rx_sent[0] && rx_seen[k+1] == rx_sent[1]) off = k;
      check(off >= 0, "receive bytes appear on the byte bus");
      n_ok = 0;
      if (off >= 0) for (int i = 0; i < 300; i++) n_ok += (rx_seen[off + i] == rx_sent[i]);
      check(n_ok == 300, $sformatf("receive: %0d of 300 symbols correct (data, RX_DV, RX_ER)", n_ok));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

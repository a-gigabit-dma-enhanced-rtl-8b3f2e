// tb_eth_rgmii: checks the MAC with its RGMII pins in loopback.
//
// The transmit pins are wired to the receive pins (TXC drives RXC), so every
// frame the transmitter sends is received back. Random frames of 60 to 400
// bytes are streamed in at line rate; each must come out of the receive
// stream unchanged, with tlast on its last byte, tuser clear and a frame_ok
// pulse, and the transmitter must never underrun.
//
// Loopback, frame sizes and the 2 ns clock delay are this testbench's
// choices.
`timescale 1ns/1ps
module tb_eth_rgmii;
  import eth_pkg::*;

  logic clk = 0, rst_n = 1;
  always #4 clk = ~clk;

  axis_byte_t tx, rx;
  logic tx_valid, tx_ready, und, sent, rx_valid, ok, bad, ovf;
  logic txc, tx_ctl;
  logic [3:0] txd;
  logic [3:0] txd_d;
  logic txc_d, tx_ctl_d;
  // loopback: the clock is delayed 2 ns against the data, as an RGMII-ID
  // PHY would, which centres the data on the receive clock edges
  assign txd_d    = txd;
  assign tx_ctl_d = tx_ctl;
  assign #2 txc_d = txc;

  eth_rgmii dut (
    .tx_clk_i(clk), .tx_rst_ni(rst_n), .tx_data_i(tx), .tx_valid_i(tx_valid), .tx_ready_o(tx_ready),
    .tx_underrun_o(und), .tx_frame_sent_o(sent),
    .rx_rst_ni(rst_n), .rx_en_i(1'b1), .rx_data_o(rx), .rx_valid_o(rx_valid), .rx_ready_i(1'b1),
    .rx_frame_ok_o(ok), .rx_fcs_err_o(bad), .rx_overflow_o(ovf),
    .phy_txc_o(txc), .phy_txd_o(txd), .phy_tx_ctl_o(tx_ctl),
    .phy_rxc_i(txc_d), .phy_rxd_i(txd_d), .phy_rx_ctl_i(tx_ctl_d)
  );

  int checks = 0, failures = 0;
  task automatic check(bit c, string what);
    checks++;
    if (!c) begin failures++; $display("FAIL: %s", what); end
  endtask

  typedef byte unsigned bq_t[$];
  bq_t got[$];
  byte unsigned cur[$];
  int n_ok = 0, n_bad = 0, n_und = 0, n_user = 0;
  always @(posedge clk) begin
    if (rst_n) begin
      if (rx_valid) begin
        cur.push_back(rx.tdata);
        if (rx.tlast) begin got.push_back(cur); cur.delete(); if (rx.tuser) n_user++; end
      end
      if (ok) n_ok++;
      if (bad) n_bad++;
      if (und) begin n_und++; if (n_und < 3) $display("underrun at %0t state=%0d valid=%0b", $time, dut.i_mac_tx.state_q, tx_valid); end
    end
  end

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    bq_t sent_q[$];
    tx = '0; tx_valid = 0;
    #1 rst_n = 0;
    #20 rst_n = 1;
    repeat (4) @(posedge clk); #0.1;
    for (int f = 0; f < 8; f++) begin
      bq_t pl;
      int n;
      pl.delete();
      n = $urandom_range(60, 400);
      for (int i = 0; i < n; i++) pl.push_back(8'($urandom));
      sent_q.push_back(pl);
      foreach (pl[i]) begin
        bit hs;
        tx = '{tdata: pl[i], tlast: (i == n - 1), tuser: 1'b0};
        tx_valid = 1;
        do begin @(negedge clk); hs = tx_ready; @(posedge clk); end while (!hs);
        #0.1;
      end
      tx_valid = 0;
    end
    repeat (60) @(posedge clk);
    check(got.size() == 8, $sformatf("%0d of 8 frames received", got.size()));
    for (int f = 0; f < 8 && f < got.size(); f++)
      check(got[f] == sent_q[f], $sformatf("frame %0d comes back unchanged (%0d/%0d bytes)", f, got[f].size(), sent_q[f].size()));
    check(n_ok == 8 && n_bad == 0 && n_user == 0, "all FCS good");
    check(n_und == 0, "no underrun at line rate");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

// tb_eth_mac_rx: checks the MAC receiver on its byte bus.
//
// Drives frames (preamble, SFD, payload, FCS from a reference CRC) on the
// GMII-style inputs and checks the output stream: the payload only, tlast on
// its last byte, tuser clear and frame_ok pulsed for a good frame; tuser and
// fcs_err for a frame with a flipped FCS bit or with rx_er raised. A frame
// sent with rx_en low must produce nothing. A frame received while the
// stream is not ready must report overflow.
//
// Expected behaviour follows IEEE 802.3 framing and this design's handling
// of bad frames and overflow.
`timescale 1ns/1ps
module tb_eth_mac_rx;
  import eth_pkg::*;
  import tb_eth_util::*;

  logic clk = 0, rst_n = 1;
  always #4 clk = ~clk;

  logic [7:0] rxd;
  logic rx_dv, rx_er, rx_en, m_valid, m_ready, ok, bad, ovf;
  axis_byte_t m;

  eth_mac_rx dut (
    .clk_i(clk), .rst_ni(rst_n), .rx_en_i(rx_en), .rxd_i(rxd), .rx_dv_i(rx_dv), .rx_er_i(rx_er),
    .m_data_o(m), .m_valid_o(m_valid), .m_ready_i(m_ready),
    .frame_ok_o(ok), .fcs_err_o(bad), .overflow_o(ovf)
  );

  int checks = 0, failures = 0;
  task automatic check(bit c, string what);
    checks++;
    if (!c) begin failures++; $display("FAIL: %s", what); end
  endtask

  byte unsigned got[$];
  int n_last = 0, last_user = 0, n_ok = 0, n_bad = 0, n_ovf = 0;
  always @(posedge clk) begin
    if (rst_n) begin
      if (m_valid && m_ready) begin
        got.push_back(m.tdata);
        if (m.tlast) begin n_last++; last_user = m.tuser; end
      end
      if (ok) n_ok++;
      if (bad) n_bad++;
      if (ovf) n_ovf++;
    end
  end

  task automatic send(bytes_t pl, bit flip_fcs, int er_at);
    bytes_t fr;
    logic [31:0] fcs;
    fcs = ref_crc32(pl) ^ (flip_fcs ? 32'h8000_0000 : 32'h0);
    for (int i = 0; i < 7; i++) fr.push_back(8'h55);
    fr.push_back(8'hD5);
    foreach (pl[i]) fr.push_back(pl[i]);
    for (int i = 0; i < 4; i++) fr.push_back(fcs[8*i +: 8]);
    foreach (fr[i]) begin
      rxd = fr[i]; rx_dv = 1; rx_er = (i == er_at);
      @(posedge clk); #0.1;
    end
    rx_dv = 0; rx_er = 0; rxd = 0;
    repeat (12) @(posedge clk);
    #0.1;
  endtask

  function automatic bytes_t rnd(int n);
    bytes_t q;
    for (int i = 0; i < n; i++) q.push_back(8'($urandom));
    return q;
  endfunction

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    bytes_t pl;
    rxd = 0; rx_dv = 0; rx_er = 0; rx_en = 1; m_ready = 1;
    #1 rst_n = 0;
    #20 rst_n = 1;
    @(posedge clk); #0.1;
    for (int f = 0; f < 5; f++) begin
      pl = rnd($urandom_range(1, 200));
      got.delete();
      send(pl, 0, -1);
      check(got == pl, $sformatf("good frame %0d: payload out, FCS stripped (%0d/%0d bytes)", f, got.size(), pl.size()));
      check(n_last == f + 1 && last_user == 0 && n_ok == f + 1, "good frame: tlast, tuser clear, frame_ok");
    end
    pl = rnd(64);
    got.delete();
    send(pl, 1, -1);
    check(got == pl && last_user == 1 && n_bad == 1, "flipped FCS bit: tuser and fcs_err");
    got.delete();
    send(pl, 0, 30);
    check(last_user == 1 && n_bad == 2 && n_ok == 5, "rx_er in frame: tuser and fcs_err");
    rx_en = 0;
    got.delete();
    send(pl, 0, -1);
    check(got.size() == 0 && n_ok == 5, "rx_en low: frame ignored");
    rx_en = 1;
    m_ready = 0;
    send(pl, 0, -1);
    check(n_ovf == 64, $sformatf("not ready: %0d bytes lost reported, expected 64", n_ovf));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

// tb_eth_mac_tx: checks the MAC transmitter on its byte bus.
//
// Frames of 60 to 300 random bytes are offered at line rate. For each the
// bus must show, in consecutive tx_en cycles, 7 x 0x55, 0xD5 (8 preamble
// cycles), the payload (one cycle per byte) and the 4-byte FCS of a
// reference CRC (4 cycles), then at least 12 idle cycles before the next
// frame. One frame has a hole in its byte stream: the transmitter must drive
// tx_er and pulse underrun_o for it.
//
// The 8 + N + 4 cycle count matches the preamble, payload and CRC phases of
// the published measurements; the frame format is IEEE 802.3.
`timescale 1ns/1ps
module tb_eth_mac_tx;
  import eth_pkg::*;
  import tb_eth_util::*;

  logic clk = 0, rst_n = 1;
  always #4 clk = ~clk;

  axis_byte_t s;
  logic s_valid, s_ready, tx_en, tx_er, underrun, sent;
  logic [7:0] txd;

  eth_mac_tx dut (
    .clk_i(clk), .rst_ni(rst_n), .s_data_i(s), .s_valid_i(s_valid), .s_ready_o(s_ready),
    .txd_o(txd), .tx_en_o(tx_en), .tx_er_o(tx_er), .underrun_o(underrun), .frame_sent_o(sent)
  );

  int checks = 0, failures = 0;
  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  // bus monitor
  byte unsigned cur[$];
  bytes_t frames[$];
  int idle_run = 100, min_gap = 1000, n_er = 0, n_underrun = 0, n_sent = 0;
  always @(posedge clk) begin
    if (rst_n) begin
      if (tx_en) begin
        if (cur.size() == 0 && frames.size() > 0 && idle_run < min_gap) min_gap = idle_run;
        cur.push_back(txd);
        idle_run = 0;
        if (tx_er) n_er++;
      end else begin
        if (cur.size() > 0) begin
          frames.push_back(cur);
          cur.delete();
        end
        idle_run++;
      end
      if (underrun) n_underrun++;
      if (sent) n_sent++;
    end
  end

  task automatic offer(bytes_t pl, int hole_at);
    foreach (pl[i]) begin
      bit hs;
      if (i == hole_at) begin
        s_valid = 0;
        repeat (3) @(posedge clk);
        #0.1;
      end
      s = '{tdata: pl[i], tlast: (i == pl.size() - 1), tuser: 1'b0};
      s_valid = 1;
      do begin
        @(negedge clk);
        hs = s_ready;
        @(posedge clk);
      end while (!hs);
      #0.1;
    end
    s_valid = 0;
  endtask

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    bytes_t pls[$];
    s = '0; s_valid = 0;
    #1 rst_n = 0;
    #20 rst_n = 1;
    @(posedge clk); #0.1;
    for (int f = 0; f < 6; f++) begin
      bytes_t pl;
      int n;
      pl.delete();
      n = $urandom_range(60, 300);
      for (int i = 0; i < n; i++) pl.push_back(8'($urandom));
      pls.push_back(pl);
      offer(pl, f == 5 ? 20 : -1);
    end
    repeat (30) @(posedge clk);
    check(frames.size() == 6, $sformatf("%0d frames on the bus", frames.size()));
    for (int f = 0; f < 5 && f < frames.size(); f++) begin
      bytes_t fr, pl;
      logic [31:0] fcs;
      bit ok;
      fr = frames[f];
      pl = pls[f];
      fcs = ref_crc32(pl);
      check(fr.size() == 8 + pl.size() + 4,
            $sformatf("frame %0d: %0d tx_en cycles, expected 8+%0d+4", f, fr.size(), pl.size()));
      ok = 1;
      for (int i = 0; i < 7; i++) ok &= fr[i] == 8'h55;
      check(ok && fr[7] == 8'hD5, "preamble and SFD");
      ok = 1;
      foreach (pl[i]) ok &= fr[8 + i] == pl[i];
      check(ok, $sformatf("frame %0d payload", f));
      ok = 1;
      for (int i = 0; i < 4; i++) ok &= fr[8 + pl.size() + i] == fcs[8*i +: 8];
      check(ok, $sformatf("frame %0d FCS", f));
    end
    check(min_gap >= 12, $sformatf("inter-frame gap %0d >= 12", min_gap));
    check(n_er == 3 && n_underrun == 3, $sformatf("hole of 3 cycles: tx_er %0d, underrun %0d", n_er, n_underrun));
    check(n_sent == 6, "frame_sent pulses");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

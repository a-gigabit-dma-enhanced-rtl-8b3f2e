// tb_eth_idma_top: end-to-end test of the Ethernet controller at its
// default parameters.
//
// The testbench plays the system (register bus writes, an AXI4 memory with
// random backpressure, a 344 MHz system clock) and the PHY (an RGMII
// receiver that decodes the transmit pins 2 ns, a quarter clock, after each
// edge, and an RGMII transmitter on its own 125 MHz clock that drives
// received frames). It runs:
//   1. transmits of 256, 512 and 1024 payload bytes (the sizes the
//      controller is evaluated with, plus 2048) from an unaligned buffer that crosses a
//      4 KiB boundary; every frame is decoded from the pins and checked byte
//      for byte, its FCS against a reference CRC, and its phases timed: 8
//      cycles of preamble+SFD, one cycle per payload byte, 4 FCS cycles;
//   2. receives of 256, 512, 1024 and 2048-byte frames into an unaligned buffer
//      programmed for 2048 bytes (the frame ends the transfer early);
//   3. a received frame with a corrupted FCS (FRAME_ERR, FCS_ERR);
//   4. an unaligned memory-to-memory copy through the iDMA;
//   5. a transmit from a memory slowed down until the line runs dry
//      (TX_UNDERRUN);
//   6. a frame arriving with no receive transfer running (RX_OVERFLOW).
// Each mechanism is counted; one that never happens is a failure.
//
// The payload sizes and the preamble/payload/CRC phase split come from the
// controller's published latency evaluation; the other scenarios exercise
// mechanisms of this implementation. All top parameters stay at their
// defaults.
`timescale 1ns/1ps
module tb_eth_idma_top;
  import eth_pkg::*;
  import tb_eth_util::*;

  localparam int unsigned NB = AxiStrbWidth;

  logic clk = 0, clk_125 = 0, rxc = 0, rst_n = 1;
  always #1.453 clk = ~clk;      // 344 MHz system clock, the evaluated frequency
  always #4.0 clk_125 = ~clk_125;
  initial begin
    #1.3;
    forever #4.0 rxc = ~rxc;     // PHY receive clock, own phase
  end

  axi_req_t axi_req;
  axi_rsp_t axi_rsp;
  reg_req_t reg_req;
  reg_rsp_t reg_rsp;
  logic     irq, txc, tx_ctl, rx_ctl;
  logic [3:0] txd, rxd;

  eth_idma_top dut (
    .clk_i       (clk),
    .rst_ni      (rst_n),
    .clk_125_i   (clk_125),
    .axi_req_o   (axi_req),
    .axi_rsp_i   (axi_rsp),
    .reg_req_i   (reg_req),
    .reg_rsp_o   (reg_rsp),
    .irq_o       (irq),
    .phy_txc_o   (txc),
    .phy_txd_o   (txd),
    .phy_tx_ctl_o(tx_ctl),
    .phy_rxc_i   (rxc),
    .phy_rxd_i   (rxd),
    .phy_rx_ctl_i(rx_ctl)
  );

  axi_mem_model #(.MEM_BYTES(65536), .STALL_PCT(20)) mem (
    .clk_i(clk), .rst_ni(rst_n), .req_i(axi_req), .rsp_o(axi_rsp)
  );

  int checks = 0, failures = 0;
  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  // ---------------------------------------------------------------- mechanism counters
  int n_tx_frames = 0, n_rx_frames = 0, n_early_end = 0, n_fcs_err = 0;
  int n_overflow = 0, n_underrun = 0, n_split = 0, n_realign = 0;
  int n_memcpy = 0, n_fifo_full = 0, n_axi_stall = 0;

  always @(posedge clk) begin
    // a partial source word enters the iDMA realignment buffer
    if (dut.i_idma.i_transport.push_valid && dut.i_idma.i_transport.push_ready &&
        dut.i_idma.i_transport.push_mask != '1)
      n_realign++;
    if (dut.tx_wide_valid && !dut.tx_wide_ready) n_fifo_full++;
  end

  // ---------------------------------------------------------------- register bus
  task automatic reg_write(logic [7:0] addr, logic [31:0] data, bit expect_err = 0);
    @(negedge clk);
    reg_req = '{addr: 32'(addr), write: 1'b1, wdata: data, wstrb: 4'hF, valid: 1'b1};
    #0.1;
    check(reg_rsp.ready && reg_rsp.error == expect_err, $sformatf("reg write %02x error=%0b", addr, reg_rsp.error));
    @(posedge clk);
    #0.1 reg_req = '0;
  endtask

  task automatic reg_read(logic [7:0] addr, output logic [31:0] data);
    @(negedge clk);
    reg_req = '{addr: 32'(addr), write: 1'b0, wdata: '0, wstrb: 4'h0, valid: 1'b1};
    #0.1;
    data = reg_rsp.rdata;
    @(posedge clk);
    #0.1 reg_req = '0;
  endtask

  task automatic start_dma(longint unsigned src, longint unsigned dst, int unsigned len,
                           proto_e sp, proto_e dp);
    reg_write(8'h08, src[31:0]);
    reg_write(8'h0C, src[63:32]);
    reg_write(8'h10, dst[31:0]);
    reg_write(8'h14, dst[63:32]);
    reg_write(8'h18, len);
    reg_write(8'h1C, {28'h0, 2'(dp), 2'(sp)});
    reg_write(8'h20, 32'h1);
  endtask

  task automatic wait_done(int unsigned max_cycles);
    int unsigned n;
    n = 0;
    while (!irq && n < max_cycles) begin
      @(posedge clk);
      n++;
    end
    check(irq, "transfer completes (DONE interrupt)");
  endtask

  // ---------------------------------------------------------------- PHY side: transmit decoder
  // RGMII-ID: the PHY samples 2 ns after each edge of TXC.
  byte unsigned tx_frame[$];
  int  tx_phase_pre, tx_phase_total, tx_er_seen;
  bit  tx_in_frame = 0;
  int  tx_frames_seen = 0;
  logic [3:0] t_lo;
  logic       t_ctl_r;
  always @(posedge txc) begin
    #2;
    t_lo    = txd;
    t_ctl_r = tx_ctl;
  end
  always @(negedge txc) begin
    logic [7:0] b;
    logic       er;
    #2;
    b  = {txd, t_lo};
    er = t_ctl_r ^ tx_ctl;
    if (t_ctl_r) begin
      if (!tx_in_frame) begin
        tx_in_frame    = 1;
        tx_frame.delete();
        tx_phase_total = 0;
        tx_er_seen     = 0;
      end
      tx_frame.push_back(b);
      tx_phase_total++;
      if (er) tx_er_seen++;
    end else if (tx_in_frame) begin
      tx_in_frame = 0;
      tx_frames_seen++;
    end
  end

  // ---------------------------------------------------------------- PHY side: receive driver
  task automatic phy_send(byte unsigned payload[$], bit corrupt);
    byte unsigned fr[$];
    logic [31:0] fcs;
    fcs = ref_crc32(payload);
    if (corrupt) fcs ^= 32'h0000_0100;
    for (int i = 0; i < 7; i++) fr.push_back(8'h55);
    fr.push_back(8'hD5);
    foreach (payload[i]) fr.push_back(payload[i]);
    for (int i = 0; i < 4; i++) fr.push_back(fcs[8*i +: 8]);
    foreach (fr[i]) begin
      @(negedge rxc); #1; rxd = fr[i][3:0]; rx_ctl = 1'b1;
      @(posedge rxc); #1; rxd = fr[i][7:4]; rx_ctl = 1'b1;
    end
    @(negedge rxc); #1; rxd = '0; rx_ctl = 1'b0;
    repeat (16) @(posedge rxc);
  endtask

  function automatic bytes_t rand_bytes(int n);
    bytes_t q;
    for (int i = 0; i < n; i++) q.push_back(8'($urandom));
    return q;
  endfunction

  logic [31:0] rd;

  task automatic clear_status();
    reg_write(8'h04, 32'hFE);
  endtask

  // ---------------------------------------------------------------- one transmit
  task automatic do_tx(int unsigned len, longint unsigned src, bit expect_underrun);
    bytes_t pl;
    int n_before, cfg_cycles;
    logic [31:0] fcs;
    bit ok;
    pl = rand_bytes(len);
    foreach (pl[i]) mem.mem[(src + i) % 65536] = pl[i];
    n_before = tx_frames_seen;
    clear_status();
    start_dma(src, 0, len, ProtoAxi, ProtoAxis);
    cfg_cycles = 0;
    while (!tx_in_frame && cfg_cycles < 100000) begin
      @(posedge clk_125);
      cfg_cycles++;
    end
    wait_done(200000);
    while (tx_frames_seen == n_before) @(posedge clk_125);
    reg_read(8'h04, rd);
    if (expect_underrun) begin
      check(rd[6] && tx_er_seen > 0, "slow memory: TX_UNDERRUN reported and TX_ER driven");
      if (rd[6]) n_underrun++;
      return;
    end
    check(rd[6] == 0 && tx_er_seen == 0, $sformatf("tx %0d: no underrun at line rate", len));
    check(tx_frame.size() == len + 12, $sformatf("tx %0d: frame is %0d cycles, expected %0d",
                                                 len, tx_frame.size(), len + 12));
    ok = 1;
    for (int i = 0; i < 7; i++) ok &= (tx_frame[i] == 8'h55);
    check(ok && tx_frame[7] == 8'hD5, "tx: 7 preamble bytes and SFD (8 cycles)");
    ok = 1;
    for (int i = 0; i < int'(len); i++) ok &= (tx_frame[8 + i] == pl[i]);
    check(ok, $sformatf("tx %0d: payload on the wire equals memory", len));
    fcs = ref_crc32(pl);
    ok = 1;
    for (int i = 0; i < 4; i++) ok &= (tx_frame[8 + len + i] == fcs[8*i +: 8]);
    check(ok, $sformatf("tx %0d: 4-cycle FCS matches reference CRC", len));
    $display("tx %0d bytes: config-to-preamble %0d cycles, preamble 8, payload %0d, crc 4, total %0d",
             len, cfg_cycles, len, cfg_cycles + len + 12);
    n_tx_frames++;
  endtask

  // ---------------------------------------------------------------- one receive
  task automatic do_rx(int unsigned len, longint unsigned dst, bit corrupt);
    bytes_t pl;
    bit ok;
    pl = rand_bytes(len);
    for (int i = 0; i < int'(len) + 16; i++) mem.mem[(dst + i) % 65536] = 8'hEE;
    clear_status();
    start_dma(0, dst, 2048, ProtoAxis, ProtoAxi);
    phy_send(pl, corrupt);
    wait_done(200000);
    reg_read(8'h24, rd);
    check(rd == len, $sformatf("rx %0d: BYTES = %0d", len, rd));
    if (rd < 2048) n_early_end++;
    ok = 1;
    for (int i = 0; i < int'(len); i++) ok &= (mem.mem[(dst + i) % 65536] == pl[i]);
    for (int i = 0; i < 16; i++) ok &= (mem.mem[(dst + len + i) % 65536] == 8'hEE);
    check(ok, $sformatf("rx %0d: memory holds the payload and nothing past it", len));
    reg_read(8'h04, rd);
    if (corrupt) begin
      check(rd[3] && rd[4] && !rd[7], "bad FCS: FRAME_ERR and FCS_ERR set, RX_FRAME clear");
      if (rd[4]) n_fcs_err++;
    end else begin
      check(!rd[3] && !rd[4] && rd[7] && !rd[5], $sformatf("rx %0d: good frame, no error", len));
      n_rx_frames++;
    end
  endtask

  // ---------------------------------------------------------------- watchdog
  initial begin
    repeat (3_000_000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ---------------------------------------------------------------- sequence
  initial begin
    bytes_t src_pl;
    bit ok;
    int unsigned ar_before;
    reg_req = '0;
    rxd = '0;
    rx_ctl = 0;
    #0.5 rst_n = 0;                    // asynchronous reset edge
    repeat (10) @(posedge clk);
    rst_n = 1;
    repeat (10) @(posedge clk);

    reg_write(8'h00, 32'h3);           // RX_EN, IRQ_EN
    reg_read(8'h00, rd);
    check(rd == 32'h3, "CTRL reads back");
    reg_write(8'h30, 32'h0, 1);        // unmapped address -> error

    // 1. transmits from unaligned buffers, two of them across a 4 KiB boundary
    ar_before = mem.ar_bursts;
    do_tx(256, 64'h0000_0F83, 0);
    if (mem.ar_bursts - ar_before >= 2) n_split++;
    do_tx(512, 64'h0000_2E05, 0);
    ar_before = mem.ar_bursts;
    do_tx(1024, 64'h0000_3D01, 0);
    if (mem.ar_bursts - ar_before >= 2) n_split++;
    // the 2048-byte payload a 1536-byte frame buffer could not hold
    do_tx(2048, 64'h0000_4F81, 0);

    // 2. receives, early end of a 2048-byte transfer
    do_rx(256, 64'h0000_8003, 0);
    do_rx(512, 64'h0000_9FF6, 0);
    do_rx(1024, 64'h0000_A005, 0);
    do_rx(2048, 64'h0000_E003, 0);
    reg_read(8'h28, rd);
    check(rd == 4, $sformatf("RX_FRAMES = %0d", rd));
    reg_read(8'h2C, rd);
    check(rd == 4, $sformatf("TX_FRAMES = %0d", rd));

    // 3. bad FCS
    do_rx(100, 64'h0000_B000, 1);

    // 4. memory-to-memory copy, unaligned both sides
    src_pl = rand_bytes(300);
    foreach (src_pl[i]) mem.mem[16'hC003 + i] = src_pl[i];
    clear_status();
    start_dma(64'hC003, 64'hD00E, 300, ProtoAxi, ProtoAxi);
    wait_done(100000);
    ok = 1;
    foreach (src_pl[i]) ok &= (mem.mem[16'hD00E + i] == src_pl[i]);
    check(ok && mem.mem[16'hD00D] == 0 && mem.mem[16'hD00E + 300] == 0, "memcpy 300 bytes unaligned");
    if (ok) n_memcpy++;
    // zero-length request: answered at once with BYTES = 0
    clear_status();
    reg_write(8'h18, 32'h0);
    reg_write(8'h20, 32'h1);
    wait_done(1000);
    reg_read(8'h24, rd);
    check(rd == 0, "zero-length transfer reports 0 bytes");

    // 5. slow memory: the transmit runs dry
    mem.stall_pct = 97;
    do_tx(128, 64'h0000_1000, 1);
    mem.stall_pct = 20;

    // 6. frame arriving with no receive transfer: the RX FIFO overflows
    clear_status();
    phy_send(rand_bytes(256), 0);
    repeat (20) @(posedge clk);
    reg_read(8'h04, rd);
    check(rd[5], "frame with no receive transfer: RX_OVERFLOW");
    if (rd[5]) n_overflow++;

    n_axi_stall = mem.stall_cycles;
    check(mem.violations == 0, $sformatf("AXI rule violations: %0d", mem.violations));
    check(mem.max_beats <= 256, "bursts of at most 256 beats");

    $display("mechanisms: tx=%0d rx=%0d early_end=%0d fcs_err=%0d overflow=%0d underrun=%0d",
             n_tx_frames, n_rx_frames, n_early_end, n_fcs_err, n_overflow, n_underrun);
    $display("            4k_split=%0d realign=%0d memcpy=%0d fifo_full=%0d axi_stall=%0d",
             n_split, n_realign, n_memcpy, n_fifo_full, n_axi_stall);
    check(n_tx_frames == 4, "mechanism: transmit");
    check(n_rx_frames == 4, "mechanism: receive");
    check(n_early_end > 0, "mechanism: receive ends at frame end");
    check(n_fcs_err > 0, "mechanism: FCS error detection");
    check(n_overflow > 0, "mechanism: RX overflow");
    check(n_underrun > 0, "mechanism: TX underrun");
    check(n_split > 0, "mechanism: legalizer splits at 4 KiB");
    check(n_realign > 0, "mechanism: realignment of partial words");
    check(n_memcpy > 0, "mechanism: AXI to AXI copy");
    check(n_fifo_full > 0, "mechanism: TX CDC FIFO backpressure");
    check(n_axi_stall > 0, "mechanism: AXI backpressure");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

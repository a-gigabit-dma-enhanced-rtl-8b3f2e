// tb_idma_backend: checks the iDMA engine on all its transfer kinds.
//
// The engine's AXI4 port talks to a memory model with random backpressure
// on every channel (which also checks the AXI4 burst rules); its
// AXI-Stream ports talk to a stream source and sink with random gaps and
// backpressure. 150 random transfers, each at a random byte alignment:
//   AXI -> AXI-Stream (transmit): the stream must carry exactly the memory
//     bytes, packed from lane 0, every beat full but the last, tlast on it;
//   AXI-Stream -> AXI (receive): a frame of F bytes into a transfer of
//     L >= F bytes; memory must hold the frame, the bytes around it must be
//     untouched, and the response must report F bytes and the frame's tuser;
//   AXI -> AXI (copy) with independent source and destination alignment;
//   zero length, answered at once.
//
// The transfer kinds (AXI4 to AXI-Stream and back) are those the iDMA of
// the controller must support; sizes and mixes are this testbench's.
`timescale 1ns/1ps
module tb_idma_backend;
  import eth_pkg::*;
  localparam int unsigned NB = AxiStrbWidth;
  localparam int unsigned MEM = 65536;

  logic clk = 0, rst_n = 1;
  always #2 clk = ~clk;

  idma_req_t  req;
  idma_rsp_t  rsp;
  logic       req_valid, req_ready, rsp_valid, rsp_ferr, busy;
  axi_req_t   axi_req;
  axi_rsp_t   axi_rsp;
  axis_wide_t rx, tx;
  logic       rx_valid, rx_ready, tx_valid, tx_ready;

  idma_backend dut (
    .clk_i(clk), .rst_ni(rst_n), .req_i(req), .req_valid_i(req_valid), .req_ready_o(req_ready),
    .rsp_o(rsp), .rsp_frame_err_o(rsp_ferr), .rsp_valid_o(rsp_valid), .busy_o(busy),
    .axi_req_o(axi_req), .axi_rsp_i(axi_rsp),
    .rx_data_i(rx), .rx_valid_i(rx_valid), .rx_ready_o(rx_ready),
    .tx_data_o(tx), .tx_valid_o(tx_valid), .tx_ready_i(tx_ready)
  );

  axi_mem_model #(.MEM_BYTES(MEM), .STALL_PCT(30)) mem (
    .clk_i(clk), .rst_ni(rst_n), .req_i(axi_req), .rsp_o(axi_rsp)
  );

  int checks = 0, failures = 0;
  task automatic check(bit c, string what);
    checks++;
    if (!c) begin failures++; if (failures < 10) $display("FAIL: %s", what); end
  endtask

  // ---------------------------------------------------------------- stream sink
  byte unsigned tx_got[$];
  int tx_beats_bad = 0, tx_lasts = 0;
  bit tx_seen_last = 0;
  always @(posedge clk) begin
    if (rst_n && tx_valid && tx_ready) begin
      int k;
      k = 0;
      for (int l = 0; l < NB; l++) if (tx.tkeep[l]) begin tx_got.push_back(tx.tdata[8*l +: 8]); k++; end
      if (tx.tkeep != strb_t'((1 << k) - 1)) tx_beats_bad++;   // packed from lane 0
      if (!tx.tlast && k != NB) tx_beats_bad++;                // only the last is short
      if (tx.tlast) tx_lasts++;
    end
    tx_ready <= ($urandom_range(3) != 0);
  end

  // ---------------------------------------------------------------- stream source
  axis_wide_t rx_q[$];
  always @(posedge clk) begin
    if (rst_n) begin
      if (rx_valid && rx_ready) void'(rx_q.pop_front());
      if (rx_valid && !rx_ready) ;            // hold
      else if (rx_q.size() > 0 && $urandom_range(3) != 0) begin
        rx_valid <= 1'b1;
        rx       <= (rx_valid && rx_ready) ? (rx_q.size() > 0 ? rx_q[0] : '0) : rx_q[0];
      end else rx_valid <= 1'b0;
      if (rx_valid && rx_ready && rx_q.size() == 0) rx_valid <= 1'b0;
    end
  end

  task automatic run(idma_req_t q, output idma_rsp_t r, output bit ferr);
    int n;
    req = q;
    req_valid = 1;
    check(req_ready, "ready when idle");
    @(posedge clk); #0.1;
    req_valid = 0;
    n = 0;
    while (!rsp_valid && n < 100000) begin @(posedge clk); #0.1; n++; end
    check(rsp_valid, "response arrives");
    r = rsp;
    ferr = rsp_ferr;
    @(posedge clk); #0.1;
    check(!rsp_valid && !busy, "single response pulse, idle after");
  endtask

  initial begin
    repeat (3_000_000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int n_tx = 0, n_rx = 0, n_cp = 0, n_early = 0;
    req = '0; req_valid = 0; rx = '0; rx_valid = 0; tx_ready = 0;
    #1 rst_n = 0;
    #10 rst_n = 1;
    @(posedge clk); #0.1;
    for (int t = 0; t < 150; t++) begin
      automatic int kind = t % 3;
      automatic int len = $urandom_range(1, 2500);
      automatic longint unsigned src = $urandom_range(0, 28000);
      automatic longint unsigned dst = 32768 + $urandom_range(0, 28000);
      automatic byte unsigned pl[$];
      idma_req_t q;
      idma_rsp_t r;
      bit ferr, ok;
      for (int i = 0; i < len; i++) pl.push_back(8'($urandom));
      q = '0;
      q.src_addr = src;
      q.dst_addr = dst;
      q.length = len;
      if (kind == 0) begin
        // transmit
        foreach (pl[i]) mem.mem[src + i] = pl[i];
        tx_got.delete();
        tx_lasts = 0;
        q.src_proto = ProtoAxi;
        q.dst_proto = ProtoAxis;
        run(q, r, ferr);
        repeat (2) @(posedge clk);
        #0.1;
        check(tx_got == pl, $sformatf("tx %0d bytes from %h: stream equals memory (%0d)", len, src, tx_got.size()));
        check(tx_lasts == 1 && tx_beats_bad == 0, "tx beats packed, one tlast");
        check(r.bytes == len && !r.error, "tx response");
        n_tx++;
      end else if (kind == 1) begin
        // receive a frame of F <= L bytes
        automatic int f = (t % 2) ? len : $urandom_range(1, len);
        automatic bit user = ($urandom_range(4) == 0);
        axis_wide_t b;
        for (int i = -8; i < len + 8; i++) mem.mem[dst + i] = 8'hA5;
        b = '0;
        for (int i = 0; i < f; i++) begin
          b.tdata[8*(i % NB) +: 8] = pl[i];
          b.tkeep[i % NB] = 1'b1;
          if (i % NB == NB - 1 || i == f - 1) begin
            b.tlast = (i == f - 1);
            b.tuser = b.tlast && user;
            rx_q.push_back(b);
            b = '0;
          end
        end
        q.src_proto = ProtoAxis;
        q.dst_proto = ProtoAxi;
        run(q, r, ferr);
        ok = 1;
        for (int i = 0; i < f; i++) ok &= (mem.mem[dst + i] == pl[i]);
        for (int i = -8; i < 0; i++) ok &= (mem.mem[dst + i] == 8'hA5);
        for (int i = f; i < len + 8; i++) ok &= (mem.mem[dst + i] == 8'hA5);
        check(ok, $sformatf("rx frame %0d into %0d at %h: memory exact", f, len, dst));
        check(r.bytes == f && ferr == user && !r.error, "rx response: bytes and frame error");
        if (f < len) n_early++;
        n_rx++;
      end else begin
        // copy
        foreach (pl[i]) mem.mem[src + i] = pl[i];
        mem.mem[dst - 1] = 8'h3C;
        mem.mem[dst + len] = 8'h3C;
        q.src_proto = ProtoAxi;
        q.dst_proto = ProtoAxi;
        run(q, r, ferr);
        ok = 1;
        foreach (pl[i]) ok &= (mem.mem[dst + i] == pl[i]);
        check(ok && mem.mem[dst - 1] == 8'h3C && mem.mem[dst + len] == 8'h3C,
              $sformatf("copy %0d bytes %h -> %h", len, src, dst));
        check(r.bytes == len && !r.error, "copy response");
        n_cp++;
      end
    end
    begin
      idma_req_t q;
      idma_rsp_t r;
      bit ferr;
      q = '0;
      run(q, r, ferr);
      check(r.bytes == 0, "zero-length transfer");
    end
    check(mem.violations == 0, $sformatf("AXI rule violations: %0d", mem.violations));
    check(n_early > 0, "frames shorter than the transfer were received");
    $display("tx %0d rx %0d copy %0d, AR bursts %0d, AW bursts %0d, stalls %0d",
             n_tx, n_rx, n_cp, mem.ar_bursts, mem.aw_bursts, mem.stall_cycles);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

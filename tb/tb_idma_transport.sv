// tb_idma_transport: checks the iDMA transport layer on its own.
//
// The testbench replaces the legalizer: it starts each transfer itself and
// feeds chunks of random size (never crossing 4 KiB, at most 256 words),
// often much smaller than a legalizer would make, with random gaps, so the
// read and write managers see many short bursts at odd alignments.
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
//
// The transfer kinds are those the controller needs; the chunking and
// randomisation are this testbench's.
`timescale 1ns/1ps
module tb_idma_transport;
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

  idma_chunk_t chunk;
  logic        chunk_valid, chunk_ready, start;
  len_t        rbytes;
  logic        rerr;

  idma_transport dut (
    .clk_i(clk), .rst_ni(rst_n), .start_i(start),
    .src_proto_i(req.src_proto), .dst_proto_i(req.dst_proto), .length_i(req.length),
    .chunk_i(chunk), .chunk_valid_i(chunk_valid), .chunk_ready_o(chunk_ready),
    .axi_req_o(axi_req), .axi_rsp_i(axi_rsp),
    .rx_data_i(rx), .rx_valid_i(rx_valid), .rx_ready_o(rx_ready),
    .tx_data_o(tx), .tx_valid_o(tx_valid), .tx_ready_i(tx_ready),
    .busy_o(busy), .done_o(rsp_valid), .bytes_o(rbytes), .error_o(rerr), .frame_err_o(rsp_ferr)
  );
  assign rsp.bytes = rbytes;
  assign rsp.error = rerr;
  assign req_ready = !busy;

  // chunk feeder
  task automatic feed(idma_req_t q);
    longint unsigned s, d, rem;
    s = q.src_addr; d = q.dst_addr; rem = q.length;
    while (rem > 0) begin
      longint unsigned sz, lim;
      bit hs;
      sz = $urandom_range(1, 600);
      if (sz > rem) sz = rem;
      lim = 4096 - s % 4096; if (q.src_proto == ProtoAxi && lim < sz) sz = lim;
      lim = 4096 - d % 4096; if (q.dst_proto == ProtoAxi && lim < sz) sz = lim;
      lim = 256 * NB - s % NB; if (lim < sz) sz = lim;
      lim = 256 * NB - d % NB; if (lim < sz) sz = lim;
      chunk = '{src_addr: s, dst_addr: d, bytes: 13'(sz), first: (rem == q.length), last: (sz == rem)};
      chunk_valid = 1;
      do begin @(negedge clk); hs = chunk_ready; @(posedge clk); end while (!hs);
      #0.1;
      chunk_valid = 0;
      if ($urandom_range(2) == 0) begin repeat ($urandom_range(1, 5)) @(posedge clk); #0.1; end
      if (q.src_proto == ProtoAxi) s += sz;
      if (q.dst_proto == ProtoAxi) d += sz;
      rem -= sz;
    end
  endtask

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
    check(req_ready, "idle before the transfer");
    if (q.length == 0) begin
      r = '0;
      ferr = 0;
      return;
    end
    start = 1;
    @(posedge clk); #0.1;
    start = 0;
    fork
      feed(q);
    join_none
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
    req = '0; req_valid = 0; start = 0; chunk = '0; chunk_valid = 0; rx = '0; rx_valid = 0; tx_ready = 0;
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
        if (!ok) for (int i = 0; i < f; i++) if (mem.mem[dst + i] != pl[i]) begin $display("first bad %0d", i); break; end
        check(r.bytes == f && ferr == user && !r.error, $sformatf("rx response: bytes %0d/%0d ferr %0d/%0d err %0d", r.bytes, f, ferr, user, r.error));
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
    check(mem.violations == 0, $sformatf("AXI rule violations: %0d", mem.violations));
    check(n_early > 0, "frames shorter than the transfer were received");
    $display("tx %0d rx %0d copy %0d, AR bursts %0d, AW bursts %0d, stalls %0d",
             n_tx, n_rx, n_cp, mem.ar_bursts, mem.aw_bursts, mem.stall_cycles);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

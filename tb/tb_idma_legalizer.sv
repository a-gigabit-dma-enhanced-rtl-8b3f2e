// tb_idma_legalizer: checks the burst legalizer against a reference model.
//
// 300 random requests (random protocol per side, addresses anywhere,
// lengths 1 to 9000 bytes, some starting just below a 4 KiB boundary) are
// split with random consumer backpressure. Each chunk must equal the one the
// reference computes: as large as possible while staying inside one 4 KiB
// page and within MAX_BEATS bus words on every AXI side, and at most
// 4 KiB on an AXI-Stream side; chunks must be
// contiguous, cover the request exactly and carry first/last correctly.
// The test runs with MAX_BEATS = 16 so that the beat limit, not only the
// page limit, is exercised; one cycle per chunk is also checked.
//
// The rules checked are the AXI4 burst rules the legalizer must keep.
`timescale 1ns/1ps
module tb_idma_legalizer;
  import eth_pkg::*;
  localparam int unsigned NB = AxiStrbWidth;
  localparam int unsigned MAX_BEATS = 16;

  logic clk = 0, rst_n = 1;
  always #2 clk = ~clk;

  idma_req_t   req;
  logic        req_valid, req_ready, chunk_valid, chunk_ready, busy;
  idma_chunk_t chunk;

  idma_legalizer #(.MAX_BEATS(MAX_BEATS)) dut (
    .clk_i(clk), .rst_ni(rst_n), .req_i(req), .req_valid_i(req_valid), .req_ready_o(req_ready),
    .chunk_o(chunk), .chunk_valid_o(chunk_valid), .chunk_ready_i(chunk_ready), .busy_o(busy)
  );

  int checks = 0, failures = 0;
  task automatic check(bit c, string what);
    checks++;
    if (!c) begin failures++; if (failures < 10) $display("FAIL: %s", what); end
  endtask

  function automatic longint unsigned side_room(longint unsigned a, proto_e p);
    longint unsigned page_left, beat_left;
    if (p != ProtoAxi) return 4096;
    page_left = 4096 - (a % 4096);
    beat_left = MAX_BEATS * NB - (a % NB);
    return page_left < beat_left ? page_left : beat_left;
  endfunction

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int n_chunks_total = 0, n_beat_limited = 0, n_page_limited = 0;
    req = '0; req_valid = 0; chunk_ready = 0;
    #1 rst_n = 0;
    #10 rst_n = 1;
    @(posedge clk); #0.1;
    for (int r = 0; r < 300; r++) begin
      longint unsigned src, dst, rem;
      int len, cycles, n;
      bit ok, first;
      idma_req_t q;
      q.src_proto = proto_e'($urandom_range(1));
      q.dst_proto = proto_e'($urandom_range(1));
      q.src_addr  = (r % 4 == 0) ? 64'h1_0000_1000 - $urandom_range(1, 40) : {$urandom, $urandom};
      q.dst_addr  = {$urandom, $urandom};
      len         = $urandom_range(1, 9000);
      q.length    = len;
      req = q;
      req_valid = 1;
      check(req_ready, "ready for a request when idle");
      @(posedge clk); #0.1;
      req_valid = 0;
      src = q.src_addr; dst = q.dst_addr; rem = len;
      first = 1; cycles = 0; n = 0;
      while (rem > 0 && cycles < 20000) begin
        bit hs;
        longint unsigned exp_sz, rs, rd;
        chunk_ready = (r % 3 == 0) ? ($urandom_range(1) == 1) : 1'b1;
        #0.1;
        hs = chunk_valid && chunk_ready;
        if (hs) begin
          rs = side_room(src, q.src_proto);
          rd = side_room(dst, q.dst_proto);
          exp_sz = rem;
          if (rs < exp_sz) exp_sz = rs;
          if (rd < exp_sz) exp_sz = rd;
          ok = (chunk.src_addr == src) && (chunk.dst_addr == dst) && (chunk.bytes == exp_sz) &&
               (chunk.first == first) && (chunk.last == (exp_sz == rem));
          check(ok, $sformatf("req %0d chunk %0d: src %h dst %h bytes %0d (exp %h %h %0d)",
                              r, n, chunk.src_addr, chunk.dst_addr, chunk.bytes, src, dst, exp_sz));
          if (q.src_proto == ProtoAxi) begin
            check((src / 4096) == ((src + exp_sz - 1) / 4096), "no 4 KiB crossing");
            if (exp_sz == MAX_BEATS * NB - src % NB) n_beat_limited++;
            if (exp_sz == 4096 - src % 4096) n_page_limited++;
          end
          if (q.src_proto == ProtoAxi) src += exp_sz;
          if (q.dst_proto == ProtoAxi) dst += exp_sz;
          rem -= exp_sz;
          first = 0;
          n++;
          n_chunks_total++;
        end
        @(posedge clk);
        cycles++;
        #0.1;
      end
      chunk_ready = 0;
      check(rem == 0, "request fully covered");
      if (r % 3 != 0) check(cycles == n, $sformatf("one chunk per cycle (%0d cycles, %0d chunks)", cycles, n));
      check(!busy && !chunk_valid, "idle after the last chunk");
    end
    check(n_beat_limited > 0 && n_page_limited > 0, "both the beat and the page limit were hit");
    // a zero-length request produces nothing
    req.length = 0;
    req_valid = 1;
    @(posedge clk); #0.1;
    req_valid = 0;
    check(!busy && !chunk_valid, "zero-length request produces no chunk");
    $display("chunks: %0d, beat-limited %0d, page-limited %0d", n_chunks_total, n_beat_limited, n_page_limited);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

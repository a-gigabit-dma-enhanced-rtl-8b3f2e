// idma_transport: transport layer of the iDMA engine.
//
// Moves the bytes of one transfer from a source to a destination. Each side
// is either the AXI4 manager port (memory) or an AXI-Stream port: the source
// stream is the receive path (frames coming from the MAC), the destination
// stream is the transmit path (frames going to the MAC). So a transmit is
// AXI read -> AXI-Stream, a receive is AXI-Stream -> AXI write, and
// AXI -> AXI is a memory copy.
//
// Structure: legal chunks from idma_legalizer are forked into a read queue
// and a write queue (only for the sides that are AXI). The AXI read manager
// issues one AR burst per chunk (word-aligned address, length from the
// chunk's byte span) and pushes the valid lanes of every R beat into the
// byte buffer; the AXI-Stream reader pushes the kept lanes of every input
// beat. The AXI write manager issues one AW burst per chunk and builds each
// W beat by popping exactly the bytes that beat covers, at the destination
// lane offset; the AXI-Stream writer pops full beats and marks the final
// one tlast. The byte buffer (idma_byte_buffer) realigns between the two.
// Several bursts may be outstanding on each AXI channel (queue depth 4); all
// use ID 0, so responses return in order.
//
// A received frame may be shorter than the programmed length: when the
// source stream delivers tlast, the source is finished, the remaining W
// beats of bursts already issued are written with all-zero strobes, and
// bytes_o reports the bytes actually taken. Bytes beyond the length in the
// last source beat are dropped. tuser on a source beat (bad frame) sets
// frame_err_o. Any AXI response other than OKAY sets error_o.
//
// start_i (one cycle, with src/dst protocol and length stable until done_o)
// begins a transfer; done_o pulses once when all data has been written and
// every write burst acknowledged.
//
// The transport layer between AXI4 and AXI-Stream is part of the published
// iDMA; everything about its structure above (queues, byte buffer, early
// end on tlast, zero-strobe padding) is this design's choice.
module idma_transport
  import eth_pkg::*;
(
  input  logic        clk_i,
  input  logic        rst_ni,
  input  logic        start_i,
  input  proto_e      src_proto_i,
  input  proto_e      dst_proto_i,
  input  len_t        length_i,
  input  idma_chunk_t chunk_i,
  input  logic        chunk_valid_i,
  output logic        chunk_ready_o,
  output axi_req_t    axi_req_o,
  input  axi_rsp_t    axi_rsp_i,
  input  axis_wide_t  rx_data_i,
  input  logic        rx_valid_i,
  output logic        rx_ready_o,
  output axis_wide_t  tx_data_o,
  output logic        tx_valid_o,
  input  logic        tx_ready_i,
  output logic        busy_o,
  output logic        done_o,
  output len_t        bytes_o,
  output logic        error_o,
  output logic        frame_err_o
);
  localparam int unsigned NB   = AxiStrbWidth;
  localparam int unsigned OffW = $clog2(NB);
  localparam int unsigned QD   = 4;

  typedef logic [OffW:0] nb_t;   // 0 .. NB

  typedef struct packed {
    logic [OffW-1:0] off;
    logic [12:0]     bytes;
  } trk_t;

  logic active_q;
  logic src_axi, dst_axi;
  assign src_axi = (src_proto_i == ProtoAxi);
  assign dst_axi = (dst_proto_i == ProtoAxi);

  // Byte buffer
  data_t               pop_data;
  strb_t               pop_mask;
  logic                pop_valid, pop_ready, push_ready, push_valid, buf_empty;
  data_t               push_data;
  strb_t               push_mask;
  nb_t                 pop_bytes;
  logic [OffW-1:0]     pop_offset;
  logic [$clog2(4*NB):0] buf_count;
  logic                rd_done;

  function automatic nb_t min_nb(nb_t a, logic [31:0] b);
    return (32'(a) < b) ? a : nb_t'(b);
  endfunction

  function automatic strb_t lane_mask(logic [OffW-1:0] lo, nb_t n);
    strb_t m;
    for (int l = 0; l < NB; l++) m[l] = (l >= lo) && (l < 32'(lo) + 32'(n));
    return m;
  endfunction

  function automatic nb_t popcount(strb_t m);
    nb_t c;
    c = '0;
    for (int l = 0; l < NB; l++) c = c + nb_t'(m[l]);
    return c;
  endfunction

  // ---------------------------------------------------------------- chunk fork
  idma_chunk_t rdq_data, wrq_data;
  logic        rdq_in_ready, wrq_in_ready, rdq_valid, wrq_valid, rdq_pop, wrq_pop;

  assign chunk_ready_o = active_q && (!src_axi || rdq_in_ready) && (!dst_axi || wrq_in_ready);

  fifo_sync #(.T(idma_chunk_t), .DEPTH(QD)) i_rd_queue (
    .clk_i, .rst_ni, .clear_i(start_i),
    .in_data_i  (chunk_i),
    .in_valid_i (chunk_valid_i && chunk_ready_o && src_axi),
    .in_ready_o (rdq_in_ready),
    .out_data_o (rdq_data),
    .out_valid_o(rdq_valid),
    .out_ready_i(rdq_pop)
  );

  fifo_sync #(.T(idma_chunk_t), .DEPTH(QD)) i_wr_queue (
    .clk_i, .rst_ni, .clear_i(start_i),
    .in_data_i  (chunk_i),
    .in_valid_i (chunk_valid_i && chunk_ready_o && dst_axi),
    .in_ready_o (wrq_in_ready),
    .out_data_o (wrq_data),
    .out_valid_o(wrq_valid),
    .out_ready_i(wrq_pop)
  );

  function automatic logic [7:0] burst_len(addr_t a, logic [12:0] bytes);
    logic [13:0] span;
    span = 14'(a[OffW-1:0]) + 14'(bytes) + 14'(NB - 1);
    return 8'((span >> OffW) - 14'(1));
  endfunction

  // ---------------------------------------------------------------- AXI read
  trk_t rtrk_data;
  logic rtrk_in_ready, rtrk_valid, rtrk_pop;
  logic ar_valid;
  assign ar_valid = active_q && rdq_valid && rtrk_in_ready;
  assign rdq_pop  = ar_valid && axi_rsp_i.ar_ready;

  fifo_sync #(.T(trk_t), .DEPTH(QD)) i_rd_track (
    .clk_i, .rst_ni, .clear_i(start_i),
    .in_data_i  ('{off: rdq_data.src_addr[OffW-1:0], bytes: rdq_data.bytes}),
    .in_valid_i (rdq_pop),
    .in_ready_o (rtrk_in_ready),
    .out_data_o (rtrk_data),
    .out_valid_o(rtrk_valid),
    .out_ready_i(rtrk_pop)
  );

  logic [12:0]     r_cnt_q;
  logic [OffW-1:0] r_lo;
  nb_t             r_n;
  logic            r_hs;
  assign r_lo = (r_cnt_q == 0) ? rtrk_data.off : '0;
  assign r_n  = min_nb(nb_t'(NB) - nb_t'(r_lo), 32'(rtrk_data.bytes - r_cnt_q));
  assign r_hs = axi_rsp_i.r_valid && axi_req_o.r_ready;
  assign rtrk_pop = r_hs && (13'(r_n) == rtrk_data.bytes - r_cnt_q);

  // ---------------------------------------------------------------- AXI-Stream read
  len_t rd_total_q;
  logic rx_ended_q;
  strb_t rx_mask;
  always_comb begin
    len_t left;
    len_t seen;
    left = length_i - rd_total_q;
    seen = '0;
    for (int l = 0; l < NB; l++) begin
      rx_mask[l] = rx_data_i.tkeep[l] && (seen < left);
      if (rx_data_i.tkeep[l]) seen = seen + 1'b1;
    end
  end
  assign rx_ready_o = active_q && !src_axi && !rx_ended_q && push_ready;

  // push mux
  always_comb begin
    if (src_axi) begin
      push_valid = r_hs;
      push_data  = axi_rsp_i.r.data;
      push_mask  = lane_mask(r_lo, r_n);
    end else begin
      push_valid = rx_valid_i && rx_ready_o;
      push_data  = rx_data_i.tdata;
      push_mask  = rx_mask;
    end
  end

  assign rd_done = src_axi ? (rd_total_q == length_i) : rx_ended_q;

  // ---------------------------------------------------------------- AXI write
  trk_t wtrk_data;
  logic wtrk_in_ready, wtrk_valid, wtrk_pop;
  logic aw_valid;
  assign aw_valid = active_q && wrq_valid && wtrk_in_ready;
  assign wrq_pop  = aw_valid && axi_rsp_i.aw_ready;

  fifo_sync #(.T(trk_t), .DEPTH(QD)) i_wr_track (
    .clk_i, .rst_ni, .clear_i(start_i),
    .in_data_i  ('{off: wrq_data.dst_addr[OffW-1:0], bytes: wrq_data.bytes}),
    .in_valid_i (wrq_pop),
    .in_ready_o (wtrk_in_ready),
    .out_data_o (wtrk_data),
    .out_valid_o(wtrk_valid),
    .out_ready_i(wtrk_pop)
  );

  logic [12:0]     w_cnt_q;
  logic [OffW-1:0] w_lo;
  nb_t             w_n;
  logic            w_last, w_valid, w_hs;
  len_t            w_total_q;
  logic [7:0]      b_out_q;
  assign w_lo    = (w_cnt_q == 0) ? wtrk_data.off : '0;
  assign w_n     = min_nb(nb_t'(NB) - nb_t'(w_lo), 32'(wtrk_data.bytes - w_cnt_q));
  assign w_last  = (13'(w_n) == wtrk_data.bytes - w_cnt_q);
  assign w_valid = active_q && dst_axi && wtrk_valid && pop_valid;
  assign w_hs    = w_valid && axi_rsp_i.w_ready;
  assign wtrk_pop = w_hs && w_last;

  // ---------------------------------------------------------------- AXI-Stream write
  len_t wr_total_q;
  logic tx_done_q;
  nb_t  tx_k, tx_cnt;
  logic tx_last;
  assign tx_k       = min_nb(nb_t'(NB), 32'(length_i - wr_total_q));
  assign tx_cnt     = popcount(pop_mask);
  assign tx_last    = (32'(tx_cnt) == length_i - wr_total_q) ||
                      (rd_done && 32'(tx_cnt) == 32'(buf_count));
  assign tx_valid_o = active_q && !dst_axi && !tx_done_q && pop_valid && (tx_cnt != 0);
  assign tx_data_o  = '{tdata: pop_data, tkeep: pop_mask, tlast: tx_last, tuser: 1'b0};

  // pop mux
  always_comb begin
    if (dst_axi) begin
      pop_bytes  = w_n;
      pop_offset = w_lo;
      pop_ready  = w_hs;
    end else begin
      pop_bytes  = tx_k;
      pop_offset = '0;
      pop_ready  = tx_valid_o && tx_ready_i;
    end
  end

  idma_byte_buffer #(.CAP(4 * NB)) i_buffer (
    .clk_i, .rst_ni,
    .clear_i     (start_i),
    .drain_i     (rd_done),
    .push_data_i (push_data),
    .push_mask_i (push_mask),
    .push_valid_i(push_valid),
    .push_ready_o(push_ready),
    .pop_bytes_i (pop_bytes),
    .pop_offset_i(pop_offset),
    .pop_data_o  (pop_data),
    .pop_mask_o  (pop_mask),
    .pop_valid_o (pop_valid),
    .pop_ready_i (pop_ready),
    .empty_o     (buf_empty),
    .count_o     (buf_count)
  );

  // ---------------------------------------------------------------- AXI request
  always_comb begin
    axi_req_o          = '0;
    axi_req_o.ar.addr  = rdq_data.src_addr & ~(addr_t'(NB) - addr_t'(1));
    axi_req_o.ar.len   = burst_len(rdq_data.src_addr, rdq_data.bytes);
    axi_req_o.ar.size  = 3'(OffW);
    axi_req_o.ar.burst = AxiBurstIncr;
    axi_req_o.ar_valid = ar_valid;
    axi_req_o.r_ready  = active_q && src_axi && rtrk_valid && push_ready;
    axi_req_o.aw.addr  = wrq_data.dst_addr & ~(addr_t'(NB) - addr_t'(1));
    axi_req_o.aw.len   = burst_len(wrq_data.dst_addr, wrq_data.bytes);
    axi_req_o.aw.size  = 3'(OffW);
    axi_req_o.aw.burst = AxiBurstIncr;
    axi_req_o.aw_valid = aw_valid;
    axi_req_o.w.data   = pop_data;
    axi_req_o.w.strb   = pop_mask;
    axi_req_o.w.last   = w_last;
    axi_req_o.w_valid  = w_valid;
    axi_req_o.b_ready  = 1'b1;
  end

  // ---------------------------------------------------------------- state
  logic wr_done;
  assign wr_done = dst_axi ? (w_total_q == length_i && b_out_q == 0 && !wrq_pop)
                           : (tx_done_q || (rd_done && buf_empty));

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      active_q    <= 1'b0;
      r_cnt_q     <= '0;
      w_cnt_q     <= '0;
      rd_total_q  <= '0;
      w_total_q   <= '0;
      wr_total_q  <= '0;
      rx_ended_q  <= 1'b0;
      tx_done_q   <= 1'b0;
      b_out_q     <= '0;
      done_o      <= 1'b0;
      bytes_o     <= '0;
      error_o     <= 1'b0;
      frame_err_o <= 1'b0;
    end else begin
      done_o <= 1'b0;
      if (start_i) begin
        active_q    <= 1'b1;
        r_cnt_q     <= '0;
        w_cnt_q     <= '0;
        rd_total_q  <= '0;
        w_total_q   <= '0;
        wr_total_q  <= '0;
        rx_ended_q  <= 1'b0;
        tx_done_q   <= 1'b0;
        b_out_q     <= '0;
        error_o     <= 1'b0;
        frame_err_o <= 1'b0;
      end else if (active_q) begin
        // AXI read data
        if (r_hs) begin
          r_cnt_q    <= rtrk_pop ? '0 : r_cnt_q + 13'(r_n);
          rd_total_q <= rd_total_q + len_t'(r_n);
          if (axi_rsp_i.r.resp != AxiRespOkay) error_o <= 1'b1;
        end
        // AXI-Stream source
        if (rx_valid_i && rx_ready_o) begin
          rd_total_q <= rd_total_q + len_t'(popcount(rx_mask));
          if (rx_data_i.tlast || len_t'(popcount(rx_mask)) == length_i - rd_total_q)
            rx_ended_q <= 1'b1;
          if (rx_data_i.tuser) frame_err_o <= 1'b1;
        end
        // AXI write
        if (w_hs) begin
          w_cnt_q   <= wtrk_pop ? '0 : w_cnt_q + 13'(w_n);
          w_total_q <= w_total_q + len_t'(w_n);
        end
        b_out_q <= b_out_q + 8'(wrq_pop) - 8'(axi_rsp_i.b_valid);
        if (axi_rsp_i.b_valid && axi_rsp_i.b.resp != AxiRespOkay) error_o <= 1'b1;
        // AXI-Stream destination
        if (tx_valid_o && tx_ready_i) begin
          wr_total_q <= wr_total_q + len_t'(tx_cnt);
          if (tx_last) tx_done_q <= 1'b1;
        end
        if (rd_done && wr_done) begin
          active_q <= 1'b0;
          done_o   <= 1'b1;
          bytes_o  <= rd_total_q;
        end
      end
    end
  end

  assign busy_o = active_q;

  // ---------------------------------------------------------------- protocol checks
  property p_stable(logic v, logic r);
    @(posedge clk_i) disable iff (!rst_ni) v && !r |=> v;
  endproperty
  assert property (p_stable(axi_req_o.ar_valid, axi_rsp_i.ar_ready))
    else $error("idma_transport: AR valid dropped before ready");
  assert property (p_stable(axi_req_o.aw_valid, axi_rsp_i.aw_ready))
    else $error("idma_transport: AW valid dropped before ready");
  assert property (p_stable(axi_req_o.w_valid, axi_rsp_i.w_ready))
    else $error("idma_transport: W valid dropped before ready");
endmodule

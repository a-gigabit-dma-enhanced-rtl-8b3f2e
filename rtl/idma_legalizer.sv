// idma_legalizer: splits a one-dimensional transfer into legal bursts.
//
// A request names a source and a destination (address and protocol, AXI4
// or AXI-Stream) and a length in bytes; addresses and length are arbitrary.
// The legalizer cuts the transfer into chunks that each fit in one AXI4
// INCR burst on every AXI side:
//   - a chunk never crosses a 4 KiB boundary of an AXI address (AXI4 rule);
//   - it spans at most MAX_BEATS bus words of an AXI address.
// The chunk size is the smallest of the remaining length and the room left
// on each AXI side; an AXI-Stream side only caps a chunk at 4 KiB, so that
// the chunk's 13-bit byte count always holds it. One chunk leaves per
// cycle when the consumer is ready, marked first/last within the transfer.
//
// Interface: req valid/ready (ready while idle), chunk valid/ready.
// busy_o is high from the accepted request until the last chunk has left.
// A zero-length request produces no chunk; the iDMA backend answers it.
//
// A request legalizer for arbitrary one-dimensional transfers is part of the
// published iDMA; the 4 KiB and burst-length rules come from AXI4, and the
// one-chunk-per-cycle structure and the MAX_BEATS default are this
// design's.
module idma_legalizer
  import eth_pkg::*;
#(
  parameter int unsigned MAX_BEATS = 256
) (
  input  logic        clk_i,
  input  logic        rst_ni,
  input  idma_req_t   req_i,
  input  logic        req_valid_i,
  output logic        req_ready_o,
  output idma_chunk_t chunk_o,
  output logic        chunk_valid_o,
  input  logic        chunk_ready_i,
  output logic        busy_o
);
  localparam int unsigned NB       = AxiStrbWidth;
  localparam int unsigned OffW     = $clog2(NB);
  localparam int unsigned PageSize = 4096;
  localparam int unsigned MaxBurst = MAX_BEATS * NB;

  logic   busy_q, first_q;
  addr_t  src_q, dst_q;
  len_t   rem_q;
  proto_e src_proto_q, dst_proto_q;

  // Room on one side for the next chunk.
  function automatic len_t room(addr_t a, proto_e p);
    len_t page, burst;
    page  = len_t'(PageSize) - len_t'(a[11:0]);
    burst = len_t'(MaxBurst) - len_t'(a[OffW-1:0]);
    if (p != ProtoAxi)  return len_t'(PageSize);
    if (page < burst)   return page;
    return burst;
  endfunction

  len_t size;
  always_comb begin
    len_t rs, rd;
    rs   = room(src_q, src_proto_q);
    rd   = room(dst_q, dst_proto_q);
    size = rem_q;
    if (rs < size) size = rs;
    if (rd < size) size = rd;
  end

  assign req_ready_o           = !busy_q;
  assign busy_o                = busy_q;
  assign chunk_valid_o         = busy_q;
  assign chunk_o.src_addr      = src_q;
  assign chunk_o.dst_addr      = dst_q;
  assign chunk_o.bytes         = size[12:0];
  assign chunk_o.first         = first_q;
  assign chunk_o.last          = (size == rem_q);

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      busy_q      <= 1'b0;
      first_q     <= 1'b0;
      src_q       <= '0;
      dst_q       <= '0;
      rem_q       <= '0;
      src_proto_q <= ProtoAxi;
      dst_proto_q <= ProtoAxi;
    end else if (!busy_q) begin
      if (req_valid_i && req_i.length != 0) begin
        busy_q      <= 1'b1;
        first_q     <= 1'b1;
        src_q       <= req_i.src_addr;
        dst_q       <= req_i.dst_addr;
        rem_q       <= req_i.length;
        src_proto_q <= req_i.src_proto;
        dst_proto_q <= req_i.dst_proto;
      end
    end else if (chunk_ready_i) begin
      first_q <= 1'b0;
      rem_q   <= rem_q - size;
      src_q   <= (src_proto_q == ProtoAxi) ? src_q + addr_t'(size) : src_q;
      dst_q   <= (dst_proto_q == ProtoAxi) ? dst_q + addr_t'(size) : dst_q;
      if (size == rem_q) busy_q <= 1'b0;
    end
  end

  initial assert (MAX_BEATS >= 1 && MAX_BEATS <= 256)
    else $error("idma_legalizer: AXI4 INCR bursts have 1 to 256 beats");
endmodule

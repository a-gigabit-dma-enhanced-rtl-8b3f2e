// cdc_fifo_gray: asynchronous (dual-clock) FIFO with Gray-coded pointers.
//
// The controller has no frame buffers; these small FIFOs are the only
// storage between the iDMA (system clock) and the MAC (125 MHz Ethernet
// clocks). One instance carries transmit beats from the system clock to the
// transmit clock, another carries received beats from the PHY's receive clock
// to the system clock.
//
// How it works: the write side keeps a binary and a Gray write pointer, the
// read side likewise; each Gray pointer is passed to the other side through a
// two-flop synchronizer. Full and empty are computed from the local pointer
// and the synchronized remote one, so both are conservative (a FIFO may look
// full or empty a few cycles longer than it is). The storage is a plain
// register array written in the source domain and read asynchronously in the
// destination domain, which the pointer protocol makes safe.
//
// Interface: valid/ready on both sides. A beat written is visible at the read
// side three read-clock edges later at the earliest. DEPTH must be a power of
// two. The depth is this design's choice; the source gives none.
module cdc_fifo_gray #(
  parameter type         T     = logic [7:0],
  parameter int unsigned DEPTH = 8
) (
  input  logic src_clk_i,
  input  logic src_rst_ni,
  input  T     src_data_i,
  input  logic src_valid_i,
  output logic src_ready_o,

  input  logic dst_clk_i,
  input  logic dst_rst_ni,
  output T     dst_data_o,
  output logic dst_valid_o,
  input  logic dst_ready_i
);
  localparam int unsigned AW = $clog2(DEPTH);

  typedef logic [AW:0] ptr_t;

  T     mem_q [DEPTH];
  ptr_t wbin_q, wgray_q, rbin_q, rgray_q;
  ptr_t rgray_sync, wgray_sync;

  function automatic ptr_t bin2gray(ptr_t b);
    return b ^ (b >> 1);
  endfunction

  // ---------------------------------------------------------------- write side
  logic push;
  assign src_ready_o = (wgray_q != {~rgray_sync[AW:AW-1], rgray_sync[AW-2:0]});
  assign push        = src_valid_i && src_ready_o;

  always_ff @(posedge src_clk_i or negedge src_rst_ni) begin
    if (!src_rst_ni) begin
      wbin_q  <= '0;
      wgray_q <= '0;
    end else if (push) begin
      wbin_q  <= wbin_q + 1'b1;
      wgray_q <= bin2gray(wbin_q + 1'b1);
    end
  end

  always_ff @(posedge src_clk_i) begin
    if (push) mem_q[wbin_q[AW-1:0]] <= src_data_i;
  end

  sync_2ff #(.WIDTH(AW+1)) i_sync_rptr (
    .clk_i (src_clk_i),
    .rst_ni(src_rst_ni),
    .d_i   (rgray_q),
    .q_o   (rgray_sync)
  );

  // ---------------------------------------------------------------- read side
  logic pop;
  assign dst_valid_o = (rgray_q != wgray_sync);
  assign pop         = dst_valid_o && dst_ready_i;
  assign dst_data_o  = mem_q[rbin_q[AW-1:0]];

  always_ff @(posedge dst_clk_i or negedge dst_rst_ni) begin
    if (!dst_rst_ni) begin
      rbin_q  <= '0;
      rgray_q <= '0;
    end else if (pop) begin
      rbin_q  <= rbin_q + 1'b1;
      rgray_q <= bin2gray(rbin_q + 1'b1);
    end
  end

  sync_2ff #(.WIDTH(AW+1)) i_sync_wptr (
    .clk_i (dst_clk_i),
    .rst_ni(dst_rst_ni),
    .d_i   (wgray_q),
    .q_o   (wgray_sync)
  );

  // ---------------------------------------------------------------- checks
  initial assert (DEPTH >= 4 && (DEPTH & (DEPTH - 1)) == 0)
    else $error("cdc_fifo_gray: DEPTH must be a power of two >= 4");

  // Data must be held while valid waits for ready.
  property p_src_stable;
    @(posedge src_clk_i) disable iff (!src_rst_ni)
      src_valid_i && !src_ready_o |=> src_valid_i;
  endproperty
  assert property (p_src_stable) else $error("cdc_fifo_gray: src_valid dropped before ready");
endmodule

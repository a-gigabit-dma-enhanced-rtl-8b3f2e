// idma_backend: the iDMA engine of the Ethernet controller.
//
// Accepts one-dimensional transfer requests (source and destination address
// and protocol, byte length), legalizes them into AXI4 bursts
// (idma_legalizer) and moves the data (idma_transport). This turns the
// Ethernet controller from a passive AXI subordinate into an active AXI4
// manager: a transmit is a request AXI -> AXI-Stream, a receive a request
// AXI-Stream -> AXI.
//
// One transfer runs at a time. req_ready_o is high while idle; a request of
// length zero is answered on the next cycle without bus traffic. When the
// last byte is written (and, for AXI destinations, acknowledged) rsp_valid_o
// pulses for one cycle with the number of source bytes moved, the AXI error
// flag and the frame-error flag of a received frame.
//
// The split into a request legalizer and a transport layer, and AXI4 and
// AXI-Stream support, follow the published description of the iDMA. Running
// one transfer at a time and the response format are this design's choices.
module idma_backend
  import eth_pkg::*;
#(
  parameter int unsigned MAX_BEATS = 256
) (
  input  logic       clk_i,
  input  logic       rst_ni,
  input  idma_req_t  req_i,
  input  logic       req_valid_i,
  output logic       req_ready_o,
  output idma_rsp_t  rsp_o,
  output logic       rsp_frame_err_o,
  output logic       rsp_valid_o,
  output logic       busy_o,
  output axi_req_t   axi_req_o,
  input  axi_rsp_t   axi_rsp_i,
  input  axis_wide_t rx_data_i,
  input  logic       rx_valid_i,
  output logic       rx_ready_o,
  output axis_wide_t tx_data_o,
  output logic       tx_valid_o,
  input  logic       tx_ready_i
);
  logic      busy_q, zero_q;
  idma_req_t cur_q;
  logic      start;

  idma_chunk_t chunk;
  logic        chunk_valid, chunk_ready, leg_ready, leg_busy;
  logic        t_done, t_err, t_ferr, t_busy;
  len_t        t_bytes;

  assign req_ready_o = !busy_q;
  assign start       = req_valid_i && !busy_q;
  assign busy_o      = busy_q;

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      busy_q <= 1'b0;
      zero_q <= 1'b0;
      cur_q  <= '0;
    end else begin
      zero_q <= 1'b0;
      if (start) begin
        cur_q <= req_i;
        if (req_i.length == 0) zero_q <= 1'b1;
        else                   busy_q <= 1'b1;
      end else if (t_done) begin
        busy_q <= 1'b0;
      end
    end
  end

  assign rsp_valid_o     = t_done || zero_q;
  assign rsp_o.bytes     = zero_q ? '0 : t_bytes;
  assign rsp_o.error     = !zero_q && t_err;
  assign rsp_frame_err_o = !zero_q && t_ferr;

  idma_legalizer #(.MAX_BEATS(MAX_BEATS)) i_legalizer (
    .clk_i, .rst_ni,
    .req_i        (req_i),
    .req_valid_i  (start),
    .req_ready_o  (leg_ready),
    .chunk_o      (chunk),
    .chunk_valid_o(chunk_valid),
    .chunk_ready_i(chunk_ready),
    .busy_o       (leg_busy)
  );

  idma_transport i_transport (
    .clk_i, .rst_ni,
    .start_i      (start && req_i.length != 0),
    .src_proto_i  (cur_q.src_proto),
    .dst_proto_i  (cur_q.dst_proto),
    .length_i     (cur_q.length),
    .chunk_i      (chunk),
    .chunk_valid_i(chunk_valid),
    .chunk_ready_o(chunk_ready),
    .axi_req_o    (axi_req_o),
    .axi_rsp_i    (axi_rsp_i),
    .rx_data_i    (rx_data_i),
    .rx_valid_i   (rx_valid_i),
    .rx_ready_o   (rx_ready_o),
    .tx_data_o    (tx_data_o),
    .tx_valid_o   (tx_valid_o),
    .tx_ready_i   (tx_ready_i),
    .busy_o       (t_busy),
    .done_o       (t_done),
    .bytes_o      (t_bytes),
    .error_o      (t_err),
    .frame_err_o  (t_ferr)
  );

  // The legalizer and the transport start together and are idle together.
  assert property (@(posedge clk_i) disable iff (!rst_ni) start |-> leg_ready)
    else $error("idma_backend: legalizer busy at transfer start");
  assert property (@(posedge clk_i) disable iff (!rst_ni) !busy_q |-> !t_busy && !leg_busy)
    else $error("idma_backend: transport busy while idle");
endmodule

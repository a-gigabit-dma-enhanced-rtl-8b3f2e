// axis_downsizer: wide AXI-Stream beats to a byte stream (transmit path).
//
// The iDMA streams beats of NB = AxiStrbWidth bytes; the MAC takes one byte
// per 125 MHz cycle. The down-sizer holds one wide beat and hands out its
// valid bytes (tkeep set) from the lowest lane upwards, one per cycle. Lanes
// whose tkeep is clear are null bytes and are skipped, so a beat may carry
// fewer than NB bytes anywhere in the stream. tlast is attached to the last
// valid byte of a beat marked tlast. A beat with no valid byte is dropped.
//
// Timing: a new wide beat is accepted in the same cycle as the last byte of
// the held one leaves, so a stream of full beats comes out with no bubble at
// one byte per cycle. Output is registered (the held beat); byte selection
// is a priority encoder on the remaining keep mask.
//
// From the published architecture: a down-sizer between the transmit CDC FIFO
// and the RGMII interface, adapting the iDMA's wider stream to the MAC. How
// it does so (one held beat, lowest lane first, null lanes skipped) is this
// design's choice.
module axis_downsizer
  import eth_pkg::*;
(
  input  logic       clk_i,
  input  logic       rst_ni,
  input  axis_wide_t s_data_i,
  input  logic       s_valid_i,
  output logic       s_ready_o,
  output axis_byte_t m_data_o,
  output logic       m_valid_o,
  input  logic       m_ready_i
);
  localparam int unsigned NB = AxiStrbWidth;

  data_t data_q;
  strb_t keep_q;
  logic  last_q, user_q;

  // Lowest remaining lane and whether it is the only one left.
  logic [$clog2(NB)-1:0] lane;
  logic                  only_one;
  always_comb begin
    lane = '0;
    for (int i = NB - 1; i >= 0; i--) begin
      if (keep_q[i]) lane = i[$clog2(NB)-1:0];
    end
    only_one = (keep_q & (keep_q - 1'b1)) == '0;
  end

  assign m_valid_o      = |keep_q;
  assign m_data_o.tdata = data_q[8*lane +: 8];
  assign m_data_o.tlast = last_q && only_one;
  assign m_data_o.tuser = user_q;

  // Take a new beat when nothing is held or the last held byte leaves now.
  assign s_ready_o = !m_valid_o || (m_ready_i && only_one);

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      data_q <= '0;
      keep_q <= '0;
      last_q <= 1'b0;
      user_q <= 1'b0;
    end else if (s_valid_i && s_ready_o) begin
      data_q <= s_data_i.tdata;
      keep_q <= s_data_i.tkeep;
      last_q <= s_data_i.tlast;
      user_q <= s_data_i.tuser;
    end else if (m_valid_o && m_ready_i) begin
      keep_q[lane] <= 1'b0;
    end
  end
endmodule

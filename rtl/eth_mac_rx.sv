// eth_mac_rx: Ethernet MAC receiver, GMII-style byte bus to byte stream.
//
// Runs on the PHY's receive clock. It waits for rx_dv with a preamble byte
// (0x55) or directly the start-of-frame delimiter (0xD5), then treats every
// byte up to the fall of rx_dv as frame data. The frame is forwarded as an
// AXI-Stream byte stream with the 4-byte frame check sequence removed: a
// five-byte delay line holds the newest bytes, so that when rx_dv falls the
// byte leaving the line is known to be the last payload byte and gets tlast.
// The CRC-32 runs over every data byte including the FCS; a frame is good if
// the register then equals the CRC residue 0xDEBB20E3. tuser on the tlast
// byte is set for a bad FCS or an rx_er seen during the frame.
//
// A receiver cannot stall a PHY, and this design has no frame buffer: if the
// stream is not ready when a byte is offered, that byte is lost and
// overflow_o pulses. Frames of fewer than five bytes are dropped silently.
// rx_en_i (synchronized configuration bit) gates the start of a new frame.
// Output timing: a byte leaves five receive cycles after it entered, the
// tlast byte one cycle after rx_dv falls.
//
// The architecture asks for an RGMII MAC receiver with an AXI-Stream output;
// its framing and FCS rules here are those of IEEE 802.3. Dropping bytes on
// backpressure, marking bad frames with tuser and the rx_en gating are this
// design's choices.
module eth_mac_rx
  import eth_pkg::*;
(
  input  logic       clk_i,      // PHY receive clock
  input  logic       rst_ni,
  input  logic       rx_en_i,
  input  logic [7:0] rxd_i,
  input  logic       rx_dv_i,
  input  logic       rx_er_i,
  output axis_byte_t m_data_o,
  output logic       m_valid_o,
  input  logic       m_ready_i,
  output logic       frame_ok_o,  // pulse: frame delivered with a good FCS
  output logic       fcs_err_o,   // pulse: frame delivered with a bad FCS or rx_er
  output logic       overflow_o   // pulse: a byte was lost to backpressure
);
  typedef enum logic [1:0] {Idle, Preamble, Data, Drop} state_e;

  state_e      state_q;
  logic [7:0]  sr_q [5];
  logic [2:0]  cnt_q;
  logic [31:0] crc_q;
  logic        err_q;

  logic bad;
  assign bad = (crc_q != EthCrcResidue) || err_q;

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      state_q    <= Idle;
      cnt_q      <= '0;
      crc_q      <= '1;
      err_q      <= 1'b0;
      for (int i = 0; i < 5; i++) sr_q[i] <= '0;
      m_data_o   <= '0;
      m_valid_o  <= 1'b0;
      frame_ok_o <= 1'b0;
      fcs_err_o  <= 1'b0;
      overflow_o <= 1'b0;
    end else begin
      m_valid_o  <= 1'b0;
      frame_ok_o <= 1'b0;
      fcs_err_o  <= 1'b0;
      overflow_o <= m_valid_o && !m_ready_i;
      unique case (state_q)
        Idle: begin
          if (rx_dv_i && rx_en_i) begin
            if (rxd_i == EthSfd) state_q <= Data;
            else if (rxd_i == EthPreamble) state_q <= Preamble;
            else state_q <= Drop;
          end
          crc_q <= '1;
          err_q <= 1'b0;
          cnt_q <= '0;
        end
        Preamble: begin
          if (!rx_dv_i)                  state_q <= Idle;
          else if (rxd_i == EthSfd)      state_q <= Data;
          else if (rxd_i != EthPreamble) state_q <= Drop;
        end
        Data: begin
          if (rx_dv_i) begin
            crc_q <= crc32_byte(crc_q, rxd_i);
            err_q <= err_q | rx_er_i;
            sr_q[0] <= rxd_i;
            for (int i = 1; i < 5; i++) sr_q[i] <= sr_q[i-1];
            if (cnt_q == 3'd5) begin
              m_data_o  <= '{tdata: sr_q[4], tlast: 1'b0, tuser: 1'b0};
              m_valid_o <= 1'b1;
            end else begin
              cnt_q <= cnt_q + 1'b1;
            end
          end else begin
            if (cnt_q == 3'd5) begin
              m_data_o   <= '{tdata: sr_q[4], tlast: 1'b1, tuser: bad};
              m_valid_o  <= 1'b1;
              frame_ok_o <= !bad;
              fcs_err_o  <= bad;
            end
            state_q <= Idle;
          end
        end
        Drop: if (!rx_dv_i) state_q <= Idle;
        default: state_q <= Idle;
      endcase
    end
  end
endmodule

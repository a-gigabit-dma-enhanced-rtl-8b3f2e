// eth_mac_tx: Ethernet MAC transmitter, byte stream to GMII-style byte bus.
//
// Turns one AXI-Stream frame (bytes, tlast on the final one) into an
// Ethernet frame on an 8-bit, one-byte-per-cycle bus at 125 MHz:
//   7 preamble bytes 0x55, the start-of-frame delimiter 0xD5, the payload
//   exactly as streamed, the 4-byte IEEE 802.3 CRC-32 frame check sequence,
//   then at least 12 idle cycles of inter-frame gap.
// These are the preamble, payload and CRC phases whose cycle counts the
// bufferless controller is measured by: 8 cycles of preamble, one cycle per
// payload byte and 4 cycles of CRC. The frame is not padded to the 60-byte
// Ethernet minimum; software supplies at least 60 bytes (this design's
// choice, as is the inter-frame gap counter).
//
// Bufferless operation means the payload must arrive at line rate. If the
// stream has no byte ready during the payload phase the transmitter drives
// tx_er for that cycle (which makes the PHY corrupt the frame on the wire),
// reports underrun_o and waits for the byte.
//
// Outputs are registered; the first preamble byte appears the cycle after a
// byte is offered in the idle state. s_ready_o is high only in the payload
// phase.
module eth_mac_tx
  import eth_pkg::*;
(
  input  logic       clk_i,      // 125 MHz transmit clock
  input  logic       rst_ni,
  input  axis_byte_t s_data_i,
  input  logic       s_valid_i,
  output logic       s_ready_o,
  output logic [7:0] txd_o,
  output logic       tx_en_o,
  output logic       tx_er_o,
  output logic       underrun_o,  // one-cycle pulse per missing payload byte
  output logic       frame_sent_o // one-cycle pulse after the last FCS byte
);
  typedef enum logic [2:0] {Idle, Preamble, Payload, Fcs, Gap} state_e;

  state_e      state_q;
  logic [3:0]  cnt_q;
  logic [31:0] crc_q;

  assign s_ready_o = (state_q == Payload);

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      state_q      <= Idle;
      cnt_q        <= '0;
      crc_q        <= '1;
      txd_o        <= '0;
      tx_en_o      <= 1'b0;
      tx_er_o      <= 1'b0;
      underrun_o   <= 1'b0;
      frame_sent_o <= 1'b0;
    end else begin
      underrun_o   <= 1'b0;
      frame_sent_o <= 1'b0;
      tx_er_o      <= 1'b0;
      unique case (state_q)
        Idle: begin
          tx_en_o <= 1'b0;
          txd_o   <= '0;
          if (s_valid_i) begin
            // first of the seven preamble bytes
            txd_o   <= EthPreamble;
            tx_en_o <= 1'b1;
            cnt_q   <= 4'd1;
            state_q <= Preamble;
          end
        end
        Preamble: begin
          if (cnt_q == 4'(EthPreambleBytes)) begin
            txd_o   <= EthSfd;
            crc_q   <= '1;
            state_q <= Payload;
          end else begin
            txd_o <= EthPreamble;
            cnt_q <= cnt_q + 1'b1;
          end
        end
        Payload: begin
          if (s_valid_i) begin
            txd_o <= s_data_i.tdata;
            crc_q <= crc32_byte(crc_q, s_data_i.tdata);
            if (s_data_i.tlast) begin
              cnt_q   <= '0;
              state_q <= Fcs;
            end
          end else begin
            txd_o      <= '0;
            tx_er_o    <= 1'b1;
            underrun_o <= 1'b1;
          end
        end
        Fcs: begin
          txd_o <= ~crc_q[8*cnt_q[1:0] +: 8];
          cnt_q <= cnt_q + 1'b1;
          if (cnt_q == 4'(EthFcsBytes - 1)) begin
            cnt_q   <= '0;
            state_q <= Gap;
          end
        end
        Gap: begin
          tx_en_o <= 1'b0;
          txd_o   <= '0;
          if (cnt_q == 0) frame_sent_o <= 1'b1;
          cnt_q <= cnt_q + 1'b1;
          if (cnt_q == 4'(EthIfgBytes - 1)) state_q <= Idle;
        end
        default: state_q <= Idle;
      endcase
    end
  end
endmodule

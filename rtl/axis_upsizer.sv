// axis_upsizer: byte stream to wide AXI-Stream beats (receive path).
//
// Collects the MAC's received bytes into beats of NB = AxiStrbWidth bytes,
// filling lanes from 0 upwards. A beat is closed when it holds NB bytes or
// when a byte marked tlast arrives; a short last beat has the upper tkeep
// bits clear. tuser of the output beat is the OR of the bytes' tuser.
//
// Timing: the beat being filled and the beat offered downstream are separate
// registers, so the MAC's one byte per cycle never waits as long as the
// downstream takes a beat within NB cycles. s_ready_o falls only when a beat
// completes while the previous one is still waiting.
//
// From the published architecture: an up-sizer on the receive side widening
// the MAC's stream for the iDMA. Its packing rules, tuser handling and the
// two-register structure are this design's choices.
module axis_upsizer
  import eth_pkg::*;
(
  input  logic       clk_i,
  input  logic       rst_ni,
  input  axis_byte_t s_data_i,
  input  logic       s_valid_i,
  output logic       s_ready_o,
  output axis_wide_t m_data_o,
  output logic       m_valid_o,
  input  logic       m_ready_i
);
  localparam int unsigned NB = AxiStrbWidth;

  data_t                 acc_data_q;
  strb_t                 acc_keep_q;
  logic                  acc_user_q;
  logic [$clog2(NB)-1:0] cnt_q;
  axis_wide_t            out_q;
  logic                  out_valid_q;

  logic push, closes;
  assign closes    = s_data_i.tlast || (cnt_q == $bits(cnt_q)'(NB - 1));
  assign s_ready_o = !(closes && out_valid_q && !m_ready_i);
  assign push      = s_valid_i && s_ready_o;

  assign m_data_o  = out_q;
  assign m_valid_o = out_valid_q;

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      acc_data_q  <= '0;
      acc_keep_q  <= '0;
      acc_user_q  <= 1'b0;
      cnt_q       <= '0;
      out_q       <= '0;
      out_valid_q <= 1'b0;
    end else begin
      if (out_valid_q && m_ready_i) out_valid_q <= 1'b0;
      if (push) begin
        if (closes) begin
          out_q.tdata             <= acc_data_q;
          out_q.tdata[8*cnt_q+:8] <= s_data_i.tdata;
          out_q.tkeep             <= acc_keep_q | (strb_t'(1) << cnt_q);
          out_q.tlast             <= s_data_i.tlast;
          out_q.tuser             <= acc_user_q | s_data_i.tuser;
          out_valid_q             <= 1'b1;
          acc_data_q              <= '0;
          acc_keep_q              <= '0;
          acc_user_q              <= 1'b0;
          cnt_q                   <= '0;
        end else begin
          acc_data_q[8*cnt_q+:8] <= s_data_i.tdata;
          acc_keep_q[cnt_q]      <= 1'b1;
          acc_user_q             <= acc_user_q | s_data_i.tuser;
          cnt_q                  <= cnt_q + 1'b1;
        end
      end
    end
  end
endmodule

// sync_pulse: carries single-cycle event pulses across clock domains.
//
// Each pulse on src_pulse_i flips a toggle flop in the source domain; the
// destination domain synchronizes the toggle with two flops and emits a
// one-cycle pulse on every change. Pulses must be at least three destination
// cycles apart to be counted separately. Used for status events (FCS error,
// receive overflow, transmit underrun, frame received) that the Ethernet
// clocks report to the register file.
//
// A helper of this design; the architecture names the clock crossing but not
// its circuits.
module sync_pulse (
  input  logic src_clk_i,
  input  logic src_rst_ni,
  input  logic src_pulse_i,
  input  logic dst_clk_i,
  input  logic dst_rst_ni,
  output logic dst_pulse_o
);
  logic toggle_q, sync_toggle, last_q;

  always_ff @(posedge src_clk_i or negedge src_rst_ni) begin
    if (!src_rst_ni)      toggle_q <= 1'b0;
    else if (src_pulse_i) toggle_q <= ~toggle_q;
  end

  sync_2ff #(.WIDTH(1)) i_sync (
    .clk_i (dst_clk_i),
    .rst_ni(dst_rst_ni),
    .d_i   (toggle_q),
    .q_o   (sync_toggle)
  );

  always_ff @(posedge dst_clk_i or negedge dst_rst_ni) begin
    if (!dst_rst_ni) last_q <= 1'b0;
    else             last_q <= sync_toggle;
  end

  assign dst_pulse_o = sync_toggle ^ last_q;
endmodule

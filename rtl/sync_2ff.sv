// sync_2ff: two-flip-flop synchronizer for a slowly changing level.
//
// Brings a level signal from another clock domain into clk_i. The output
// follows the input two destination-clock edges later. Used for the
// configuration bits the register file hands to the Ethernet clocks and for
// the toggles of sync_pulse. Resets to RESET_VALUE.
//
// A helper of this design; the architecture names the clock crossing but not
// its circuits.
module sync_2ff #(
  parameter int unsigned WIDTH       = 1,
  parameter logic        RESET_VALUE = 1'b0
) (
  input  logic             clk_i,
  input  logic             rst_ni,
  input  logic [WIDTH-1:0] d_i,
  output logic [WIDTH-1:0] q_o
);
  logic [WIDTH-1:0] meta_q, sync_q;

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      meta_q <= {WIDTH{RESET_VALUE}};
      sync_q <= {WIDTH{RESET_VALUE}};
    end else begin
      meta_q <= d_i;
      sync_q <= meta_q;
    end
  end

  assign q_o = sync_q;
endmodule

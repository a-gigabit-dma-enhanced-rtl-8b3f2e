// rst_sync: reset synchronizer.
//
// Asserts the output reset asynchronously with rst_ni and releases it
// synchronously, two clk_i edges after rst_ni rises. One instance per clock
// domain (system, Ethernet transmit, Ethernet receive) lets a single
// active-low reset input serve all three.
//
// A helper of this design; resets are not described in the architecture.
// The flops of the chain are reset asynchronously and shifted synchronously
// on purpose, which is what a reset synchronizer is; a lint tool flags that
// as a signal used both ways.
module rst_sync (
  input  logic clk_i,
  input  logic rst_ni,
  output logic rst_no
);
  logic [1:0] q;

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) q <= 2'b00;
    else         q <= {q[0], 1'b1};
  end

  assign rst_no = q[1];
endmodule

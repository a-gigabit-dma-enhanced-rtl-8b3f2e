// fifo_sync: small single-clock FIFO with valid/ready handshakes.
//
// Register-array storage, binary pointers and an occupancy counter; output
// data comes straight from the array (no read latency). Used inside the iDMA
// to queue burst descriptors between the legalizer, the address channels and
// the data channels. DEPTH must be a power of two.
//
// A helper of this design; the architecture does not describe the iDMA's
// internal queues.
module fifo_sync #(
  parameter type         T     = logic [7:0],
  parameter int unsigned DEPTH = 4
) (
  input  logic clk_i,
  input  logic rst_ni,
  input  logic clear_i,
  input  T     in_data_i,
  input  logic in_valid_i,
  output logic in_ready_o,
  output T     out_data_o,
  output logic out_valid_o,
  input  logic out_ready_i
);
  localparam int unsigned AW = $clog2(DEPTH);

  T              mem_q [DEPTH];
  logic [AW-1:0] wptr_q, rptr_q;
  logic [AW:0]   cnt_q;

  logic push, pop;
  assign in_ready_o  = (cnt_q != (AW+1)'(DEPTH));
  assign out_valid_o = (cnt_q != 0);
  assign out_data_o  = mem_q[rptr_q];
  assign push        = in_valid_i && in_ready_o;
  assign pop         = out_valid_o && out_ready_i;

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      wptr_q <= '0;
      rptr_q <= '0;
      cnt_q  <= '0;
    end else if (clear_i) begin
      wptr_q <= '0;
      rptr_q <= '0;
      cnt_q  <= '0;
    end else begin
      if (push) wptr_q <= wptr_q + 1'b1;
      if (pop)  rptr_q <= rptr_q + 1'b1;
      cnt_q <= cnt_q + (AW+1)'(push) - (AW+1)'(pop);
    end
  end

  always_ff @(posedge clk_i) begin
    if (push) mem_q[wptr_q] <= in_data_i;
  end

  initial assert (DEPTH >= 2 && (DEPTH & (DEPTH - 1)) == 0)
    else $error("fifo_sync: DEPTH must be a power of two >= 2");
endmodule

// idma_byte_buffer: byte-granular realignment buffer of the iDMA transport.
//
// The read side of a transfer delivers bus words in which only some byte
// lanes are valid (the first and last words of an unaligned burst, a short
// AXI-Stream beat). The write side needs words whose valid bytes start at
// its own lane offset. This buffer decouples the two: a push appends the
// valid lanes of a word, in lane order, to a circular byte queue; a pop
// removes k bytes and places them at lanes off .. off+k-1 of the output
// word, with the matching byte mask. This is how the iDMA handles arbitrary
// source and destination alignment.
//
// push_ready_o is high while NB bytes of space are free. pop_valid_o is high
// when k bytes are queued, or when drain_i says the source has ended; a pop
// then returns whatever is left (possibly nothing, with an all-zero mask).
// clear_i empties the queue between transfers. Capacity is CAP bytes.
//
// The realignment buffer is this design's way of supporting arbitrary
// alignment; its capacity (CAP = 4 bus words by default) is a choice.
module idma_byte_buffer
  import eth_pkg::*;
#(
  parameter int unsigned CAP = 4 * AxiStrbWidth
) (
  input  logic                          clk_i,
  input  logic                          rst_ni,
  input  logic                          clear_i,
  input  logic                          drain_i,
  input  data_t                         push_data_i,
  input  strb_t                         push_mask_i,
  input  logic                          push_valid_i,
  output logic                          push_ready_o,
  input  logic [$clog2(AxiStrbWidth):0] pop_bytes_i,   // 1 .. NB
  input  logic [$clog2(AxiStrbWidth)-1:0] pop_offset_i, // first output lane
  output data_t                         pop_data_o,
  output strb_t                         pop_mask_o,
  output logic                          pop_valid_o,
  input  logic                          pop_ready_i,
  output logic                          empty_o,
  output logic [$clog2(CAP):0]          count_o
);
  localparam int unsigned NB = AxiStrbWidth;
  localparam int unsigned PW = $clog2(CAP);

  logic [7:0]  buf_q [CAP];
  logic [PW-1:0] wptr_q, rptr_q;
  logic [PW:0]   cnt_q;

  // ---------------------------------------------------------------- push
  logic [PW-1:0] dest [NB];
  logic [PW:0]   n_push;
  always_comb begin
    logic [PW:0] j;
    j = '0;
    for (int i = 0; i < NB; i++) begin
      dest[i] = wptr_q + j[PW-1:0];
      if (push_mask_i[i]) j = j + 1'b1;
    end
    n_push = j;
  end

  logic push;
  assign push_ready_o = (CAP - 32'(cnt_q)) >= NB;
  assign push         = push_valid_i && push_ready_o;

  // ---------------------------------------------------------------- pop
  logic [PW:0] n_pop;
  logic        pop;
  always_comb begin
    if (cnt_q >= (PW+1)'(pop_bytes_i)) n_pop = (PW+1)'(pop_bytes_i);
    else                      n_pop = cnt_q;
    pop_valid_o = (cnt_q >= (PW+1)'(pop_bytes_i)) || drain_i;
    pop_data_o  = '0;
    pop_mask_o  = '0;
    for (int l = 0; l < NB; l++) begin
      logic [PW:0] idx;
      idx = (PW+1)'(l) - (PW+1)'(pop_offset_i);
      if (l >= pop_offset_i && idx < n_pop) begin
        pop_data_o[8*l +: 8] = buf_q[rptr_q + idx[PW-1:0]];
        pop_mask_o[l]        = 1'b1;
      end
    end
  end
  assign pop     = pop_valid_o && pop_ready_i;
  assign empty_o = (cnt_q == 0);
  assign count_o = cnt_q;

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
      if (push) wptr_q <= wptr_q + n_push[PW-1:0];
      if (pop)  rptr_q <= rptr_q + n_pop[PW-1:0];
      cnt_q <= cnt_q + (push ? n_push : '0) - (pop ? n_pop : '0);
    end
  end

  always_ff @(posedge clk_i) begin
    if (push && !clear_i) begin
      for (int i = 0; i < NB; i++) begin
        if (push_mask_i[i]) buf_q[dest[i]] <= push_data_i[8*i +: 8];
      end
    end
  end

  initial assert (CAP >= 2 * NB && (CAP & (CAP - 1)) == 0)
    else $error("idma_byte_buffer: CAP must be a power of two >= 2*NB");
endmodule

// axi_mem_model: behavioural AXI4 subordinate memory for the testbenches.
//
// A byte array of MEM_BYTES (addresses wrap) serving INCR bursts. Every
// channel's ready/valid is randomly withheld with probability STALL_PCT
// percent (adjustable at run time through stall_pct) so that managers see
// backpressure. Read bursts are served in order, write bursts likewise, with
// a B response after the last W beat. It checks the AXI4 rules the iDMA must
// keep (no burst crosses 4 KiB, at most 256 beats, full-width size, INCR)
// and counts violations, bursts and stall cycles for the testbench.
//
// Stands in for the system crossbar and memory, which lie outside the
// controller; its stall behaviour and checks are this testbench's own.
module axi_mem_model
  import eth_pkg::*;
#(
  parameter int unsigned MEM_BYTES = 65536,
  parameter int unsigned STALL_PCT = 20
) (
  input  logic     clk_i,
  input  logic     rst_ni,
  input  axi_req_t req_i,
  output axi_rsp_t rsp_o
);
  localparam int unsigned NB = AxiStrbWidth;

  byte unsigned mem [MEM_BYTES];
  int unsigned  stall_pct = STALL_PCT;
  int unsigned  violations = 0;
  int unsigned  ar_bursts = 0, aw_bursts = 0;
  int unsigned  stall_cycles = 0;
  int unsigned  max_beats = 0;

  axi_ax_t ar_q[$], aw_q[$];
  int unsigned r_beat = 0, w_beat = 0;
  int unsigned b_pending = 0;

  function automatic bit roll();
    return ($urandom_range(99) >= stall_pct);
  endfunction

  function automatic void check_ax(axi_ax_t ax);
    longint unsigned first, last;
    first = ax.addr;
    last  = (ax.addr & ~longint'(NB - 1)) + (longint'(ax.len) + 1) * NB - 1;
    if ((first >> 12) != (last >> 12)) violations++;
    if (ax.size != $clog2(NB)) violations++;
    if (ax.burst != AxiBurstIncr) violations++;
    if (int'(ax.len) + 1 > max_beats) max_beats = int'(ax.len) + 1;
  endfunction

  initial begin
    rsp_o = '0;
    foreach (mem[i]) mem[i] = 8'h00;
  end

  always @(posedge clk_i) begin
    if (!rst_ni) begin
      rsp_o <= '0;
      ar_q.delete();
      aw_q.delete();
      r_beat = 0;
      w_beat = 0;
      b_pending = 0;
    end else begin
      // handshakes of the cycle that ends now
      if (req_i.ar_valid && rsp_o.ar_ready) begin
        ar_q.push_back(req_i.ar);
        ar_bursts++;
        check_ax(req_i.ar);
      end
      if (req_i.aw_valid && rsp_o.aw_ready) begin
        aw_q.push_back(req_i.aw);
        aw_bursts++;
        check_ax(req_i.aw);
      end
      if (rsp_o.r_valid && req_i.r_ready) begin
        if (rsp_o.r.last) begin
          void'(ar_q.pop_front());
          r_beat = 0;
        end else r_beat++;
      end
      if (req_i.w_valid && rsp_o.w_ready) begin
        axi_ax_t aw;
        longint unsigned base;
        aw   = aw_q[0];
        base = (aw.addr & ~longint'(NB - 1)) + w_beat * NB;
        for (int l = 0; l < NB; l++)
          if (req_i.w.strb[l]) mem[(base + l) % MEM_BYTES] = req_i.w.data[8*l +: 8];
        if (req_i.w.last != (w_beat == aw.len)) violations++;
        if (w_beat == aw.len) begin
          void'(aw_q.pop_front());
          w_beat = 0;
          b_pending++;
        end else w_beat++;
      end
      if (rsp_o.b_valid && req_i.b_ready) b_pending--;
      if ((req_i.ar_valid && !rsp_o.ar_ready) || (req_i.aw_valid && !rsp_o.aw_ready) ||
          (req_i.w_valid && !rsp_o.w_ready)) stall_cycles++;

      // drive the next cycle
      rsp_o.ar_ready <= (ar_q.size() < 4) && roll();
      rsp_o.aw_ready <= (aw_q.size() < 4) && roll();
      rsp_o.w_ready  <= (aw_q.size() > 0) && roll();
      if (rsp_o.r_valid && !req_i.r_ready) begin
        // hold the offered beat
      end else if (ar_q.size() > 0 && roll()) begin
        axi_ax_t ar;
        longint unsigned base;
        data_t d;
        ar   = ar_q[0];
        base = (ar.addr & ~longint'(NB - 1)) + r_beat * NB;
        for (int l = 0; l < NB; l++) d[8*l +: 8] = mem[(base + l) % MEM_BYTES];
        rsp_o.r_valid <= 1'b1;
        rsp_o.r       <= '{id: ar.id, data: d, resp: AxiRespOkay, last: (r_beat == ar.len)};
      end else begin
        rsp_o.r_valid <= 1'b0;
      end
      if (!(rsp_o.b_valid && !req_i.b_ready)) rsp_o.b_valid <= (b_pending > 0) && roll();
      rsp_o.b       <= '{id: '0, resp: AxiRespOkay};
    end
  end
endmodule

// tb_axis_upsizer: checks the byte-to-wide converter.
//
// Random frames of 1 to 40 bytes arrive one byte per cycle, as from the MAC
// receiver, with some tuser flags. With the output always ready the input
// must never be stalled. With random output backpressure no byte may be
// lost: every beat must hold the next bytes in lanes 0 upwards, tkeep must
// mark exactly those, a beat closes at 8 bytes or at tlast, and tuser is
// the OR of its bytes' flags.
//
// The expected packing is this design's; the stimulus is random.
`timescale 1ns/1ps
module tb_axis_upsizer;
  import eth_pkg::*;
  localparam int unsigned NB = AxiStrbWidth;

  logic clk = 0, rst_n = 1;
  always #4 clk = ~clk;

  axis_byte_t s;
  axis_wide_t m;
  logic s_valid, s_ready, m_valid, m_ready;
  bit rand_ready = 0;

  axis_upsizer dut (
    .clk_i(clk), .rst_ni(rst_n), .s_data_i(s), .s_valid_i(s_valid), .s_ready_o(s_ready),
    .m_data_o(m), .m_valid_o(m_valid), .m_ready_i(m_ready)
  );

  int checks = 0, failures = 0;

  // Waits for the clock edge at which the offered input is taken (ready is
  // sampled just before the edge).
  task automatic wait_accept();
    bit hs;
    do begin
      @(negedge clk);
      hs = s_ready;
      @(posedge clk);
    end while (!hs);
    #0.1;
  endtask
  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  axis_wide_t exp_q[$];
  int n_bad = 0, n_stall = 0;

  always @(posedge clk) begin
    if (rst_n && m_valid && m_ready) begin
      if (exp_q.size() == 0 || m !== exp_q[0]) n_bad++;
      if (exp_q.size() != 0) void'(exp_q.pop_front());
    end
    if (rst_n && s_valid && !s_ready) n_stall++;
    m_ready <= rand_ready ? ($urandom_range(3) == 0) : 1'b1;
  end

  task automatic run_frames(int nframes);
    for (int f = 0; f < nframes; f++) begin
      int len;
      axis_wide_t acc;
      int cnt;
      len = $urandom_range(1, 40);
      acc = '0;
      cnt = 0;
      for (int i = 0; i < len; i++) begin
        s.tdata = 8'($urandom);
        s.tlast = (i == len - 1);
        s.tuser = ($urandom_range(9) == 0);
        acc.tdata[8*cnt +: 8] = s.tdata;
        acc.tkeep[cnt] = 1'b1;
        acc.tuser |= s.tuser;
        cnt++;
        if (cnt == NB || s.tlast) begin
          acc.tlast = s.tlast;
          exp_q.push_back(acc);
          acc = '0;
          cnt = 0;
        end
        s_valid = 1;
        wait_accept();
      end
      s_valid = 0;
      repeat ($urandom_range(0, 2)) @(posedge clk);
      #0.1;
    end
  endtask

  // Waits for the expected beats to drain, at most 200 cycles.
  task automatic drain(string what);
    for (int i = 0; i < 200 && exp_q.size() != 0; i++) @(posedge clk);
    #0.1;
    check(exp_q.size() == 0, $sformatf("%s: all beats delivered (%0d missing)", what, exp_q.size()));
  endtask

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    s = '0; s_valid = 0; m_ready = 1;
    #1 rst_n = 0;
    #20 rst_n = 1;
    @(posedge clk); #0.1;
    run_frames(50);
    drain("line rate");
    check(n_bad == 0, "line rate: beats as expected");
    check(n_stall == 0, $sformatf("line rate: input never stalled (%0d stalls)", n_stall));
    rand_ready = 1;
    run_frames(100);
    drain("backpressure");
    repeat (3) @(posedge clk);
    check(n_bad == 0, $sformatf("backpressure: %0d wrong beats", n_bad));
    check(n_stall > 0, "backpressure reached the input");
    check(!m_valid, "idle at the end");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

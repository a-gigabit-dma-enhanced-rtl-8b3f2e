// tb_axis_downsizer: checks the wide-to-byte converter.
//
// Part 1 streams frames of full 8-byte beats with the output always ready:
// the bytes must leave in lane order, one per cycle with no bubble (a frame
// of N bytes takes N cycles once the first byte is out), tlast on the final
// byte. Part 2 sends beats with random keep masks (null lanes) and random
// backpressure on both sides; the output must be exactly the kept bytes in
// order, with tlast on the last kept byte of each tlast beat.
//
// The no-bubble requirement comes from the controller having to feed the
// MAC at line rate; the stimulus is this testbench's own.
`timescale 1ns/1ps
module tb_axis_downsizer;
  import eth_pkg::*;
  localparam int unsigned NB = AxiStrbWidth;

  logic clk = 0, rst_n = 1;
  always #4 clk = ~clk;

  axis_wide_t s;
  axis_byte_t m;
  logic s_valid, s_ready, m_valid, m_ready;

  axis_downsizer dut (
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

  typedef struct { logic [7:0] d; bit last; } exp_t;
  exp_t exp_q[$];
  int n_bad = 0, n_out = 0;
  bit rand_ready = 0;
  int first_cycle = -1, last_cycle = -1, cyc = 0;

  always @(posedge clk) begin
    cyc++;
    if (rst_n && m_valid && m_ready) begin
      if (exp_q.size() == 0 || m.tdata != exp_q[0].d || m.tlast != exp_q[0].last) begin n_bad++; if (n_bad < 4) $display("got %h %b exp %h %b at %0t", m.tdata, m.tlast, exp_q[0].d, exp_q[0].last, $time); end
      if (exp_q.size() != 0) void'(exp_q.pop_front());
      if (first_cycle < 0) first_cycle = cyc;
      last_cycle = cyc;
      n_out++;
    end
    m_ready <= rand_ready ? ($urandom_range(2) != 0) : 1'b1;
  end

  task automatic send_beat(axis_wide_t b);
    s = b;
    s_valid = 1'b1;
    wait_accept();
    s_valid = $urandom_range(3) == 0 && rand_ready ? 1'b0 : s_valid;
    if (!s_valid) begin repeat ($urandom_range(3)) @(posedge clk); #0.1; end
    s_valid = 1'b0;
  endtask

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    axis_wide_t b;
    s = '0; s_valid = 0; m_ready = 1;
    #1 rst_n = 0;
    #20 rst_n = 1;
    @(posedge clk); #0.1;
    // part 1: 64-byte frame of full beats, back to back
    first_cycle = -1;
    for (int k = 0; k < 8; k++) begin
      b.tdata = {$urandom, $urandom};
      b.tkeep = '1;
      b.tlast = (k == 7);
      b.tuser = 1'b0;
      for (int l = 0; l < NB; l++) exp_q.push_back('{b.tdata[8*l +: 8], (k == 7) && (l == NB - 1)});
      s = b;
      s_valid = 1;
      wait_accept();
    end
    s_valid = 0;
    wait (exp_q.size() == 0);
    @(posedge clk);
    #0.1;
    check(n_bad == 0, "full beats: bytes and tlast in order");
    check(last_cycle - first_cycle + 1 == 64, $sformatf("64 bytes in %0d cycles, expected 64",
                                                       last_cycle - first_cycle + 1));
    // part 2: random keep masks and backpressure
    rand_ready = 1;
    for (int k = 0; k < 400; k++) begin
      b.tdata = {$urandom, $urandom};
      b.tkeep = (k % 5 == 4) ? '0 : 8'($urandom);
      if (b.tkeep == 0 && k % 5 != 4) b.tkeep = 8'h10;
      b.tlast = (k % 5 == 3);
      b.tuser = 1'b0;
      for (int l = 0; l < NB; l++) begin
        bit lastkept;
        lastkept = b.tkeep[l] && ((b.tkeep >> (l + 1)) == 0);
        if (b.tkeep[l]) exp_q.push_back('{b.tdata[8*l +: 8], b.tlast && lastkept});
      end
      send_beat(b);
    end
    wait (exp_q.size() == 0);
    repeat (4) @(posedge clk);
    check(n_bad == 0, $sformatf("random keep: %0d mismatching bytes", n_bad));
    check(!m_valid, "idle at the end");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

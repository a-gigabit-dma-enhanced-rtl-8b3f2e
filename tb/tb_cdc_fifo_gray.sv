// tb_cdc_fifo_gray: checks the dual-clock FIFO.
//
// Writer on a 250 MHz clock, reader on a 125 MHz clock of unrelated phase,
// both with random valid/ready. 2000 random words must come out complete and
// in order. With the reader stopped the writer must be able to place exactly
// DEPTH words before src_ready falls, and nothing is visible at the read side
// before the first word has crossed.
//
// Clock ratios and the 16-bit data type (the depth stays 8) are
// this testbench's choices.
`timescale 1ns/1ps
module tb_cdc_fifo_gray;
  localparam int unsigned DEPTH = 8;
  localparam int unsigned N = 2000;

  logic wclk = 0, rclk = 0, rst_n = 1;
  always #2.0 wclk = ~wclk;
  initial begin #0.7; forever #4.0 rclk = ~rclk; end

  logic [15:0] wdata, rdata;
  logic wvalid, wready, rvalid, rready;
  bit   reader_on = 0;

  cdc_fifo_gray #(.T(logic [15:0]), .DEPTH(DEPTH)) dut (
    .src_clk_i(wclk), .src_rst_ni(rst_n), .src_data_i(wdata), .src_valid_i(wvalid), .src_ready_o(wready),
    .dst_clk_i(rclk), .dst_rst_ni(rst_n), .dst_data_o(rdata), .dst_valid_o(rvalid), .dst_ready_i(rready)
  );

  int checks = 0, failures = 0;
  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  logic [15:0] sent[$];
  int unsigned n_sent = 0, n_recv = 0, n_bad = 0;

  // writer: holds a word until it is taken
  always @(posedge wclk) begin
    if (rst_n && !(wvalid && !wready)) begin
      if (wvalid && wready) begin
        sent.push_back(wdata);
        n_sent++;
      end
      if (n_sent < N && $urandom_range(3) != 0) begin
        wvalid <= 1'b1;
        wdata  <= 16'($urandom);
      end else wvalid <= 1'b0;
    end else if (rst_n && wvalid && wready) begin
      sent.push_back(wdata);
      n_sent++;
      wvalid <= 1'b0;
    end
  end

  always @(posedge rclk) begin
    if (rst_n) begin
      if (rvalid && rready) begin
        if (sent.size() == 0 || rdata != sent[0]) n_bad++;
        if (sent.size() != 0) void'(sent.pop_front());
        n_recv++;
      end
      rready <= reader_on && ($urandom_range(2) != 0);
    end
  end

  initial begin
    repeat (200000) @(posedge wclk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int filled;
    wvalid = 0; rready = 0; wdata = '0;
    #0.3 rst_n = 0;
    #20 rst_n = 1;
    // fill with the reader stopped
    @(negedge wclk);
    check(!rvalid, "empty after reset");
    filled = 0;
    force wvalid = 1'b1;
    #0.1;
    for (int i = 0; i < 20; i++) begin
      if (wready) filled++;
      @(negedge wclk);
      #0.1;
    end
    release wvalid;
    // the forced pushes went in without the writer process recording them: reset again
    check(filled == DEPTH, $sformatf("accepts exactly DEPTH=%0d words when not read (%0d)", DEPTH, filled));
    check(rvalid, "words visible at the read side");
    #0.3 rst_n = 0;
    wvalid = 0;
    #20 rst_n = 1;
    sent.delete();
    n_sent = 0;
    reader_on = 1;
    wait (n_recv == N);
    repeat (20) @(posedge rclk);
    check(n_bad == 0, $sformatf("%0d words out of order or wrong", n_bad));
    check(n_recv == N && n_sent == N, $sformatf("all words crossed (%0d/%0d)", n_recv, n_sent));
    check(!rvalid, "empty at the end");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

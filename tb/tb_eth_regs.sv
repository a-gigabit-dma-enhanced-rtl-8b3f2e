// tb_eth_regs: checks the register file.
//
// Writes and reads back every read-write register (with byte strobes),
// checks that the transfer description reaches the iDMA request exactly and
// that START produces one request pulse, that the iDMA response and the MAC
// events set their status bits and counters, that status bits clear only
// when 1 is written to them, that the interrupt follows IRQ_EN and DONE, and
// that unmapped addresses, writes to read-only registers and START while
// busy answer with an error.
//
// The register map under test is this design's own.
`timescale 1ns/1ps
module tb_eth_regs;
  import eth_pkg::*;

  logic clk = 0, rst_n = 1;
  always #2 clk = ~clk;

  reg_req_t  rq;
  reg_rsp_t  rs;
  idma_req_t dreq;
  idma_rsp_t drsp;
  logic dvalid, dready, dbusy, drsp_valid, dferr, rx_en, irq;
  logic ev_ok, ev_fcs, ev_ovf, ev_und, ev_sent;

  eth_regs dut (
    .clk_i(clk), .rst_ni(rst_n), .reg_req_i(rq), .reg_rsp_o(rs),
    .dma_req_o(dreq), .dma_req_valid_o(dvalid), .dma_req_ready_i(dready), .dma_busy_i(dbusy),
    .dma_rsp_valid_i(drsp_valid), .dma_rsp_i(drsp), .dma_frame_err_i(dferr),
    .rx_en_o(rx_en), .ev_frame_ok_i(ev_ok), .ev_fcs_err_i(ev_fcs), .ev_overflow_i(ev_ovf),
    .ev_underrun_i(ev_und), .ev_frame_sent_i(ev_sent), .irq_o(irq)
  );

  int checks = 0, failures = 0;
  task automatic check(bit c, string what);
    checks++;
    if (!c) begin failures++; $display("FAIL: %s", what); end
  endtask

  int n_req = 0;
  always @(posedge clk) if (rst_n && dvalid && dready) n_req++;

  task automatic wr(logic [7:0] a, logic [31:0] d, logic [3:0] strb = 4'hF, bit exp_err = 0);
    rq = '{addr: 32'(a), write: 1'b1, wdata: d, wstrb: strb, valid: 1'b1};
    #0.1;
    check(rs.ready && rs.error == exp_err, $sformatf("write %02x: error %0b expected %0b", a, rs.error, exp_err));
    @(posedge clk); #0.1;
    rq = '0;
  endtask

  task automatic rd(logic [7:0] a, output logic [31:0] d, input bit exp_err = 0);
    rq = '{addr: 32'(a), write: 1'b0, wdata: '0, wstrb: '0, valid: 1'b1};
    #0.1;
    d = rs.rdata;
    check(rs.ready && rs.error == exp_err, $sformatf("read %02x: error %0b", a, rs.error));
    @(posedge clk); #0.1;
    rq = '0;
  endtask

  task automatic pulse(ref logic s);
    s = 1;
    @(posedge clk); #0.1;
    s = 0;
  endtask

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [31:0] v;
    rq = '0; dready = 1; dbusy = 0; drsp_valid = 0; drsp = '0; dferr = 0;
    ev_ok = 0; ev_fcs = 0; ev_ovf = 0; ev_und = 0; ev_sent = 0;
    #1 rst_n = 0;
    #10 rst_n = 1;
    @(posedge clk); #0.1;
    rd(8'h04, v);
    check(v == 0 && !irq && !rx_en, "status clear after reset");
    // read-write registers
    wr(8'h08, 32'h1234_5678); wr(8'h0C, 32'h0000_00AB);
    wr(8'h10, 32'h9ABC_DEF0); wr(8'h14, 32'h0000_00CD);
    wr(8'h18, 32'd1536);      wr(8'h1C, 32'h4);
    wr(8'h18, 32'hFFFF_FF07, 4'b0001);   // byte strobe: only the low byte
    rd(8'h18, v);
    check(v == 32'd1543, $sformatf("byte strobe on LENGTH: %0d", v));
    rd(8'h08, v); check(v == 32'h1234_5678, "SRC_LO");
    rd(8'h0C, v); check(v == 32'h0000_00AB, "SRC_HI");
    rd(8'h14, v); check(v == 32'h0000_00CD, "DST_HI");
    check(dreq.src_addr == 64'hAB_1234_5678 && dreq.dst_addr == 64'hCD_9ABC_DEF0 &&
          dreq.length == 1543 && dreq.src_proto == ProtoAxi && dreq.dst_proto == ProtoAxis,
          "request fields reach the iDMA");
    wr(8'h00, 32'h1);
    check(rx_en && !irq, "RX_EN drives the MAC");
    // START
    wr(8'h20, 32'h1);
    check(n_req == 1, "START: one request");
    wr(8'h20, 32'h0);
    check(n_req == 1, "writing 0 to START does nothing");
    dready = 0; dbusy = 1;
    wr(8'h20, 32'h1, 4'hF, 1);
    check(n_req == 1, "START while busy: error, no request");
    rd(8'h04, v); check(v[0] == 1, "BUSY visible");
    // response and events
    drsp = '{bytes: 32'd777, error: 1'b1};
    dferr = 1;
    pulse(drsp_valid);
    dready = 1; dbusy = 0;
    pulse(ev_ok); pulse(ev_ok); pulse(ev_fcs); pulse(ev_ovf); pulse(ev_und); pulse(ev_sent);
    rd(8'h04, v);
    check(v[7:1] == 7'h7F, $sformatf("all status bits set: %b", v[7:1]));
    rd(8'h24, v); check(v == 777, "BYTES");
    rd(8'h28, v); check(v == 2, "RX_FRAMES counts");
    rd(8'h2C, v); check(v == 1, "TX_FRAMES counts");
    check(!irq, "no interrupt while IRQ_EN clear");
    wr(8'h00, 32'h3);
    check(irq, "interrupt with IRQ_EN and DONE");
    // write-one-to-clear
    wr(8'h04, 32'h0);
    rd(8'h04, v); check(v[7:1] == 7'h7F, "writing 0 clears nothing");
    wr(8'h04, 32'h2);
    rd(8'h04, v); check(v[7:1] == 7'h7E && !irq, "W1C DONE clears DONE and the interrupt");
    wr(8'h04, 32'hFC);
    rd(8'h04, v); check(v[7:1] == 0, "W1C clears the rest");
    // errors
    wr(8'h24, 32'h5, 4'hF, 1);
    rd(8'h24, v); check(v == 777, "read-only BYTES unchanged");
    rd(8'h40, v, 1);
    wr(8'h06, 32'h0, 4'hF, 1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

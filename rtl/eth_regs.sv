// eth_regs: configuration and status registers of the Ethernet controller.
//
// A single register file on a simple register bus configures both the iDMA
// and the MAC at run time. Software describes a transfer (source and
// destination address, length, protocol of each side), writes START, and
// waits for DONE (polling or interrupt). A frame is sent with
// src = AXI buffer, dst = AXI-Stream; a frame is received with
// src = AXI-Stream, dst = AXI buffer.
//
// Register map (32-bit registers, byte offsets; the map is this design's):
//   0x00 CTRL      RW  [0] RX_EN  MAC accepts frames   [1] IRQ_EN
//   0x04 STATUS    RO  [0] BUSY
//                  W1C [1] DONE  [2] AXI_ERR  [3] FRAME_ERR (last transfer
//                      took a bad frame)  [4] FCS_ERR  [5] RX_OVERFLOW
//                      [6] TX_UNDERRUN  [7] RX_FRAME (good frame received)
//   0x08 SRC_LO / 0x0C SRC_HI   source address
//   0x10 DST_LO / 0x14 DST_HI   destination address
//   0x18 LENGTH    RW  bytes to move
//   0x1C PROTO     RW  [1:0] source, [3:2] destination: 0 AXI, 1 AXI-Stream
//   0x20 START     WO  write 1 to bit 0: launch the transfer
//   0x24 BYTES     RO  bytes moved by the last transfer
//   0x28 RX_FRAMES RO  good frames received
//   0x2C TX_FRAMES RO  frames sent
// Accesses are answered in the same cycle (ready is always high). An
// unmapped address, a write to a read-only register or a START while the
// iDMA is busy returns error. irq_o = IRQ_EN and DONE.
module eth_regs
  import eth_pkg::*;
(
  input  logic      clk_i,
  input  logic      rst_ni,
  input  reg_req_t  reg_req_i,
  output reg_rsp_t  reg_rsp_o,
  // iDMA
  output idma_req_t dma_req_o,
  output logic      dma_req_valid_o,
  input  logic      dma_req_ready_i,
  input  logic      dma_busy_i,
  input  logic      dma_rsp_valid_i,
  input  idma_rsp_t dma_rsp_i,
  input  logic      dma_frame_err_i,
  // MAC (events already in this clock domain)
  output logic      rx_en_o,
  input  logic      ev_frame_ok_i,
  input  logic      ev_fcs_err_i,
  input  logic      ev_overflow_i,
  input  logic      ev_underrun_i,
  input  logic      ev_frame_sent_i,
  output logic      irq_o
);
  localparam logic [7:0] AddrCtrl   = 8'h00;
  localparam logic [7:0] AddrStatus = 8'h04;
  localparam logic [7:0] AddrSrcLo  = 8'h08;
  localparam logic [7:0] AddrSrcHi  = 8'h0C;
  localparam logic [7:0] AddrDstLo  = 8'h10;
  localparam logic [7:0] AddrDstHi  = 8'h14;
  localparam logic [7:0] AddrLength = 8'h18;
  localparam logic [7:0] AddrProto  = 8'h1C;
  localparam logic [7:0] AddrStart  = 8'h20;
  localparam logic [7:0] AddrBytes  = 8'h24;
  localparam logic [7:0] AddrRxCnt  = 8'h28;
  localparam logic [7:0] AddrTxCnt  = 8'h2C;

  typedef logic [RegDataWidth-1:0] word_t;

  logic [1:0]  ctrl_q;
  logic [7:1]  sticky_q;
  addr_t       src_q, dst_q;
  len_t        len_q, bytes_q;
  logic [3:0]  proto_q;
  word_t       rx_cnt_q, tx_cnt_q;

  logic [7:0] a;
  logic       wr, rd, hit, ro_write;
  word_t      wmask;
  assign a  = reg_req_i.addr[7:0];
  assign wr = reg_req_i.valid && reg_req_i.write;
  assign rd = reg_req_i.valid && !reg_req_i.write;
  always_comb begin
    for (int i = 0; i < RegDataWidth / 8; i++) wmask[8*i +: 8] = {8{reg_req_i.wstrb[i]}};
  end

  function automatic word_t upd(word_t old, word_t d, word_t m);
    return (old & ~m) | (d & m);
  endfunction

  logic start_wr;
  assign start_wr = wr && a == AddrStart && reg_req_i.wstrb[0] && reg_req_i.wdata[0];

  always_comb begin
    hit      = (reg_req_i.addr[RegAddrWidth-1:8] == '0) && (a[1:0] == 2'b00) && (a <= AddrTxCnt);
    ro_write = wr && (a == AddrBytes || a == AddrRxCnt || a == AddrTxCnt);
    reg_rsp_o.ready = 1'b1;
    reg_rsp_o.error = reg_req_i.valid && (!hit || ro_write || (start_wr && !dma_req_ready_i));
    reg_rsp_o.rdata = '0;
    if (rd) begin
      unique case (a)
        AddrCtrl:   reg_rsp_o.rdata = word_t'(ctrl_q);
        AddrStatus: reg_rsp_o.rdata = word_t'({sticky_q, dma_busy_i});
        AddrSrcLo:  reg_rsp_o.rdata = src_q[31:0];
        AddrSrcHi:  reg_rsp_o.rdata = src_q[63:32];
        AddrDstLo:  reg_rsp_o.rdata = dst_q[31:0];
        AddrDstHi:  reg_rsp_o.rdata = dst_q[63:32];
        AddrLength: reg_rsp_o.rdata = len_q;
        AddrProto:  reg_rsp_o.rdata = word_t'(proto_q);
        AddrBytes:  reg_rsp_o.rdata = bytes_q;
        AddrRxCnt:  reg_rsp_o.rdata = rx_cnt_q;
        AddrTxCnt:  reg_rsp_o.rdata = tx_cnt_q;
        default:    reg_rsp_o.rdata = '0;
      endcase
    end
  end

  // Status events raised this cycle, one bit per sticky STATUS flag.
  logic [7:1] set;
  assign set = {ev_frame_ok_i, ev_underrun_i, ev_overflow_i, ev_fcs_err_i,
                dma_rsp_valid_i && dma_frame_err_i,
                dma_rsp_valid_i && dma_rsp_i.error,
                dma_rsp_valid_i};

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      ctrl_q   <= '0;
      sticky_q <= '0;
      src_q    <= '0;
      dst_q    <= '0;
      len_q    <= '0;
      proto_q  <= '0;
      bytes_q  <= '0;
      rx_cnt_q <= '0;
      tx_cnt_q <= '0;
    end else begin
      if (wr) begin
        unique case (a)
          AddrCtrl:   ctrl_q        <= 2'(upd(word_t'(ctrl_q), reg_req_i.wdata, wmask));
          AddrSrcLo:  src_q[31:0]   <= upd(src_q[31:0], reg_req_i.wdata, wmask);
          AddrSrcHi:  src_q[63:32]  <= upd(src_q[63:32], reg_req_i.wdata, wmask);
          AddrDstLo:  dst_q[31:0]   <= upd(dst_q[31:0], reg_req_i.wdata, wmask);
          AddrDstHi:  dst_q[63:32]  <= upd(dst_q[63:32], reg_req_i.wdata, wmask);
          AddrLength: len_q         <= upd(len_q, reg_req_i.wdata, wmask);
          AddrProto:  proto_q       <= 4'(upd(word_t'(proto_q), reg_req_i.wdata, wmask));
          default: ;
        endcase
      end
      // Events set their bit even in the cycle software clears it.
      sticky_q <= ((wr && a == AddrStatus) ? sticky_q & ~(reg_req_i.wdata[7:1] & wmask[7:1])
                                           : sticky_q) | set;
      if (dma_rsp_valid_i) bytes_q <= dma_rsp_i.bytes;
      if (ev_frame_ok_i)   rx_cnt_q <= rx_cnt_q + 1'b1;
      if (ev_frame_sent_i) tx_cnt_q <= tx_cnt_q + 1'b1;
    end
  end

  assign dma_req_valid_o     = start_wr;
  assign dma_req_o.src_addr  = src_q;
  assign dma_req_o.dst_addr  = dst_q;
  assign dma_req_o.length    = len_q;
  assign dma_req_o.src_proto = proto_e'(proto_q[1:0]);
  assign dma_req_o.dst_proto = proto_e'(proto_q[3:2]);
  assign rx_en_o             = ctrl_q[0];
  assign irq_o               = ctrl_q[1] && sticky_q[1];
endmodule

// eth_pkg: types and constants shared by the DMA-enhanced Ethernet controller.
//
// The controller moves Ethernet frames between system memory and an RGMII
// PHY without frame buffers: an iDMA engine reads (or writes) memory over an
// AXI4 manager port and streams the bytes over AXI-Stream, through a
// clock-domain-crossing FIFO and a width converter, to the MAC. This package
// holds the bus widths, the AXI4 / AXI-Stream / register-bus structs and the
// Ethernet CRC-32 step function used by the MAC and by the testbenches.
//
// The widths are this design's choice; the architecture only asks that the
// system-side stream be wider than the MAC's byte stream. 64-bit data and
// address match a typical 64-bit RISC-V host SoC.
package eth_pkg;

  // ---------------------------------------------------------------- widths
  localparam int unsigned AxiAddrWidth = 64;
  localparam int unsigned AxiDataWidth = 64;
  localparam int unsigned AxiStrbWidth = AxiDataWidth / 8;
  localparam int unsigned AxiIdWidth   = 4;
  localparam int unsigned RegAddrWidth = 32;
  localparam int unsigned RegDataWidth = 32;
  // Number of bytes a single transfer may move (length register width).
  localparam int unsigned LenWidth     = 32;

  typedef logic [AxiAddrWidth-1:0] addr_t;
  typedef logic [AxiDataWidth-1:0] data_t;
  typedef logic [AxiStrbWidth-1:0] strb_t;
  typedef logic [AxiIdWidth-1:0]   id_t;
  typedef logic [LenWidth-1:0]     len_t;

  // AXI4 burst / size / response encodings (AXI4 specification).
  localparam logic [1:0] AxiBurstIncr = 2'b01;
  localparam logic [1:0] AxiRespOkay  = 2'b00;

  // ---------------------------------------------------------------- AXI4
  typedef struct packed {
    id_t         id;
    addr_t       addr;
    logic [7:0]  len;
    logic [2:0]  size;
    logic [1:0]  burst;
  } axi_ax_t;

  typedef struct packed {
    data_t data;
    strb_t strb;
    logic  last;
  } axi_w_t;

  typedef struct packed {
    id_t        id;
    logic [1:0] resp;
  } axi_b_t;

  typedef struct packed {
    id_t        id;
    data_t      data;
    logic [1:0] resp;
    logic       last;
  } axi_r_t;

  // Manager -> subordinate
  typedef struct packed {
    axi_ax_t aw;
    logic    aw_valid;
    axi_w_t  w;
    logic    w_valid;
    logic    b_ready;
    axi_ax_t ar;
    logic    ar_valid;
    logic    r_ready;
  } axi_req_t;

  // Subordinate -> manager
  typedef struct packed {
    logic   aw_ready;
    logic   w_ready;
    axi_b_t b;
    logic   b_valid;
    logic   ar_ready;
    axi_r_t r;
    logic   r_valid;
  } axi_rsp_t;

  // ---------------------------------------------------------------- AXI-Stream
  // Wide stream between the iDMA and the CDC FIFOs. tuser flags a frame
  // received with a bad FCS or an RGMII error (RX direction only).
  typedef struct packed {
    data_t tdata;
    strb_t tkeep;
    logic  tlast;
    logic  tuser;
  } axis_wide_t;

  // Byte stream of the MAC.
  typedef struct packed {
    logic [7:0] tdata;
    logic       tlast;
    logic       tuser;
  } axis_byte_t;

  // ---------------------------------------------------------------- register bus
  typedef struct packed {
    logic [RegAddrWidth-1:0]   addr;
    logic                      write;
    logic [RegDataWidth-1:0]   wdata;
    logic [RegDataWidth/8-1:0] wstrb;
    logic                      valid;
  } reg_req_t;

  typedef struct packed {
    logic [RegDataWidth-1:0] rdata;
    logic                    error;
    logic                    ready;
  } reg_rsp_t;

  // ---------------------------------------------------------------- iDMA
  typedef enum logic [1:0] {
    ProtoAxi  = 2'd0,
    ProtoAxis = 2'd1
  } proto_e;

  // A one-dimensional transfer request.
  typedef struct packed {
    addr_t  src_addr;
    addr_t  dst_addr;
    len_t   length;
    proto_e src_proto;
    proto_e dst_proto;
  } idma_req_t;

  // Response of a finished transfer.
  typedef struct packed {
    len_t bytes;    // bytes taken from the source
    logic error;    // an AXI response was not OKAY
  } idma_rsp_t;

  // One legal piece of a transfer (at most one AXI burst on each side).
  typedef struct packed {
    addr_t  src_addr;
    addr_t  dst_addr;
    logic [12:0] bytes;  // 1 .. 4096
    logic   first;
    logic   last;
  } idma_chunk_t;

  // ---------------------------------------------------------------- Ethernet
  localparam logic [7:0] EthPreamble = 8'h55;
  localparam logic [7:0] EthSfd      = 8'hD5;
  localparam int unsigned EthPreambleBytes = 7;
  localparam int unsigned EthFcsBytes      = 4;
  localparam int unsigned EthIfgBytes      = 12;
  // CRC register value after running the CRC over a frame and its own FCS.
  localparam logic [31:0] EthCrcResidue = 32'hDEBB20E3;

  // One byte step of the IEEE 802.3 CRC-32 (reflected polynomial 0xEDB88320,
  // data taken LSB first). The register starts at all ones; the FCS is the
  // inverted register, sent least significant byte first.
  function automatic logic [31:0] crc32_byte(logic [31:0] crc, logic [7:0] data);
    logic [31:0] c;
    c = crc;
    for (int i = 0; i < 8; i++) begin
      if (c[0] ^ data[i]) c = (c >> 1) ^ 32'hEDB88320;
      else                c = c >> 1;
    end
    return c;
  endfunction

endpackage

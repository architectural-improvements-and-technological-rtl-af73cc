// apenet_pkg: types and constants shared by the APEnet v5 DNP (Distributed
// Network Processor) RTL.
//
// The on-chip packet word ("flit") is 256 bits wide, the width of the AXI4
// stream interfaces of the PCIe core; a packet is one header flit followed by
// its payload flits. A torus link carries 4 lanes of 4 bytes (32 bits plus 4
// control-character flags per lane) per clock, i.e. one 128-bit link word.
// Packet, descriptor and event layouts, the control characters used for
// framing and flow control, and the register map towards the PCIe DMA engines
// are this design's own choices: the published description gives none of them.
package apenet_pkg;

  // ---------------------------------------------------------------- widths
  localparam int unsigned FLIT_W     = 256;  // AXI4 stream width (Fig. 3: "256")
  localparam int unsigned LANES      = 4;    // transceivers bonded per link
  localparam int unsigned LANE_BYTES = 4;    // parallel bytes per lane and clock
  localparam int unsigned LANE_W     = 8 * LANE_BYTES;
  localparam int unsigned LINK_W     = LANES * LANE_W;           // 128
  localparam int unsigned WORDS_PER_FLIT = FLIT_W / LINK_W;      // 2
  localparam int unsigned FLIT_BYTES = FLIT_W / 8;               // 32
  localparam int unsigned PAGE_BYTES = 4096;                     // page size
  localparam int unsigned MAX_PAYLOAD_FLITS = PAGE_BYTES / FLIT_BYTES; // 128

  // ---------------------------------------------------------------- router
  localparam int unsigned PORTS  = 5;        // 5x5 ports switch
  localparam int unsigned PORT_X = 0;
  localparam int unsigned PORT_Y = 1;
  localparam int unsigned PORT_Z = 2;
  localparam int unsigned PORT_HOST = 3;     // local port towards host memory
  localparam int unsigned PORT_GPU  = 4;     // local port towards GPU memory

  // ---------------------------------------------------- 8B/10B K characters
  localparam logic [7:0] K28_0 = 8'h1C;      // flow control: stop (XOFF)
  localparam logic [7:0] K28_2 = 8'h5C;      // flow control: go (XON)
  localparam logic [7:0] K28_3 = 8'h7C;      // deskew keyword /K28.3/
  localparam logic [7:0] K28_5 = 8'hBC;      // idle

  // Reserved data words of the word-stuffing framing. A payload word equal
  // to one of them is sent preceded by LW_ESC.
  localparam logic [LINK_W-1:0] LW_SOP = {4{32'hFB5A_C3A1}};
  localparam logic [LINK_W-1:0] LW_EOP = {4{32'hFDA5_3C1E}};
  localparam logic [LINK_W-1:0] LW_ESC = {4{32'hF7E5_E5C0}};

  // one lane at the PHY boundary: bytes plus a K flag per byte
  typedef struct packed {
    logic [LANE_BYTES-1:0] k;
    logic [LANE_W-1:0]     d;
  } lane_t;

  typedef struct packed {
    logic              sop;
    logic              eop;
    logic [FLIT_W-1:0] data;
  } flit_t;

  typedef struct packed {
    logic [7:0] x;
    logic [7:0] y;
    logic [7:0] z;
  } coord_t;

  // packet header, the data of the first flit of every packet
  typedef struct packed {
    logic [103:0] rsvd;
    logic [63:0]  dst_va;    // destination virtual address (RDMA key)
    logic [31:0]  len;       // payload length in bytes
    coord_t       dst;
    coord_t       src;
    logic         dst_gpu;   // deliver through the GPU local port
    logic [6:0]   rsvd2;
  } hdr_t;

  // tx ring descriptor, one 32-byte entry of the host's tx ring
  typedef struct packed {
    logic [69:0]  rsvd;
    logic [63:0]  src_addr;  // physical address of the source page
    logic [63:0]  dst_va;    // remote virtual address
    logic [31:0]  len;       // bytes, a multiple of 32, at most one page
    coord_t       dst;
    logic         src_gpu;   // source data lives in GPU memory
    logic         dst_gpu;
  } desc_t;

  typedef enum logic [7:0] {
    EVT_SENT      = 8'd1,
    EVT_RECV      = 8'd2,
    EVT_ERR_NOBUF = 8'd3     // destination address in no registered buffer
  } evt_type_e;

  // completion event, one 32-byte entry of the host's event queue
  typedef struct packed {
    logic [151:0] rsvd;
    evt_type_e    etype;
    logic [63:0]  va;
    logic [31:0]  len;
  } evt_t;

  // DMA request queued in the DMA IF
  typedef struct packed {
    logic [63:0] addr;       // host/GPU bus address
    logic [31:0] len;        // bytes
    logic        to_host;    // 1: device -> memory (write), 0: memory -> device
    logic [1:0]  stream;     // AXI stream index used by the transfer
  } dma_req_t;

  // DMA IF request queues, one PCIe DMA engine each
  localparam int unsigned Q_CMD = 0;
  localparam int unsigned Q_TX  = 1;
  localparam int unsigned Q_RX  = 2;
  localparam int unsigned Q_CPL = 3;
  localparam int unsigned NQ    = 4;

  // AXI stream indices, device side. In: memory -> device; out: device -> memory
  localparam logic [1:0] SIN_CMD = 2'd0, SIN_UC = 2'd1, SIN_HOST_TX = 2'd2, SIN_GPU_TX = 2'd3;
  localparam logic [1:0] SOUT_RX = 2'd0, SOUT_EQ = 2'd1;

  // DMA engine register map (per engine, base = engine * 16)
  localparam logic [7:0] CSR_ADDR_LO = 8'h0, CSR_ADDR_HI = 8'h4, CSR_LEN = 8'h8, CSR_CTRL = 8'hC;

  // CRC-32 (polynomial 04C11DB7, MSB first, no reflection) over one link word
  function automatic logic [31:0] crc32_word(input logic [31:0] crc, input logic [LINK_W-1:0] w);
    logic [31:0] c;
    c = crc;
    for (int i = LINK_W - 1; i >= 0; i--) begin
      if (c[31] ^ w[i]) c = (c << 1) ^ 32'h04C1_1DB7;
      else              c = c << 1;
    end
    return c;
  endfunction

  // dimension-ordered routing: X first, then Y, then Z, then the local port
  function automatic logic [2:0] route_port(input hdr_t h, input coord_t me);
    if (h.dst.x != me.x)      return 3'(PORT_X);
    else if (h.dst.y != me.y) return 3'(PORT_Y);
    else if (h.dst.z != me.z) return 3'(PORT_Z);
    else if (h.dst_gpu)       return 3'(PORT_GPU);
    else                      return 3'(PORT_HOST);
  endfunction

endpackage

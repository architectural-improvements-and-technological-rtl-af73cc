// core_interface: the TX/RX block of the network interface (the "Core
// Interface" between the PCIe core and the router).
//
// Towards the PCIe core it has four AXI4 stream inputs and two AXI4 stream
// outputs (256 bits), a 32-bit AXI4-Lite master that programs the core's DMA
// engines, the engines' completion interrupts, and a 32-bit AXI4-Lite slave
// for the internal registers. Towards the router it has the host and GPU
// local ports. Inside:
//  - the AXI-to-FIFO decoder: input stream 0 fills FIFO COMMAND (tx ring
//    descriptors), 1 FIFO uC (data for the microcontroller, brought out as a
//    port), 2 FIFO HOST TX and 3 FIFO GPU TX (payload read from memory);
//  - the FIFO-to-AXI decoder: FIFO RX (received payload) drives output
//    stream 0 and FIFO EQ (completion events) output stream 1;
//  - dma_if (request queues and DMA channel manager FSM), multi_pkt_inst
//    (descriptor fetch), dma_ctrl (packet engine), internal_regs and the tlb.
// The FIFO set and the stream/FIFO pairing follow the published block
// diagram; FIFO depths are this design's choices. FIFO RX holds two pages so
// that a received packet never has to wait for its Rx DMA to start.
module core_interface
  import apenet_pkg::*;
#(
  parameter int unsigned CMD_DEPTH   = 16,
  parameter int unsigned UC_DEPTH    = 16,
  parameter int unsigned TXD_DEPTH   = 64,
  parameter int unsigned RXD_DEPTH   = 256,
  parameter int unsigned EQ_DEPTH    = 16,
  parameter int unsigned TLB_ENTRIES = 64
) (
  input  logic              clk,
  input  logic              rst_n,
  // AXI4 stream inputs (memory -> device)
  input  logic [3:0]              s_tvalid,
  input  logic [3:0][FLIT_W-1:0]  s_tdata,
  output logic [3:0]              s_tready,
  // AXI4 stream outputs (device -> memory)
  output logic [1:0]              m_tvalid,
  output logic [1:0][FLIT_W-1:0]  m_tdata,
  input  logic [1:0]              m_tready,
  // AXI4-Lite master to the DMA engines' registers
  output logic        m_awvalid,
  output logic [31:0] m_awaddr,
  input  logic        m_awready,
  output logic        m_wvalid,
  output logic [31:0] m_wdata,
  output logic [3:0]  m_wstrb,
  input  logic        m_wready,
  input  logic        m_bvalid,
  input  logic [1:0]  m_bresp,
  output logic        m_bready,
  input  logic [NQ-1:0] irq,
  // AXI4-Lite slave for the internal registers
  input  logic        s_awvalid,
  input  logic [31:0] s_awaddr,
  output logic        s_awready,
  input  logic        s_wvalid,
  input  logic [31:0] s_wdata,
  input  logic [3:0]  s_wstrb,
  output logic        s_wready,
  output logic        s_bvalid,
  output logic [1:0]  s_bresp,
  input  logic        s_bready,
  input  logic        s_arvalid,
  input  logic [31:0] s_araddr,
  output logic        s_arready,
  output logic        s_rvalid,
  output logic [31:0] s_rdata,
  output logic [1:0]  s_rresp,
  input  logic        s_rready,
  // FIFO uC output (to the microcontroller)
  output logic              uc_valid,
  output logic [FLIT_W-1:0] uc_data,
  input  logic              uc_ready,
  // router local ports: 0 host, 1 GPU
  output logic  [1:0] tx_valid,
  output flit_t [1:0] tx_flit,
  input  logic  [1:0] tx_ready,
  input  logic  [1:0] rx_valid,
  input  flit_t [1:0] rx_flit,
  output logic  [1:0] rx_ready,
  // node state
  output coord_t      my_coord,
  input  logic [2:0]  link_up,
  input  logic [2:0][31:0] crc_errs,
  output logic [31:0] sent_count,
  output logic [31:0] recv_count,
  output logic [31:0] drop_count
);
  localparam int unsigned TIW = $clog2(TLB_ENTRIES);

  // ---------------------------------------------------------------- FIFOs
  logic cmd_full, cmd_empty, cmd_pop;
  logic [FLIT_W-1:0] cmd_q;
  logic [$clog2(CMD_DEPTH+1)-1:0] cmd_cnt;
  sync_fifo #(.WIDTH(FLIT_W), .DEPTH(CMD_DEPTH)) u_fifo_cmd (
    .clk, .rst_n, .wr_en(s_tvalid[SIN_CMD] && !cmd_full), .wr_data(s_tdata[SIN_CMD]),
    .full(cmd_full), .rd_en(cmd_pop), .rd_data(cmd_q), .empty(cmd_empty), .count(cmd_cnt));

  logic uc_full, uc_empty;
  logic [$clog2(UC_DEPTH+1)-1:0] uc_cnt;
  sync_fifo #(.WIDTH(FLIT_W), .DEPTH(UC_DEPTH)) u_fifo_uc (
    .clk, .rst_n, .wr_en(s_tvalid[SIN_UC] && !uc_full), .wr_data(s_tdata[SIN_UC]),
    .full(uc_full), .rd_en(uc_valid && uc_ready), .rd_data(uc_data), .empty(uc_empty), .count(uc_cnt));
  assign uc_valid = !uc_empty;

  logic [1:0] txd_full, txd_empty, txd_pop;
  logic [1:0][FLIT_W-1:0] txd_q;
  for (genvar i = 0; i < 2; i++) begin : g_txd
    logic [$clog2(TXD_DEPTH+1)-1:0] cnt;
    sync_fifo #(.WIDTH(FLIT_W), .DEPTH(TXD_DEPTH)) u_fifo_txd (
      .clk, .rst_n, .wr_en(s_tvalid[2+i] && !txd_full[i]), .wr_data(s_tdata[2+i]),
      .full(txd_full[i]), .rd_en(txd_pop[i]), .rd_data(txd_q[i]), .empty(txd_empty[i]), .count(cnt));
  end

  assign s_tready = {!txd_full[1], !txd_full[0], !uc_full, !cmd_full};

  logic rxd_push, rxd_full, rxd_empty;
  logic [FLIT_W-1:0] rxd_d;
  logic [$clog2(RXD_DEPTH+1)-1:0] rxd_cnt;
  sync_fifo #(.WIDTH(FLIT_W), .DEPTH(RXD_DEPTH)) u_fifo_rx (
    .clk, .rst_n, .wr_en(rxd_push), .wr_data(rxd_d), .full(rxd_full),
    .rd_en(m_tvalid[0] && m_tready[0]), .rd_data(m_tdata[0]),
    .empty(rxd_empty), .count(rxd_cnt));

  logic eq_push, eq_full, eq_empty;
  evt_t eq_d;
  logic [$clog2(EQ_DEPTH+1)-1:0] eq_cnt;
  sync_fifo #(.WIDTH(FLIT_W), .DEPTH(EQ_DEPTH)) u_fifo_eq (
    .clk, .rst_n, .wr_en(eq_push), .wr_data(eq_d), .full(eq_full),
    .rd_en(m_tvalid[1] && m_tready[1]), .rd_data(m_tdata[1]),
    .empty(eq_empty), .count(eq_cnt));

  assign m_tvalid = {!eq_empty, !rxd_empty};

  // ------------------------------------------------------------ registers
  logic [63:0] ring_base, eq_base;
  logic [15:0] ring_size, ring_wr, ring_rd, eq_size, eq_wr, eq_rd;
  logic        tlb_wr_en, tlb_wr_valid;
  logic [TIW-1:0] tlb_wr_idx;
  logic [51:0] tlb_wr_vpn, tlb_wr_ppn;
  logic [15:0] tlb_wr_pid;
  logic [31:0] batches;

  internal_regs #(.TLB_IW(TIW)) u_regs (
    .clk, .rst_n,
    .s_awvalid, .s_awaddr, .s_awready, .s_wvalid, .s_wdata, .s_wstrb, .s_wready,
    .s_bvalid, .s_bresp, .s_bready, .s_arvalid, .s_araddr, .s_arready,
    .s_rvalid, .s_rdata, .s_rresp, .s_rready,
    .my_coord, .ring_base, .ring_size, .ring_wr, .ring_rd,
    .eq_base, .eq_size, .eq_wr, .eq_rd,
    .tlb_wr_en, .tlb_wr_idx, .tlb_wr_valid, .tlb_wr_vpn, .tlb_wr_ppn, .tlb_wr_pid,
    .link_up, .crc_errs, .batches);

  // ------------------------------------------------------------------ TLB
  logic        lk_req, lk_done, lk_hit;
  logic [63:0] lk_va, lk_pa;
  logic [15:0] lk_pid;
  tlb #(.ENTRIES(TLB_ENTRIES)) u_tlb (
    .clk, .rst_n, .wr_en(tlb_wr_en), .wr_idx(tlb_wr_idx), .wr_valid(tlb_wr_valid),
    .wr_vpn(tlb_wr_vpn), .wr_ppn(tlb_wr_ppn), .wr_pid(tlb_wr_pid),
    .lk_req, .lk_va, .lk_done, .lk_hit, .lk_pa, .lk_pid);

  // ------------------------------------------------------ DMA request path
  logic     [NQ-1:0] q_valid, q_ready, q_done;
  dma_req_t [NQ-1:0] q_req;
  logic              dma_busy;

  dma_if u_dma_if (
    .clk, .rst_n, .req_valid(q_valid), .req(q_req), .req_ready(q_ready), .done(q_done),
    .m_awvalid, .m_awaddr, .m_awready, .m_wvalid, .m_wdata, .m_wstrb, .m_wready,
    .m_bvalid, .m_bresp, .m_bready, .irq, .busy(dma_busy));

  logic [15:0] cmd_free;
  assign cmd_free = 16'(CMD_DEPTH) - 16'(cmd_cnt);

  multi_pkt_inst u_mpi (
    .clk, .rst_n, .ring_base, .ring_size, .ring_wr, .ring_rd, .cmd_free,
    .req_valid(q_valid[Q_CMD]), .req(q_req[Q_CMD]), .req_ready(q_ready[Q_CMD]),
    .req_done(q_done[Q_CMD]), .batch_count(batches));

  dma_ctrl u_dma_ctrl (
    .clk, .rst_n, .my_coord,
    .cmd_valid(!cmd_empty), .cmd_desc(desc_t'(cmd_q)), .cmd_pop,
    .txd_valid(~txd_empty), .txd_data(txd_q), .txd_pop,
    .tx_valid, .tx_flit, .tx_ready, .rx_valid, .rx_flit, .rx_ready,
    .rxd_push, .rxd_data(rxd_d), .rxd_full,
    .eq_push, .eq_data(eq_d), .eq_full,
    .txreq_valid(q_valid[Q_TX]), .txreq(q_req[Q_TX]), .txreq_ready(q_ready[Q_TX]),
    .rxreq_valid(q_valid[Q_RX]), .rxreq(q_req[Q_RX]), .rxreq_ready(q_ready[Q_RX]),
    .cplreq_valid(q_valid[Q_CPL]), .cplreq(q_req[Q_CPL]), .cplreq_ready(q_ready[Q_CPL]),
    .rxreq_done(q_done[Q_RX]),
    .lk_req, .lk_va, .lk_done, .lk_hit, .lk_pa,
    .eq_base, .eq_size, .eq_rd, .eq_wr,
    .sent_count, .recv_count, .drop_count);
endmodule

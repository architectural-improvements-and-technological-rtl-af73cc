// apenet_dnp: the Distributed Network Processor of an APEnet v5 node, the
// top of this design. It joins the three torus links (X, Y, Z), the 5x5
// router and the network interface (core_interface).
//
// Router ports 0, 1, 2 are the X, Y and Z links; port 3 is the network
// interface's host side and port 4 its GPU side. Everything the node needs
// from outside appears as ports: the PHY lanes and status of the three links
// (transceiver IP), the AXI4 streams, AXI4-Lite master/slave and DMA
// interrupts of the PCIe Gen3 core (vendor IP), and the microcontroller's
// FIFO output. A single clock drives the whole node.
module apenet_dnp
  import apenet_pkg::*;
#(
  parameter int unsigned ROUTER_DEPTH = 136,
  parameter int unsigned LINK_RX_DEPTH = 32,
  parameter int unsigned TLB_ENTRIES   = 64
) (
  input  logic                       clk,
  input  logic                       rst_n,
  // transceiver PHYs of the X, Y, Z links
  input  logic [2:0]                 phy_tx_ready,
  input  logic [2:0]                 phy_rx_ready,
  input  logic [2:0][LANES-1:0]      phy_rx_syncstatus,
  input  lane_t [2:0][LANES-1:0]     phy_rx_lane,
  output lane_t [2:0][LANES-1:0]     phy_tx_lane,
  // PCIe core: AXI4 streams
  input  logic [3:0]                 s_tvalid,
  input  logic [3:0][FLIT_W-1:0]     s_tdata,
  output logic [3:0]                 s_tready,
  output logic [1:0]                 m_tvalid,
  output logic [1:0][FLIT_W-1:0]     m_tdata,
  input  logic [1:0]                 m_tready,
  // PCIe core: DMA engine registers and interrupts
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
  // PCIe core: register access from the host
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
  // microcontroller FIFO
  output logic              uc_valid,
  output logic [FLIT_W-1:0] uc_data,
  input  logic              uc_ready,
  // status
  output logic [2:0]        link_up,
  output logic [2:0]        link_stopped,
  output logic [2:0]        link_crc_err,
  output logic [PORTS-1:0]  router_busy,
  output logic [31:0]       sent_count,
  output logic [31:0]       recv_count,
  output logic [31:0]       drop_count
);
  logic  [PORTS-1:0] r_in_valid, r_in_ready, r_out_valid, r_out_ready;
  flit_t [PORTS-1:0] r_in_flit, r_out_flit;
  logic  [2:0][31:0] crc_errs;
  coord_t            my_coord;

  for (genvar l = 0; l < 3; l++) begin : g_link
    logic [31:0] tx_pkts, rx_pkts;
    torus_link #(.RX_DEPTH(LINK_RX_DEPTH)) u_link (
      .clk, .rst_n,
      .tx_ready(phy_tx_ready[l]), .rx_ready(phy_rx_ready[l]),
      .rx_syncstatus(phy_rx_syncstatus[l]), .rx_lane(phy_rx_lane[l]), .tx_lane(phy_tx_lane[l]),
      // router output l -> link transmitter, link receiver -> router input l
      .in_valid(r_out_valid[l]), .in_flit(r_out_flit[l]), .in_ready(r_out_ready[l]),
      .out_valid(r_in_valid[l]), .out_flit(r_in_flit[l]), .out_ready(r_in_ready[l]),
      .link_up(link_up[l]), .crc_err(link_crc_err[l]), .err_count(crc_errs[l]),
      .tx_pkts, .rx_pkts, .stopped(link_stopped[l]));
  end

  router #(.IN_DEPTH(ROUTER_DEPTH)) u_router (
    .clk, .rst_n, .my_coord,
    .in_valid(r_in_valid), .in_flit(r_in_flit), .in_ready(r_in_ready),
    .out_valid(r_out_valid), .out_flit(r_out_flit), .out_ready(r_out_ready),
    .out_busy(router_busy));

  core_interface #(.TLB_ENTRIES(TLB_ENTRIES)) u_ni (
    .clk, .rst_n,
    .s_tvalid, .s_tdata, .s_tready, .m_tvalid, .m_tdata, .m_tready,
    .m_awvalid, .m_awaddr, .m_awready, .m_wvalid, .m_wdata, .m_wstrb, .m_wready,
    .m_bvalid, .m_bresp, .m_bready, .irq,
    .s_awvalid, .s_awaddr, .s_awready, .s_wvalid, .s_wdata, .s_wstrb, .s_wready,
    .s_bvalid, .s_bresp, .s_bready, .s_arvalid, .s_araddr, .s_arready,
    .s_rvalid, .s_rdata, .s_rresp, .s_rready,
    .uc_valid, .uc_data, .uc_ready,
    .tx_valid(r_in_valid[PORT_GPU:PORT_HOST]), .tx_flit(r_in_flit[PORT_GPU:PORT_HOST]),
    .tx_ready(r_in_ready[PORT_GPU:PORT_HOST]),
    .rx_valid(r_out_valid[PORT_GPU:PORT_HOST]), .rx_flit(r_out_flit[PORT_GPU:PORT_HOST]),
    .rx_ready(r_out_ready[PORT_GPU:PORT_HOST]),
    .my_coord, .link_up, .crc_errs, .sent_count, .recv_count, .drop_count);
endmodule

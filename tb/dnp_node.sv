// dnp_node: testbench wrapper of one node: an apenet_dnp at its default
// parameters plus the behavioural PCIe core and memory model, with the PHY
// lanes and their status brought out.
module dnp_node
  import apenet_pkg::*;
(
  input  logic                   clk,
  input  logic                   rst_n,
  input  logic [2:0]             phy_ready,
  input  lane_t [2:0][LANES-1:0] rx_lane,
  output lane_t [2:0][LANES-1:0] tx_lane,
  output logic [2:0]             link_up,
  output logic [2:0]             link_stopped,
  output logic [2:0]             link_crc_err,
  output logic [PORTS-1:0]       router_busy,
  output logic [31:0]            sent_count,
  output logic [31:0]            recv_count,
  output logic [31:0]            drop_count
);
  logic [3:0] s_tvalid, s_tready; logic [3:0][FLIT_W-1:0] s_tdata;
  logic [1:0] m_tvalid, m_tready; logic [1:0][FLIT_W-1:0] m_tdata;
  logic c_awvalid, c_awready, c_wvalid, c_wready, c_bvalid, c_bready;
  logic [31:0] c_awaddr, c_wdata; logic [3:0] c_wstrb; logic [1:0] c_bresp;
  logic [NQ-1:0] irq;
  logic r_awvalid, r_awready, r_wvalid, r_wready, r_bvalid, r_bready;
  logic r_arvalid, r_arready, r_rvalid, r_rready;
  logic [31:0] r_awaddr, r_wdata, r_araddr, r_rdata; logic [3:0] r_wstrb;
  logic [1:0] r_bresp, r_rresp;
  logic uc_valid; logic [FLIT_W-1:0] uc_data;

  apenet_dnp u_dnp (
    .clk, .rst_n,
    .phy_tx_ready(phy_ready), .phy_rx_ready(phy_ready),
    .phy_rx_syncstatus({3{{LANES{1'b1}}}} & {{LANES{phy_ready[2]}}, {LANES{phy_ready[1]}}, {LANES{phy_ready[0]}}}),
    .phy_rx_lane(rx_lane), .phy_tx_lane(tx_lane),
    .s_tvalid, .s_tdata, .s_tready, .m_tvalid, .m_tdata, .m_tready,
    .m_awvalid(c_awvalid), .m_awaddr(c_awaddr), .m_awready(c_awready),
    .m_wvalid(c_wvalid), .m_wdata(c_wdata), .m_wstrb(c_wstrb), .m_wready(c_wready),
    .m_bvalid(c_bvalid), .m_bresp(c_bresp), .m_bready(c_bready), .irq,
    .s_awvalid(r_awvalid), .s_awaddr(r_awaddr), .s_awready(r_awready),
    .s_wvalid(r_wvalid), .s_wdata(r_wdata), .s_wstrb(r_wstrb), .s_wready(r_wready),
    .s_bvalid(r_bvalid), .s_bresp(r_bresp), .s_bready(r_bready),
    .s_arvalid(r_arvalid), .s_araddr(r_araddr), .s_arready(r_arready),
    .s_rvalid(r_rvalid), .s_rdata(r_rdata), .s_rresp(r_rresp), .s_rready(r_rready),
    .uc_valid, .uc_data, .uc_ready(1'b1),
    .link_up, .link_stopped, .link_crc_err, .router_busy,
    .sent_count, .recv_count, .drop_count);

  pcie_host_model u_host (
    .clk, .rst_n, .s_tvalid, .s_tdata, .s_tready, .m_tvalid, .m_tdata, .m_tready,
    .c_awvalid, .c_awaddr, .c_awready, .c_wvalid, .c_wdata, .c_wstrb, .c_wready,
    .c_bvalid, .c_bresp, .c_bready, .irq,
    .r_awvalid, .r_awaddr, .r_awready, .r_wvalid, .r_wdata, .r_wstrb, .r_wready,
    .r_bvalid, .r_bresp, .r_bready, .r_arvalid, .r_araddr, .r_arready,
    .r_rvalid, .r_rdata, .r_rresp, .r_rready);
endmodule

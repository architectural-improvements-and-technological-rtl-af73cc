// tb_core_interface: the network interface alone, with the PCIe core and
// memory model on one side and, on the router side, each local port looped
// back to itself through a small FIFO (so every packet it sends comes back
// as a received packet, as in a loopback test without the switch).
// The driver's steps are modelled: program the registers, register buffer
// pages in the TLB, write descriptors in the tx ring and ring the doorbell.
// Checks: descriptors fetched in batches (including across the ring's
// wrap), host and GPU sources, payload written to the translated physical
// pages, one "sent" and one "received" event per packet in the event queue,
// a packet to an unregistered address and one running past its page end
// dropped with an error event, register read-back (ID, tx_ring_read, event
// write pointer, link status), and the microcontroller FIFO path.
module tb_core_interface;
  import apenet_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

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
  logic  [1:0] tx_valid, tx_ready, rx_valid, rx_ready, lb_empty, lb_full;
  flit_t [1:0] tx_flit, rx_flit;
  coord_t my_coord;
  logic [31:0] sent, recv, drop;

  core_interface dut (
    .clk, .rst_n, .s_tvalid, .s_tdata, .s_tready, .m_tvalid, .m_tdata, .m_tready,
    .m_awvalid(c_awvalid), .m_awaddr(c_awaddr), .m_awready(c_awready),
    .m_wvalid(c_wvalid), .m_wdata(c_wdata), .m_wstrb(c_wstrb), .m_wready(c_wready),
    .m_bvalid(c_bvalid), .m_bresp(c_bresp), .m_bready(c_bready), .irq,
    .s_awvalid(r_awvalid), .s_awaddr(r_awaddr), .s_awready(r_awready),
    .s_wvalid(r_wvalid), .s_wdata(r_wdata), .s_wstrb(r_wstrb), .s_wready(r_wready),
    .s_bvalid(r_bvalid), .s_bresp(r_bresp), .s_bready(r_bready),
    .s_arvalid(r_arvalid), .s_araddr(r_araddr), .s_arready(r_arready),
    .s_rvalid(r_rvalid), .s_rdata(r_rdata), .s_rresp(r_rresp), .s_rready(r_rready),
    .uc_valid, .uc_data, .uc_ready(1'b1),
    .tx_valid, .tx_flit, .tx_ready, .rx_valid, .rx_flit, .rx_ready,
    .my_coord, .link_up(3'b101), .crc_errs({32'd3, 32'd2, 32'd1}),
    .sent_count(sent), .recv_count(recv), .drop_count(drop));

  pcie_host_model u_host (
    .clk, .rst_n, .s_tvalid, .s_tdata, .s_tready, .m_tvalid, .m_tdata, .m_tready,
    .c_awvalid, .c_awaddr, .c_awready, .c_wvalid, .c_wdata, .c_wstrb, .c_wready,
    .c_bvalid, .c_bresp, .c_bready, .irq,
    .r_awvalid, .r_awaddr, .r_awready, .r_wvalid, .r_wdata, .r_wstrb, .r_wready,
    .r_bvalid, .r_bresp, .r_bready, .r_arvalid, .r_araddr, .r_arready,
    .r_rvalid, .r_rdata, .r_rresp, .r_rready);

  // local ports looped back (host port to host port, GPU port to GPU port)
  for (genvar p = 0; p < 2; p++) begin : g_lb
    sync_fifo #(.WIDTH($bits(flit_t)), .DEPTH(8)) u_lb (
      .clk, .rst_n, .wr_en(tx_valid[p] && tx_ready[p]), .wr_data(tx_flit[p]), .full(lb_full[p]),
      .rd_en(rx_valid[p] && rx_ready[p]), .rd_data(rx_flit[p]), .empty(lb_empty[p]), .count());
    assign tx_ready[p] = !lb_full[p];
    assign rx_valid[p] = !lb_empty[p];
  end

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++; if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  localparam longint RING = 64'h1000_0000, EQB = 64'h2000_0000;
  localparam longint VA = 64'h7000_0000, PA = 64'h3000_0000, SRC = 64'h4000_0000;
  localparam int RSZ = 8;
  localparam logic [23:0] ME = 24'h02_01_03;
  int ring_wr = 0;

  function automatic logic [FLIT_W-1:0] pattern(input longint src, input int i);
    return {8{32'(src[31:0] ^ (i * 32'h9E37_79B9)) + 32'h1234_5677 * 32'(i + 1)}};
  endfunction

  task automatic post(input longint src, input int len, input longint va, input bit sg);
    desc_t dd;
    dd = '0;
    dd.src_addr = src; dd.dst_va = va; dd.len = len; dd.src_gpu = sg; dd.dst_gpu = sg;
    dd.dst = '{x: ME[23:16], y: ME[15:8], z: ME[7:0]};
    for (int i = 0; i < len / 32; i++) u_host.mem[(src >>> 5) + i] = pattern(src, i);
    u_host.mem[(RING >>> 5) + ring_wr] = dd;
    ring_wr = (ring_wr + 1) % RSZ;
  endtask

  task automatic check_data(input longint src, input int len, input longint pa, input string what);
    int bad = 0;
    for (int i = 0; i < len / 32; i++) if (u_host.mem_rd(pa + 32 * i) !== pattern(src, i)) bad++;
    check(bad == 0, $sformatf("%s: %0d of %0d lines differ", what, bad, len / 32));
  endtask

  task automatic wait_counts(input int s, input int r);
    int t = 0;
    while (!(sent >= s && recv + drop >= r) && t < 100000) begin @(posedge clk); t++; end
    repeat (200) @(posedge clk);
  endtask

  initial begin
    repeat (300000) @(posedge clk);
    failures++; $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    logic [31:0] d;
    int ev[4];
    repeat (5) @(posedge clk); rst_n = 1;
    repeat (5) @(posedge clk);
    u_host.reg_rd(32'h00, d); check(d == 32'hA9E5_0005, $sformatf("ID %h", d));
    u_host.reg_wr(32'h04, {8'd0, ME});
    u_host.reg_wr(32'h08, RING[31:0]); u_host.reg_wr(32'h0C, RING[63:32]);
    u_host.reg_wr(32'h10, RSZ);
    u_host.reg_wr(32'h20, EQB[31:0]);  u_host.reg_wr(32'h24, EQB[63:32]);
    u_host.reg_wr(32'h28, 64);
    for (int p = 0; p < 4; p++) begin
      longint va, pa;
      va = VA + 4096 * p; pa = PA + 4096 * (7 - p);   // pages scattered in reverse order
      u_host.reg_wr(32'h40, va[31:0]); u_host.reg_wr(32'h44, va[63:32]);
      u_host.reg_wr(32'h48, pa[31:0]); u_host.reg_wr(32'h4C, pa[63:32]);
      u_host.reg_wr(32'h50, 32'd1);    u_host.reg_wr(32'h54, 32'h8000_0000 | p);
    end
    check(my_coord == ME, "coordinates programmed");
    u_host.reg_rd(32'h60, d); check(d[2:0] == 3'b101, "link status visible");
    u_host.reg_rd(32'h68, d); check(d == 32'd2, "CRC error counter visible");

    // three packets in one doorbell: host source, GPU source, header-only
    post(SRC,           4096, VA,            0);
    post(SRC + 'h10000, 1024, VA + 4096,     1);
    post(SRC + 'h20000, 0,    VA + 2 * 4096, 0);
    u_host.reg_wr(32'h14, ring_wr);
    wait_counts(3, 3);
    check(sent == 3 && recv == 3 && drop == 0, $sformatf("sent %0d recv %0d drop %0d", sent, recv, drop));
    check_data(SRC, 4096, PA + 4096 * 7, "full page from host memory");
    check_data(SRC + 'h10000, 1024, PA + 4096 * 6, "GPU-sourced packet");
    u_host.reg_rd(32'h18, d); check(d == 3, $sformatf("tx_ring_read %0d", d));
    u_host.reg_rd(32'h70, d); check(d >= 1 && d < 3, $sformatf("descriptors fetched in %0d batches", d));

    // errors: unregistered address, and a payload running past its page
    post(SRC + 'h30000, 256, 64'h6000_0000, 0);
    post(SRC + 'h40000, 512, VA + 3 * 4096 + 'hF00, 0);
    u_host.reg_wr(32'h14, ring_wr);
    wait_counts(5, 5);
    check(drop == 2 && recv == 3, $sformatf("two packets dropped (drop %0d recv %0d)", drop, recv));

    // ring wrap: five more descriptors, the ring holds eight
    for (int k = 0; k < 5; k++) post(SRC + 'h50000 + 'h1000 * k, 128, VA + 3 * 4096 + 128 * k, k[0]);
    u_host.reg_wr(32'h14, ring_wr);
    wait_counts(10, 10);
    check(sent == 10 && recv == 8, $sformatf("after wrap sent %0d recv %0d", sent, recv));
    for (int k = 0; k < 5; k++) check_data(SRC + 'h50000 + 'h1000 * k, 128, PA + 4096 * 4 + 128 * k, "wrapped ring entry");
    u_host.reg_rd(32'h18, d); check(d == 2, $sformatf("tx_ring_read after wrap %0d", d));

    // event queue contents
    u_host.reg_rd(32'h2C, d); check(d == 20, $sformatf("event queue write pointer %0d", d));
    for (int i = 0; i < 4; i++) ev[i] = 0;
    for (int i = 0; i < 20; i++) begin
      evt_t e;
      e = u_host.mem_rd(EQB + 32 * i);
      if (int'(e.etype) < 4) ev[e.etype]++;
    end
    check(ev[EVT_SENT] == 10 && ev[EVT_RECV] == 8 && ev[EVT_ERR_NOBUF] == 2,
          $sformatf("events sent %0d recv %0d error %0d", ev[EVT_SENT], ev[EVT_RECV], ev[EVT_ERR_NOBUF]));

    // microcontroller FIFO: a line pushed on input stream 1 appears on uc_data
    fork
      begin
        // the DMA IF never targets stream 1, so the line is forced onto it
        @(negedge clk);
        force s_tvalid[1] = 1'b1; force s_tdata[1] = {8{32'hC0DE_0001}};
        @(negedge clk);
        release s_tvalid[1]; release s_tdata[1];
      end
      begin
        int t = 0;
        while (!(uc_valid && uc_data == {8{32'hC0DE_0001}}) && t < 20) begin @(posedge clk); t++; end
        check(t < 20, "microcontroller FIFO delivers");
      end
    join
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

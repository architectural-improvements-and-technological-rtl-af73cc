// tb_apenet_dnp: end-to-end test of two DNP nodes at their default
// parameters. Node A sits at (0,0,0), node B at (1,0,0); their X links are
// cross-connected through skewed lanes, the Y and Z links of each node are
// looped back onto themselves. Each node has a PCIe/memory model; the test
// plays the driver: it sets up tx ring, event queue and TLB registrations
// through the registers, writes descriptors and source data into memory,
// advances tx_ring_write and then compares the memory of the receiving node
// and both event queues with what it expects.
// Traffic: a batch of three descriptors A->B (one payload word equal to a
// framing word, to force stuffing), a local loop on A, a GPU-to-GPU packet
// A->B, a packet to an unregistered address (error event), a burst of pages
// A->B while B's memory writes are held off (link flow control), a local
// loop on B concurrent with A->B traffic (router arbitration), and a packet
// corrupted on the X link (CRC error). Each mechanism is counted and must
// have happened at least once.
module tb_apenet_dnp;
  import apenet_pkg::*;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic [2:0] phy_ready = '0;
  lane_t [2:0][LANES-1:0] a_tx, a_rx, b_tx, b_rx;
  logic [2:0] a_up, b_up, a_stop, b_stop, a_crc, b_crc;
  logic [PORTS-1:0] a_busy, b_busy;
  logic [31:0] a_sent, a_recv, a_drop, b_sent, b_recv, b_drop;
  logic flip;
  int cyc = 0, flip_cyc = -1;
  always @(posedge clk) cyc <= cyc + 1;
  assign flip = (cyc == flip_cyc);

  dnp_node A (.clk, .rst_n, .phy_ready, .rx_lane(a_rx), .tx_lane(a_tx),
              .link_up(a_up), .link_stopped(a_stop), .link_crc_err(a_crc), .router_busy(a_busy),
              .sent_count(a_sent), .recv_count(a_recv), .drop_count(a_drop));
  dnp_node B (.clk, .rst_n, .phy_ready, .rx_lane(b_rx), .tx_lane(b_tx),
              .link_up(b_up), .link_stopped(b_stop), .link_crc_err(b_crc), .router_busy(b_busy),
              .sent_count(b_sent), .recv_count(b_recv), .drop_count(b_drop));

  for (genvar i = 0; i < LANES; i++) begin : g_lanes
    // X: A <-> B with skew; Y, Z: loopback
    lane_delay #(.DELAY(2 + 2*i)) u_ab (.clk, .din(a_tx[0][i]), .flip(flip && i == 0), .dout(b_rx[0][i]));
    lane_delay #(.DELAY(9 - 2*i)) u_ba (.clk, .din(b_tx[0][i]), .flip(1'b0), .dout(a_rx[0][i]));
    for (genvar l = 1; l < 3; l++) begin : g_loop
      lane_delay #(.DELAY(1 + i + l)) u_a (.clk, .din(a_tx[l][i]), .flip(1'b0), .dout(a_rx[l][i]));
      lane_delay #(.DELAY(4 - i + l)) u_b (.clk, .din(b_tx[l][i]), .flip(1'b0), .dout(b_rx[l][i]));
    end
  end

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  localparam longint RING = 64'h1000_0000, EQB = 64'h2000_0000;
  localparam longint VA_B = 64'h7000_0000, PA_B = 64'h3000_0000;
  localparam longint VA_L = 64'h7100_0000, PA_L = 64'h3100_0000;
  localparam longint SRC  = 64'h4000_0000;
  localparam int     RSZ  = 64;

  int ring_wr_a = 0, ring_wr_b = 0;
  int n_desc_a = 0, n_desc_b = 0;

  // ------------------------------------------------------ mechanism counters
  int m_esc = 0, m_stop = 0, m_conflict = 0, m_gpu_port = 0, m_miss = 0, m_crc = 0, m_loop = 0;
  always @(posedge clk) if (rst_n) begin
    if (A.u_dnp.g_link[0].u_link.u_tx.esc_sent) m_esc++;
    if (a_stop[0]) m_stop++;
    if ($countones(B.u_dnp.u_router.req[PORT_HOST]) > 1) m_conflict++;
    if (B.u_dnp.u_router.out_valid[PORT_GPU]) m_gpu_port++;
    if (b_crc[0]) m_crc++;
  end

  // ------------------------------------------------------------- helpers
  task automatic setup(input bit node, input logic [23:0] coord);
    if (!node) begin
      A.u_host.reg_wr(32'h04, {8'd0, coord});
      A.u_host.reg_wr(32'h08, RING[31:0]); A.u_host.reg_wr(32'h0C, RING[63:32]);
      A.u_host.reg_wr(32'h10, RSZ);
      A.u_host.reg_wr(32'h20, EQB[31:0]);  A.u_host.reg_wr(32'h24, EQB[63:32]);
      A.u_host.reg_wr(32'h28, 64);
    end else begin
      B.u_host.reg_wr(32'h04, {8'd0, coord});
      B.u_host.reg_wr(32'h08, RING[31:0]); B.u_host.reg_wr(32'h0C, RING[63:32]);
      B.u_host.reg_wr(32'h10, RSZ);
      B.u_host.reg_wr(32'h20, EQB[31:0]);  B.u_host.reg_wr(32'h24, EQB[63:32]);
      B.u_host.reg_wr(32'h28, 64);
    end
  endtask

  task automatic tlb_reg(input bit node, input int idx, input longint va, input longint pa);
    if (!node) begin
      A.u_host.reg_wr(32'h40, va[31:0]); A.u_host.reg_wr(32'h44, va[63:32]);
      A.u_host.reg_wr(32'h48, pa[31:0]); A.u_host.reg_wr(32'h4C, pa[63:32]);
      A.u_host.reg_wr(32'h50, 32'd7);    A.u_host.reg_wr(32'h54, 32'h8000_0000 | idx);
    end else begin
      B.u_host.reg_wr(32'h40, va[31:0]); B.u_host.reg_wr(32'h44, va[63:32]);
      B.u_host.reg_wr(32'h48, pa[31:0]); B.u_host.reg_wr(32'h4C, pa[63:32]);
      B.u_host.reg_wr(32'h50, 32'd7);    B.u_host.reg_wr(32'h54, 32'h8000_0000 | idx);
    end
  endtask

  function automatic logic [FLIT_W-1:0] pattern(input longint src, input int i);
    return {8{32'(src[31:0] ^ (i * 32'h9E37_79B9)) + 32'h1234_5677 * 32'(i + 1)}};
  endfunction

  // put a descriptor and its source data in the sender's memory (no doorbell)
  task automatic post(input bit node, input longint src, input int len, input longint va,
                      input logic [7:0] dx, input bit sg, input bit dg);
    desc_t dd;
    dd = '0;
    dd.src_addr = src; dd.dst_va = va; dd.len = len;
    dd.dst = '{x: dx, y: 8'd0, z: 8'd0}; dd.src_gpu = sg; dd.dst_gpu = dg;
    for (int i = 0; i < len / 32; i++) begin
      if (!node) A.u_host.mem[(src >>> 5) + i] = pattern(src, i);
      else       B.u_host.mem[(src >>> 5) + i] = pattern(src, i);
    end
    if (!node) begin
      A.u_host.mem[(RING >>> 5) + ring_wr_a] = dd; ring_wr_a = (ring_wr_a + 1) % RSZ; n_desc_a++;
    end else begin
      B.u_host.mem[(RING >>> 5) + ring_wr_b] = dd; ring_wr_b = (ring_wr_b + 1) % RSZ; n_desc_b++;
    end
  endtask

  task automatic doorbell(input bit node);
    if (!node) A.u_host.reg_wr(32'h14, ring_wr_a);
    else       B.u_host.reg_wr(32'h14, ring_wr_b);
  endtask

  task automatic check_data(input bit node, input longint src, input int len, input longint pa, input string what);
    int bad = 0;
    for (int i = 0; i < len / 32; i++) begin
      logic [FLIT_W-1:0] got;
      got = !node ? A.u_host.mem_rd(pa + 32*i) : B.u_host.mem_rd(pa + 32*i);
      if (got !== pattern(src, i)) bad++;
    end
    check(bad == 0, $sformatf("%s: %0d of %0d lines differ", what, bad, len / 32));
  endtask

  task automatic wait_until(input int unsigned a_s, a_r, b_s, b_r);
    while (!(a_sent >= a_s && a_recv + a_drop >= a_r && b_sent >= b_s && b_recv + b_drop >= b_r))
      @(posedge clk);
    repeat (200) @(posedge clk);   // let the last event DMAs finish
  endtask

  int evt_seen [2][4];
  task automatic count_events(input bit node, input int n);
    for (int i = 0; i < 4; i++) evt_seen[node][i] = 0;
    for (int i = 0; i < n; i++) begin
      evt_t e;
      e = !node ? A.u_host.mem_rd(EQB + 32*i) : B.u_host.mem_rd(EQB + 32*i);
      if (int'(e.etype) < 4) evt_seen[node][e.etype]++;
    end
  endtask

  // ------------------------------------------------------------- watchdog
  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ----------------------------------------------------------------- test
  initial begin
    logic [31:0] r;
    int t0;
    repeat (5) @(posedge clk);
    rst_n = 1;
    repeat (5) @(posedge clk);
    setup(0, 24'h00_00_00);
    setup(1, 24'h01_00_00);
    for (int k = 0; k < 12; k++) tlb_reg(1, k, VA_B + 4096*k, PA_B + 64'h2000*k);
    tlb_reg(0, 0, VA_L, PA_L);
    tlb_reg(1, 12, VA_L, PA_L);
    phy_ready = 3'b111;
    t0 = 0;
    while (!(a_up == 3'b111 && b_up == 3'b111) && t0 < 2000) begin @(posedge clk); t0++; end
    check(a_up == 3'b111 && b_up == 3'b111, "all six links come up");
    A.u_host.reg_rd(32'h60, r);
    check(r[2:0] == 3'b111, "LINK_STATUS register");
    A.u_host.reg_rd(32'h00, r);
    check(r == 32'hA9E5_0005, "ID register");

    // 1. batch of three descriptors A -> B, one word equal to the SOP framing word
    post(0, SRC + 64'h0000, 4096, VA_B + 4096*0, 8'd1, 0, 0);
    post(0, SRC + 64'h1000, 1024, VA_B + 4096*1 + 512, 8'd1, 0, 0);
    post(0, SRC + 64'h2000, 64,   VA_B + 4096*2, 8'd1, 0, 0);
    A.u_host.mem[((SRC + 64'h1000) >>> 5) + 3] = {2{LW_SOP}};
    doorbell(0);
    wait_until(3, 0, 0, 3);
    A.u_host.mem[((SRC + 64'h1000) >>> 5) + 3] = pattern(SRC + 64'h1000, 3);  // restore for compare
    begin
      int bad = 0;
      for (int i = 0; i < 32; i++) begin
        logic [FLIT_W-1:0] exp;
        exp = (i == 3) ? {2{LW_SOP}} : pattern(SRC + 64'h1000, i);
        if (B.u_host.mem_rd(PA_B + 64'h2000 + 512 + 32*i) !== exp) bad++;
      end
      check(bad == 0, "1 KB packet with a stuffed framing word");
    end
    check_data(1, SRC + 64'h0000, 4096, PA_B + 64'h0000, "4 KB page A->B");
    check_data(1, SRC + 64'h2000, 64,   PA_B + 64'h4000, "64 B A->B");
    A.u_host.reg_rd(32'h70, r);
    check(r == 1, $sformatf("three descriptors fetched by %0d Cmd DMA(s)", r));
    A.u_host.reg_rd(32'h18, r);
    check(r == 3, "tx_ring_read advanced to 3");

    // 2. local loop on A, 3. GPU -> GPU A -> B, 4. unregistered address on B
    post(0, SRC + 64'h3000, 512, VA_L, 8'd0, 0, 0);
    post(0, SRC + 64'h4000, 2048, VA_B + 4096*3, 8'd1, 1, 1);
    post(0, SRC + 64'h5000, 256, 64'h6600_0000, 8'd1, 0, 0);
    doorbell(0);
    wait_until(6, 1, 0, 5);
    check_data(0, SRC + 64'h3000, 512, PA_L, "local loop on A");
    check_data(1, SRC + 64'h4000, 2048, PA_B + 64'h6000, "GPU to GPU A->B");
    m_loop = a_recv;
    m_miss = b_drop;
    check(b_drop == 1, "packet to an unregistered buffer dropped");

    // 5. burst while B's memory writes are held off; 6. local loop on B at the same time
    B.u_host.stall_wr = 1;
    for (int k = 4; k < 10; k++) post(0, SRC + 64'h10000 + 4096*k, 4096, VA_B + 4096*k, 8'd1, 0, 0);
    post(1, SRC + 64'h9000, 4096, VA_L, 8'd1, 0, 0);
    doorbell(0);
    repeat (3000) @(posedge clk);
    doorbell(1);
    repeat (3000) @(posedge clk);
    B.u_host.stall_wr = 0;
    wait_until(12, 1, 1, 12);
    for (int k = 4; k < 10; k++)
      check_data(1, SRC + 64'h10000 + 4096*k, 4096, PA_B + 64'h2000*k, $sformatf("burst page %0d", k));
    check_data(1, SRC + 64'h9000, 4096, PA_L, "local loop on B (routed back into B)");

    // 7. a packet hit by a bit error on the X link
    post(0, SRC + 64'h6000, 1024, VA_B + 4096*10, 8'd1, 0, 0);
    doorbell(0);
    // let the header and some payload pass, then corrupt a payload word
    for (int n = 0; n < 12; ) begin
      @(posedge clk);
      if (A.u_dnp.g_link[0].u_link.tx_lane[0].k == '0) n++;
    end
    flip_cyc = cyc + 1;
    wait_until(13, 1, 1, 13);
    B.u_host.reg_rd(32'h64, r);
    check(r == 1, $sformatf("X-link CRC error counter = %0d", r));

    // events
    count_events(0, n_desc_a + 1);
    check(evt_seen[0][EVT_SENT] == n_desc_a, $sformatf("A sent events %0d", evt_seen[0][EVT_SENT]));
    check(evt_seen[0][EVT_RECV] == 1, "A received event (local loop)");
    count_events(1, 13 + 1);
    check(evt_seen[1][EVT_SENT] == 1, "B sent event");
    check(evt_seen[1][EVT_RECV] == 12, $sformatf("B received events %0d", evt_seen[1][EVT_RECV]));
    check(evt_seen[1][EVT_ERR_NOBUF] == 1, "B error event");
    B.u_host.reg_rd(32'h2C, r);
    check(r == 14, $sformatf("B EQ_WRITE = %0d", r));

    $display("mechanisms: stuffing=%0d stop=%0d conflict=%0d gpu_port=%0d tlb_miss=%0d crc=%0d local_loop=%0d",
             m_esc, m_stop, m_conflict, m_gpu_port, m_miss, m_crc, m_loop);
    check(m_esc > 0, "word stuffing happened");
    check(m_stop > 0, "link flow control stopped the sender");
    check(m_conflict > 0, "two inputs competed for one router output");
    check(m_gpu_port > 0, "GPU local port used");
    check(m_miss > 0, "TLB miss happened");
    check(m_crc > 0, "CRC error detected");
    check(m_loop > 0, "local loop happened");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

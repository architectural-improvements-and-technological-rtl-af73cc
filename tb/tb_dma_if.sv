// tb_dma_if: the DMA IF against a model of the PCIe core's DMA engine
// registers. The model accepts AXI4-Lite writes with random ready delays,
// answers each with a write response and, when an engine's control register
// is written with the start bit, raises that engine's interrupt 5 to 40
// clocks later. Checks: each request programs address low/high, length and
// control of the engine equal to its queue number, with the right values;
// only one DMA is ever in flight; each request is reported done once, after
// its interrupt; with all four queues loaded the engines are served in
// round-robin order.
module tb_dma_if;
  import apenet_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic     [NQ-1:0] req_valid = '0, req_ready, done, irq = '0;
  dma_req_t [NQ-1:0] req = '0;
  logic m_awvalid, m_awready = 0, m_wvalid, m_wready = 0, m_bvalid = 0, m_bready, busy;
  logic [31:0] m_awaddr, m_wdata;
  logic [3:0]  m_wstrb;
  logic [1:0]  m_bresp = 2'b00;

  dma_if dut (.*);

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++; if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  // ---- engine register model ----
  logic [31:0] regs [NQ][4];
  logic        have_aw = 0, have_w = 0;
  logic [31:0] aw_a, w_d;
  int          irq_at [NQ];
  int          inflight = 0, overlap = 0, cyc = 0;
  dma_req_t    exp_q [NQ][$];
  int          order[$];
  int          bad = 0;

  always @(posedge clk) begin
    cyc++;
    irq <= '0;
    for (int e = 0; e < NQ; e++)
      if (irq_at[e] == cyc) begin irq[e] <= 1'b1; inflight--; end
    if (m_bvalid && m_bready) m_bvalid <= 1'b0;
    if (m_awvalid && m_awready) begin have_aw = 1; aw_a = m_awaddr; end
    if (m_wvalid && m_wready)   begin have_w = 1;  w_d = m_wdata; end
    if (have_aw && have_w && !m_bvalid && rst_n) begin
      int e, r;
      e = int'(aw_a >> 4); r = int'(aw_a[3:2]);
      regs[e][r] = w_d;
      m_bvalid <= 1'b1;
      have_aw = 0; have_w = 0;
      if (r == 3 && w_d[0]) begin
        dma_req_t x;
        if (inflight != 0) overlap++;
        inflight++;
        irq_at[e] = cyc + 5 + int'($urandom % 36);
        x = exp_q[e].pop_front();
        if (regs[e][0] != x.addr[31:0] || regs[e][1] != x.addr[63:32] || regs[e][2] != x.len ||
            w_d[3:1] != {x.stream, x.to_host}) bad++;
        order.push_back(e);
      end
    end
    m_awready <= ($urandom % 3) != 0;
    m_wready  <= ($urandom % 3) != 0;
  end

  int done_cnt [NQ];
  always @(posedge clk) if (rst_n) for (int e = 0; e < NQ; e++) if (done[e]) done_cnt[e]++;

  task automatic push(input int q, input dma_req_t r);
    exp_q[q].push_back(r);
    req_valid[q] = 1; req[q] = r;
    #1;
    while (!req_ready[q]) begin @(negedge clk); #1; end
    @(negedge clk);
    req_valid[q] = 0;
  endtask

  task automatic burst(input int q);
    for (int k = 0; k < 10; k++) begin
      repeat ($urandom % 50) @(negedge clk);
      push(q, rnd_req(q));
    end
  endtask

  function automatic dma_req_t rnd_req(input int q);
    return '{addr: {$urandom, $urandom}, len: 32'($urandom % 4096), to_host: (q >= 2), stream: 2'($urandom)};
  endfunction

  initial begin
    repeat (50000) @(posedge clk);
    failures++; $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    for (int e = 0; e < NQ; e++) begin irq_at[e] = -1; done_cnt[e] = 0; end
    repeat (3) @(posedge clk); rst_n = 1;
    @(negedge clk);
    // load two requests in every queue before the FSM can serve them
    fork
      begin push(0, rnd_req(0)); push(0, rnd_req(0)); end
      begin push(1, rnd_req(1)); push(1, rnd_req(1)); end
      begin push(2, rnd_req(2)); push(2, rnd_req(2)); end
      begin push(3, rnd_req(3)); push(3, rnd_req(3)); end
    join
    // random traffic afterwards
    fork
      burst(0); burst(1); burst(2); burst(3);
    join
    wait (!busy && exp_q[0].size() == 0 && exp_q[1].size() == 0 && exp_q[2].size() == 0 && exp_q[3].size() == 0);
    repeat (20) @(posedge clk);
    check(bad == 0, $sformatf("%0d engines programmed with wrong values", bad));
    check(overlap == 0, $sformatf("%0d DMAs started while another was running", overlap));
    for (int e = 0; e < NQ; e++)
      check(done_cnt[e] == 12, $sformatf("engine %0d: %0d done pulses for 12 requests", e, done_cnt[e]));
    begin
      bit rr = 1;
      for (int k = 0; k < 8; k++) if (order[k] != (k % NQ)) rr = 0;
      check(rr, $sformatf("round-robin start order %p", order[0:7]));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

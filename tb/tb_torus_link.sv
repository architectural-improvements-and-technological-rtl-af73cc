// tb_torus_link: two torus_link channels joined back to back, as the two ends
// of one APElink cable. Lane i from A to B is delayed 1+i clocks and from B
// to A 4-i clocks, so both receivers must deskew. After both ends report
// link_up, packets are sent in both directions at once and checked flit for
// flit; B's receiver output is then held back so A must be stopped by
// B's flow-control words; no packet may be lost and no CRC error may appear.
module tb_torus_link;
  import apenet_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  lane_t [LANES-1:0] a_tx, b_tx, a_rx, b_rx;
  logic  [1:0] in_valid = '0, in_ready, out_valid, out_ready = '1, up, cerr, stopped;
  flit_t [1:0] in_flit = '0, out_flit;
  logic  [1:0][31:0] errs, txp, rxp;

  torus_link #(.SYNC_HOLD(16)) u_a (.clk, .rst_n, .tx_ready(1'b1), .rx_ready(1'b1), .rx_syncstatus('1),
    .rx_lane(a_rx), .tx_lane(a_tx), .in_valid(in_valid[0]), .in_flit(in_flit[0]), .in_ready(in_ready[0]),
    .out_valid(out_valid[0]), .out_flit(out_flit[0]), .out_ready(out_ready[0]), .link_up(up[0]),
    .crc_err(cerr[0]), .err_count(errs[0]), .tx_pkts(txp[0]), .rx_pkts(rxp[0]), .stopped(stopped[0]));
  torus_link #(.SYNC_HOLD(16)) u_b (.clk, .rst_n, .tx_ready(1'b1), .rx_ready(1'b1), .rx_syncstatus('1),
    .rx_lane(b_rx), .tx_lane(b_tx), .in_valid(in_valid[1]), .in_flit(in_flit[1]), .in_ready(in_ready[1]),
    .out_valid(out_valid[1]), .out_flit(out_flit[1]), .out_ready(out_ready[1]), .link_up(up[1]),
    .crc_err(cerr[1]), .err_count(errs[1]), .tx_pkts(txp[1]), .rx_pkts(rxp[1]), .stopped(stopped[1]));

  lane_t ab [LANES][8], ba [LANES][8];
  always_ff @(posedge clk)
    for (int i = 0; i < LANES; i++) begin
      ab[i][0] <= a_tx[i]; ba[i][0] <= b_tx[i];
      for (int j = 1; j < 8; j++) begin ab[i][j] <= ab[i][j-1]; ba[i][j] <= ba[i][j-1]; end
    end
  always_comb for (int i = 0; i < LANES; i++) begin
    b_rx[i] = ab[i][i];        // 1+i clocks
    a_rx[i] = ba[i][3 - i];    // 4-i clocks
  end

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++; if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  flit_t exp_q [2][$];   // [0]: A->B, expected at B
  int bad = 0, stop_seen = 0;
  always @(posedge clk) if (rst_n) begin
    if (stopped[0]) stop_seen++;
    for (int d = 0; d < 2; d++)
      if (out_valid[1-d] && out_ready[1-d]) begin
        flit_t e;
        e = exp_q[d].pop_front();
        if (e !== out_flit[1-d]) bad++;
      end
  end

  task automatic send(input int d, input int n);
    for (int f = 0; f < n; f++) begin
      flit_t fl;
      fl = '{sop: (f == 0), eop: (f == n - 1), data: {8{$urandom}}};
      if (f == 1) fl.data[127:0] = LW_EOP;
      exp_q[d].push_back(fl);
      in_valid[d] = 1'b1; in_flit[d] = fl;
      #1;
      while (!in_ready[d]) begin @(negedge clk); #1; end
      @(negedge clk);
    end
    in_valid[d] = 1'b0;
  endtask

  initial begin
    repeat (100000) @(posedge clk);
    failures++; $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    for (int i = 0; i < LANES; i++) for (int j = 0; j < 8; j++) begin ab[i][j] = '0; ba[i][j] = '0; end
    repeat (3) @(posedge clk); rst_n = 1;
    fork wait (up == 2'b11); repeat (500) @(posedge clk); join_any
    check(up == 2'b11, "both ends up");
    @(negedge clk);
    fork
      for (int p = 0; p < 30; p++) send(0, 1 + $urandom % 8);
      for (int p = 0; p < 30; p++) send(1, 1 + $urandom % 8);
    join
    out_ready[1] = 1'b0;
    fork
      for (int p = 0; p < 10; p++) send(0, 8);
      begin repeat (400) @(posedge clk); out_ready[1] = 1'b1; end
    join
    repeat (300) @(posedge clk);
    check(exp_q[0].size() == 0 && exp_q[1].size() == 0, "every flit delivered");
    check(bad == 0, $sformatf("%0d flits corrupted", bad));
    check(errs[0] == 0 && errs[1] == 0, "no CRC errors");
    check(stop_seen > 0, "far end stopped the sender");
    check(rxp[1] == 40 && rxp[0] == 30, $sformatf("packet counts %0d/%0d", rxp[1], rxp[0]));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

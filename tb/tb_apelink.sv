// tb_apelink: apelink_tx feeding apelink_rx directly (one node's link
// looped onto itself, so the receiver's stop/go requests travel through the
// transmitter and come back as remote_stop). Random packets, some of whose
// words equal the framing words, must come out flit for flit; a packet of N
// flits must take 2N+3 link words; holding the receiver's output back must
// make the transmitter pause (flow control) without losing a flit; a bit
// flipped on the wire must be reported as a CRC error.
module tb_apelink;
  import apenet_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic in_valid = 0, in_ready, out_valid, out_ready = 1;
  flit_t in_flit = '0, out_flit;
  lane_t [LANES-1:0] tx_word, rx_word;
  logic remote_stop, local_stop, crc_err, flip = 0;
  logic [31:0] err_count, rx_pkts, tx_pkts;

  apelink_tx u_tx (.clk, .rst_n, .link_up(1'b1), .remote_stop, .local_stop,
                   .in_valid, .in_flit, .in_ready, .tx_word, .pkt_count(tx_pkts));
  always_comb begin
    rx_word = tx_word;
    rx_word[0].d[0] = tx_word[0].d[0] ^ flip;
  end
  apelink_rx #(.RX_DEPTH(16), .STOP_MARGIN(8)) u_rx (.clk, .rst_n, .rx_valid(1'b1), .rx_word,
                   .out_valid, .out_flit, .out_ready, .remote_stop, .local_stop,
                   .crc_err, .err_count, .pkt_count(rx_pkts));

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++; if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  flit_t exp_q[$];
  int got = 0, bad = 0, stops = 0;
  always @(posedge clk) if (rst_n) begin
    if (remote_stop) stops++;
    if (out_valid && out_ready) begin
      flit_t e;
      got++;
      e = exp_q.pop_front();
      if (out_flit !== e) bad++;
    end
  end

  function automatic logic [FLIT_W-1:0] rnd_flit();
    logic [FLIT_W-1:0] f;
    for (int i = 0; i < FLIT_W / 32; i++) f[i*32 +: 32] = $urandom;
    case ($urandom % 8)
      0: f[127:0]   = LW_SOP;
      1: f[255:128] = LW_EOP;
      2: f[127:0]   = LW_ESC;
      default: ;
    endcase
    return f;
  endfunction

  task automatic send_pkt(input int n);
    for (int i = 0; i < n; i++) begin
      flit_t f;
      f = '{sop: (i == 0), eop: (i == n - 1), data: rnd_flit()};
      exp_q.push_back(f);
      @(negedge clk);
      in_valid = 1; in_flit = f;
      do begin #1; if (in_ready) break; @(negedge clk); end while (1);
      @(negedge clk);
      in_valid = 0;
    end
  endtask

  // streaming version: no bubble between flits
  task automatic send_stream(input int n);
    @(negedge clk);
    for (int i = 0; i < n; i++) begin
      flit_t f;
      f = '{sop: (i == 0), eop: (i == n - 1), data: {8{32'h0123_4567 + 32'(i)}}};
      exp_q.push_back(f);
      in_valid = 1; in_flit = f;
      do begin #1; if (in_ready) break; @(negedge clk); end while (1);
      @(negedge clk);
    end
    in_valid = 0;
  endtask

  initial begin
    repeat (50000) @(posedge clk);
    failures++; $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    int t_first, t_crc;
    repeat (3) @(posedge clk); rst_n = 1;
    repeat (3) @(posedge clk);
    // timing of one 4-flit packet without reserved words
    fork
      send_stream(4);
      begin
        while (tx_word[0].k != '0) @(posedge clk);
        t_first = int'($time / 10);
        while (u_tx.state != u_tx.S_CRC) @(posedge clk);
        t_crc = int'($time / 10);
      end
    join
    check(t_crc - t_first + 1 == 2 * 4 + 3, $sformatf("4-flit packet took %0d link words", t_crc - t_first + 1));
    // random packets with stuffed words
    for (int p = 0; p < 40; p++) send_pkt(1 + $urandom % 6);
    // flow control: stall the receiver's output
    out_ready = 0;
    fork
      send_stream(40);
      begin repeat (300) @(posedge clk); out_ready = 1; end
    join
    repeat (200) @(posedge clk);
    check(exp_q.size() == 0, $sformatf("%0d flits missing", exp_q.size()));
    check(bad == 0, $sformatf("%0d flits corrupted", bad));
    check(err_count == 0, "no CRC error on a clean link");
    check(stops > 0, "receiver stopped the transmitter");
    check(rx_pkts == tx_pkts && rx_pkts == 42, $sformatf("packet counts tx %0d rx %0d", tx_pkts, rx_pkts));
    // a bit error
    fork
      send_stream(3);
      begin
        while (tx_word[0].k != '0) @(posedge clk);
        repeat (2) @(posedge clk);
        @(negedge clk) flip = 1;
        @(negedge clk) flip = 0;
      end
    join
    repeat (50) @(posedge clk);
    check(err_count == 1, $sformatf("CRC error counted (%0d)", err_count));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

// tb_sync_ctrl: sync_ctrl with its transmit lanes looped back to its receive
// lanes through different delays (0, 1, 3 and 5 clocks). During the sync
// phase every lane must carry /K28.3/; afterwards the link transmitter's
// words (lane i carries {counter, i}) must leave the deskew FIFOs with all
// four lanes carrying the same counter value and the counter stepping by
// one per word, i.e. the skew has been removed. link_up must rise.
module tb_sync_ctrl;
  import apenet_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic tx_ready = 0, rx_ready = 0;
  logic [LANES-1:0] rx_syncstatus;
  lane_t [LANES-1:0] rx_lane, tx_word, tx_lane, rx_word;
  logic rx_valid, rx_aligned, link_up;
  logic [23:0] cnt = 0;

  sync_ctrl #(.DESKEW_DEPTH(8), .SYNC_HOLD(16)) dut (.*);

  assign rx_syncstatus = {LANES{rx_ready}};
  always_comb for (int i = 0; i < LANES; i++) tx_word[i] = '{k: '0, d: {cnt, 8'(i)}};
  always @(posedge clk) cnt <= cnt + 1;

  localparam int DL [LANES] = '{0, 1, 3, 5};
  lane_t pipe [LANES][8];
  always_ff @(posedge clk)
    for (int i = 0; i < LANES; i++) begin
      pipe[i][0] <= tx_lane[i];
      for (int j = 1; j < 8; j++) pipe[i][j] <= pipe[i][j-1];
    end
  always_comb for (int i = 0; i < LANES; i++) rx_lane[i] = (DL[i] == 0) ? tx_lane[i] : pipe[i][DL[i]-1];

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++; if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    repeat (20000) @(posedge clk);
    failures++; $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    int words = 0, bad_align = 0, bad_step = 0, up_at = -1;
    logic [23:0] last;
    bit have_last = 0;
    for (int i = 0; i < LANES; i++) for (int j = 0; j < 8; j++) pipe[i][j] = '0;
    repeat (3) @(posedge clk); rst_n = 1;
    repeat (5) @(negedge clk);
    begin
      bit allk = 1;
      for (int i = 0; i < LANES; i++) allk &= (tx_lane[i].k == '1 && tx_lane[i].d == {LANE_BYTES{K28_3}});
      check(allk, "K28.3 sent on all lanes before the PHY is ready");
    end
    tx_ready = 1; rx_ready = 1;
    for (int c = 0; c < 400; c++) begin
      @(negedge clk);
      if (link_up && up_at < 0) up_at = c;
      if (rx_valid && rx_word[0].k == '0) begin
        words++;
        for (int i = 1; i < LANES; i++) if (rx_word[i].d[31:8] != rx_word[0].d[31:8] || rx_word[i].d[7:0] != 8'(i)) bad_align++;
        if (have_last && rx_word[0].d[31:8] != last + 1) bad_step++;
        last = rx_word[0].d[31:8]; have_last = 1;
      end
    end
    check(up_at >= 16, $sformatf("link_up after the hold time (cycle %0d)", up_at));
    check(words > 300, $sformatf("%0d data words delivered", words));
    check(bad_align == 0, $sformatf("%0d misaligned words", bad_align));
    check(bad_step == 0, $sformatf("%0d gaps in the word sequence", bad_step));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

// tb_multi_pkt_inst: the descriptor batcher against a model of the DMA IF.
// The model accepts each Cmd request after a random delay and reports it done
// some clocks later. Checks: every request starts at ring_base + 32 * the
// current read pointer; no batch crosses the end of the ring, exceeds
// MAX_BATCH or the free space of the command FIFO; the read pointer ends
// equal to the write pointer after every doorbell (including wraps); every
// posted descriptor is fetched exactly once; batching reduces the number of
// requests below the number of descriptors.
module tb_multi_pkt_inst;
  import apenet_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  localparam logic [63:0] BASE = 64'h1_0000_0000;
  localparam int RSZ = 20, MAXB = 16;
  logic [15:0] ring_wr = 0, ring_rd, cmd_free = 16;
  logic req_valid, req_ready = 0, req_done = 0;
  dma_req_t req;
  logic [31:0] batch_count;

  multi_pkt_inst #(.MAX_BATCH(MAXB)) dut (.clk, .rst_n, .ring_base(BASE), .ring_size(16'(RSZ)),
    .ring_wr, .ring_rd, .cmd_free, .req_valid, .req, .req_ready, .req_done, .batch_count);

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++; if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  int fetched [RSZ];
  int bad = 0, total = 0, nreq = 0;

  // DMA IF model
  initial begin
    forever begin
      @(negedge clk);
      req_ready = 0; req_done = 0;
      if (req_valid) begin
        int n, first;
        repeat ($urandom % 4) @(negedge clk);
        req_ready = 1;
        #1;
        n = int'(req.len) / 32; first = int'((req.addr - BASE) / 32);
        if (req.addr != BASE + 64'(ring_rd) * 32 || n < 1 || n > MAXB || n > int'(cmd_free) ||
            first + n > RSZ || req.to_host || req.stream != SIN_CMD) bad++;
        for (int i = 0; i < n; i++) if (first + i < RSZ) fetched[first + i]++;
        total += n; nreq++;
        @(negedge clk);
        req_ready = 0;
        repeat (3 + $urandom % 10) @(negedge clk);
        req_done = 1;
      end
    end
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++; $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    int posted = 0;
    int DB [5] = '{5, 19, 1, 12, 19};
    for (int i = 0; i < RSZ; i++) fetched[i] = 0;
    repeat (3) @(posedge clk); rst_n = 1;
    // doorbells of 5, 19 (wraps), 1, 12 (cmd FIFO nearly full), 19 entries
    for (int k = 0; k < 5; k++) begin
      int n;
      n = DB[k];
      cmd_free = (k == 3) ? 16'd3 : 16'd16;
      @(negedge clk);
      ring_wr = 16'((int'(ring_wr) + n) % RSZ);
      posted += n;
      for (int t = 0; t < 2000 && ring_rd != ring_wr; t++) @(negedge clk);
      check(ring_rd == ring_wr, $sformatf("doorbell %0d: read pointer %0d reaches write pointer %0d", k, ring_rd, ring_wr));
    end
    repeat (20) @(negedge clk);
    check(bad == 0, $sformatf("%0d malformed batch requests", bad));
    check(total == posted, $sformatf("%0d descriptors fetched for %0d posted", total, posted));
    begin
      bit ok = 1;
      for (int i = 0; i < RSZ; i++) if (fetched[i] < 2 || fetched[i] > 3) ok = 0;
      check(ok, "each ring slot fetched once per pass");
    end
    check(nreq < posted / 2 && batch_count == 32'(nreq), $sformatf("%0d requests for %0d descriptors", nreq, posted));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

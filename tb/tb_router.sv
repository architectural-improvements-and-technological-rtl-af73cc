// tb_router: the 5x5 switch at node (1,1,1). Every input is driven by its own
// packet source; every output is checked against a per-(input, output)
// scoreboard, so lost, duplicated, reordered or interleaved flits are caught.
// Phase 1 sends five simultaneous flows on a permutation (input i to output
// i+1 mod 5) with all outputs ready and checks that all five flows move one
// flit per clock at the same time. Phase 2 sends random packets to random
// outputs with random back-pressure, so several inputs compete for the
// same output, and counts those conflicts.
module tb_router;
  import apenet_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  localparam coord_t ME = '{x: 8'd1, y: 8'd1, z: 8'd1};
  logic  [PORTS-1:0] in_valid = '0, in_ready, out_valid, out_ready = '1, out_busy;
  flit_t [PORTS-1:0] in_flit = '0, out_flit;

  router dut (.clk, .rst_n, .my_coord(ME), .in_valid, .in_flit, .in_ready,
              .out_valid, .out_flit, .out_ready, .out_busy);

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++; if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  function automatic flit_t hdr_flit(input int src, input int dst, input int seq, input int len);
    hdr_t h;
    h = '0;
    h.dst = ME;
    case (dst)
      PORT_X: h.dst.x = 8'd2;
      PORT_Y: h.dst.y = 8'd0;
      PORT_Z: h.dst.z = 8'd7;
      PORT_GPU: h.dst_gpu = 1'b1;
      default: ;
    endcase
    h.len  = 32'(len);
    h.rsvd = 104'({src[7:0], seq[15:0]});
    return '{sop: 1'b1, eop: (len == 0), data: h};
  endfunction

  flit_t exp_q [PORTS][PORTS][$];
  int    cur_in [PORTS];
  int    got [PORTS], bad = 0;

  always @(posedge clk) if (rst_n)
    for (int o = 0; o < PORTS; o++)
      if (out_valid[o] && out_ready[o]) begin
        flit_t e;
        if (out_flit[o].sop) cur_in[o] = int'(out_flit[o].data[175:168]);
        if (cur_in[o] < 0 || cur_in[o] >= PORTS || exp_q[cur_in[o]][o].size() == 0) bad++;
        else begin
          e = exp_q[cur_in[o]][o].pop_front();
          if (e !== out_flit[o]) bad++;
        end
        got[o]++;
      end

  // conflicts: an input holding a header while its output is taken by another
  int conflicts = 0;
  always @(posedge clk) if (rst_n)
    for (int i = 0; i < PORTS; i++)
      if (!dut.empty[i] && dut.head[i].sop && out_busy[dut.dest[i]] && dut.owner[dut.dest[i]] != i) conflicts++;

  task automatic send(input int src, input int dst, input int seq, input int len);
    for (int f = 0; f <= len; f++) begin
      flit_t fl;
      fl = (f == 0) ? hdr_flit(src, dst, seq, len)
                    : '{sop: 1'b0, eop: (f == len), data: {8{src[7:0], seq[7:0], f[15:0]}}};
      exp_q[src][dst].push_back(fl);
      in_valid[src] = 1'b1; in_flit[src] = fl;
      #1;
      while (!in_ready[src]) begin @(negedge clk); #1; end
      @(negedge clk);
    end
    in_valid[src] = 1'b0;
  endtask

  initial begin
    repeat (200000) @(posedge clk);
    failures++; $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    int full_rate;
    for (int o = 0; o < PORTS; o++) begin cur_in[o] = -1; got[o] = 0; end
    repeat (3) @(posedge clk); rst_n = 1;
    @(negedge clk);
    // phase 1: five concurrent flows
    fork
      for (int i = 0; i < PORTS; i++) begin
        automatic int ii = i;
        fork send(ii, (ii + 1) % PORTS, 0, 63); join_none
      end
    join
    full_rate = 0;
    repeat (80) begin
      @(negedge clk);
      if (out_valid == '1) full_rate++;
    end
    wait fork;
    check(full_rate >= 60, $sformatf("all 5 outputs busy together for %0d clocks", full_rate));
    for (int o = 0; o < PORTS; o++)
      check(got[o] == 64, $sformatf("output %0d delivered %0d of 64 flits", o, got[o]));
    // phase 2: random traffic with back-pressure
    fork
      for (int i = 0; i < PORTS; i++) begin
        automatic int ii = i;
        fork
          for (int p = 1; p <= 40; p++) send(ii, $urandom % PORTS, p, $urandom % 12);
        join_none
      end
      begin
        repeat (3000) begin @(negedge clk); out_ready = PORTS'($urandom); end
        out_ready = '1;
      end
    join
    wait fork;
    repeat (500) @(posedge clk);
    begin
      int left = 0;
      for (int i = 0; i < PORTS; i++) for (int o = 0; o < PORTS; o++) left += exp_q[i][o].size();
      check(left == 0, $sformatf("%0d flits not delivered", left));
    end
    check(bad == 0, $sformatf("%0d flits wrong, reordered or interleaved", bad));
    check(conflicts > 0, $sformatf("output conflicts resolved (%0d)", conflicts));
    check(out_busy == '0, "all outputs released");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

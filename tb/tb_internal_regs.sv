// tb_internal_regs: the register block driven by an AXI4-Lite master model
// with AW and W presented in different clocks and random response
// back-pressure. Checks: read-write registers read back what was written and
// drive their outputs; read-only registers show their inputs and ignore
// writes; a TLB_CMD write produces exactly one TLB write pulse carrying the
// staged page numbers, owner, index and valid bit; unmapped addresses read 0.
module tb_internal_regs;
  import apenet_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic s_awvalid = 0, s_awready, s_wvalid = 0, s_wready, s_bvalid, s_bready = 0;
  logic s_arvalid = 0, s_arready, s_rvalid, s_rready = 0;
  logic [31:0] s_awaddr = 0, s_wdata = 0, s_araddr = 0, s_rdata;
  logic [3:0]  s_wstrb = 4'hF;
  logic [1:0]  s_bresp, s_rresp;
  coord_t my_coord;
  logic [63:0] ring_base, eq_base;
  logic [15:0] ring_size, ring_wr, ring_rd = 16'd11, eq_size, eq_wr = 16'd22, eq_rd;
  logic tlb_wr_en, tlb_wr_valid;
  logic [5:0] tlb_wr_idx;
  logic [51:0] tlb_wr_vpn, tlb_wr_ppn;
  logic [15:0] tlb_wr_pid;
  logic [2:0] link_up = 3'b110;
  logic [2:0][31:0] crc_errs = {32'd30, 32'd20, 32'd10};
  logic [31:0] batches = 32'd77;

  internal_regs dut (.*);

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++; if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  task automatic wr(input logic [31:0] a, input logic [31:0] d);
    @(negedge clk);
    s_awvalid = 1; s_awaddr = a;
    if ($urandom % 2) @(negedge clk);
    s_wvalid = 1; s_wdata = d;
    #1;
    while (!(s_awready && s_wready)) begin @(negedge clk); #1; end
    @(negedge clk);
    s_awvalid = 0; s_wvalid = 0;
    repeat ($urandom % 3) @(negedge clk);
    s_bready = 1;
    #1;
    while (!s_bvalid) begin @(negedge clk); #1; end
    @(negedge clk);
    s_bready = 0;
  endtask

  task automatic rd(input logic [31:0] a, output logic [31:0] d);
    @(negedge clk);
    s_arvalid = 1; s_araddr = a;
    #1;
    while (!s_arready) begin @(negedge clk); #1; end
    @(negedge clk);
    s_arvalid = 0;
    repeat ($urandom % 3) @(negedge clk);
    s_rready = 1;
    #1;
    while (!s_rvalid) begin @(negedge clk); #1; end
    d = s_rdata;
    @(negedge clk);
    s_rready = 0;
  endtask

  int tlb_pulses = 0;
  logic [5:0] last_idx; logic last_valid; logic [51:0] last_vpn, last_ppn; logic [15:0] last_pid;
  always @(posedge clk) if (rst_n && tlb_wr_en) begin
    tlb_pulses++; last_idx = tlb_wr_idx; last_valid = tlb_wr_valid;
    last_vpn = tlb_wr_vpn; last_ppn = tlb_wr_ppn; last_pid = tlb_wr_pid;
  end

  initial begin
    repeat (10000) @(posedge clk);
    failures++; $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    logic [31:0] d;
    repeat (3) @(posedge clk); rst_n = 1;
    rd(32'h00, d); check(d == 32'hA9E5_0005, "ID");
    wr(32'h00, 32'h1234); rd(32'h00, d); check(d == 32'hA9E5_0005, "ID read-only");
    wr(32'h04, 32'h00_0A_0B_0C); rd(32'h04, d);
    check(d == 32'h000A0B0C && my_coord == '{x: 8'h0A, y: 8'h0B, z: 8'h0C}, "node coordinates");
    wr(32'h08, 32'h8765_4320); wr(32'h0C, 32'h0000_00AB); wr(32'h10, 32'd64); wr(32'h14, 32'd9);
    check(ring_base == 64'hAB_8765_4320 && ring_size == 64 && ring_wr == 9, "tx ring registers drive outputs");
    rd(32'h0C, d); check(d == 32'hAB, "ring base high reads back");
    rd(32'h18, d); check(d == 32'd11, "tx_ring_read shows the hardware pointer");
    wr(32'h18, 32'd0); rd(32'h18, d); check(d == 32'd11, "tx_ring_read ignores writes");
    wr(32'h20, 32'h2000_0000); wr(32'h24, 32'd1); wr(32'h28, 32'd32); wr(32'h30, 32'd5);
    check(eq_base == 64'h1_2000_0000 && eq_size == 32 && eq_rd == 5, "event queue registers");
    rd(32'h2C, d); check(d == 32'd22, "event write pointer");
    wr(32'h40, 32'h7000_1000); wr(32'h44, 32'h0000_0001);
    wr(32'h48, 32'h3000_5000); wr(32'h4C, 32'h0000_0002);
    wr(32'h50, 32'd42);
    check(tlb_pulses == 0, "no TLB write before TLB_CMD");
    wr(32'h54, 32'h8000_0021);
    check(tlb_pulses == 1 && last_idx == 6'h21 && last_valid && last_vpn == 52'h1_7000_1 &&
          last_ppn == 52'h2_3000_5 && last_pid == 16'd42, "TLB registration pulse");
    wr(32'h54, 32'h0000_0003);
    check(tlb_pulses == 2 && last_idx == 6'h3 && !last_valid, "TLB unregistration pulse");
    rd(32'h60, d); check(d[2:0] == 3'b110, "link status");
    rd(32'h64, d); check(d == 10, "CRC errors X");
    rd(32'h6C, d); check(d == 30, "CRC errors Z");
    rd(32'h70, d); check(d == 77, "batch counter");
    rd(32'hF0, d); check(d == 0, "unmapped address reads 0");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

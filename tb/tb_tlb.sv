// tb_tlb: fills TLB entries, then checks lookups: a hit returns the physical
// page plus the in-page offset and the owner id one clock after the request;
// an address in no registered page misses; an overwritten entry returns its
// new page; an invalidated entry misses. The last entry index is used too.
module tb_tlb;
  import apenet_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  localparam int E = 64;
  logic wr_en = 0, wr_valid = 0, lk_req = 0, lk_done, lk_hit;
  logic [$clog2(E)-1:0] wr_idx = '0;
  logic [51:0] wr_vpn = '0, wr_ppn = '0;
  logic [15:0] wr_pid = '0, lk_pid;
  logic [63:0] lk_va = '0, lk_pa;

  tlb #(.ENTRIES(E)) dut (.*);

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++; if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  task automatic put(input int idx, input logic v, input logic [51:0] vpn, ppn, input logic [15:0] pid);
    @(negedge clk);
    wr_en = 1; wr_idx = idx[$clog2(E)-1:0]; wr_valid = v; wr_vpn = vpn; wr_ppn = ppn; wr_pid = pid;
    @(negedge clk);
    wr_en = 0;
  endtask

  task automatic look(input logic [63:0] va, input bit hit, input logic [63:0] pa, input logic [15:0] pid);
    @(negedge clk);
    lk_req = 1; lk_va = va;
    @(negedge clk);
    lk_req = 0;
    check(lk_done && lk_hit == hit && (!hit || (lk_pa == pa && lk_pid == pid)),
          $sformatf("lookup %h: done %0d hit %0d pa %h pid %0d", va, lk_done, lk_hit, lk_pa, lk_pid));
  endtask

  initial begin
    repeat (10000) @(posedge clk);
    failures++; $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    repeat (3) @(posedge clk); rst_n = 1;
    look(64'h1000, 0, 0, 0);
    for (int i = 0; i < E; i++) put(i, 1, 52'h7_0000 + 52'(i), 52'h9_0000 + 52'(i * 3), 16'(i));
    for (int i = 0; i < E; i += 7)
      look({12'd0, 52'h7_0000 + 52'(i)} << 12 | 64'h5A0, 1, ({12'd0, 52'h9_0000 + 52'(i * 3)} << 12) | 64'h5A0, 16'(i));
    look(64'h6_FFFF_F000, 0, 0, 0);
    put(E - 1, 1, 52'h1234, 52'hABCD, 16'd99);
    look(64'h0123_4FE0, 1, 64'h0ABC_DFE0, 16'd99);
    put(5, 0, 0, 0, 0);
    look({12'd0, 52'h7_0005} << 12, 0, 0, 0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

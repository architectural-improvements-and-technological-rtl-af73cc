// pcie_host_model: behavioural model (testbench only) of what sits on the
// far side of the DNP's PCIe interface: the PCIe Gen3 core with its DMA
// engines, and host/GPU memory.
//
// Memory is a sparse array of 32-byte lines indexed by address/32. The DMA
// engines are programmed through the AXI4-Lite slave (per engine at
// engine*16: address low, address high, length, control {stream[3:2],
// to_host[1], start[0]}). Writing control with start runs the transfer:
// memory -> device transfers push len/32 lines on AXI stream input 'stream'
// after RD_LAT clocks; device -> memory transfers take len/32 lines from
// output stream 'stream' into memory. The engine's interrupt then pulses
// for one clock. Transfers run one after the other. The host side of the
// register interface is offered as the tasks reg_wr and reg_rd; stall_wr
// holds off all device -> memory transfers while set.
module pcie_host_model
  import apenet_pkg::*;
#(
  parameter int unsigned RD_LAT = 4
) (
  input  logic                   clk,
  input  logic                   rst_n,
  output logic [3:0]             s_tvalid,
  output logic [3:0][FLIT_W-1:0] s_tdata,
  input  logic [3:0]             s_tready,
  input  logic [1:0]             m_tvalid,
  input  logic [1:0][FLIT_W-1:0] m_tdata,
  output logic [1:0]             m_tready,
  input  logic        c_awvalid,
  input  logic [31:0] c_awaddr,
  output logic        c_awready,
  input  logic        c_wvalid,
  input  logic [31:0] c_wdata,
  input  logic [3:0]  c_wstrb,
  output logic        c_wready,
  output logic        c_bvalid,
  output logic [1:0]  c_bresp,
  input  logic        c_bready,
  output logic [NQ-1:0] irq,
  // host access to the DNP registers
  output logic        r_awvalid,
  output logic [31:0] r_awaddr,
  input  logic        r_awready,
  output logic        r_wvalid,
  output logic [31:0] r_wdata,
  output logic [3:0]  r_wstrb,
  input  logic        r_wready,
  input  logic        r_bvalid,
  input  logic [1:0]  r_bresp,
  output logic        r_bready,
  output logic        r_arvalid,
  output logic [31:0] r_araddr,
  input  logic        r_arready,
  input  logic        r_rvalid,
  input  logic [31:0] r_rdata,
  input  logic [1:0]  r_rresp,
  output logic        r_rready
);
  logic [FLIT_W-1:0] mem [longint];
  logic [31:0] csr [NQ][4];
  int unsigned dma_count [NQ];
  bit  stall_wr = 0;

  int job_q[$];

  function automatic logic [FLIT_W-1:0] mem_rd(longint a);
    if (mem.exists(a >>> 5)) return mem[a >>> 5];
    return '0;
  endfunction

  // DMA engine configuration registers
  logic aw_got, w_got;
  logic [31:0] aw_a, w_d;
  assign c_awready = !aw_got;
  assign c_wready  = !w_got;
  assign c_bresp   = 2'b00;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      aw_got <= 0; w_got <= 0; c_bvalid <= 0; aw_a <= 0; w_d <= 0;
    end else begin
      if (c_awvalid && c_awready) begin aw_got <= 1; aw_a <= c_awaddr; end
      if (c_wvalid && c_wready)   begin w_got <= 1;  w_d <= c_wdata;  end
      if (aw_got && w_got && !c_bvalid) begin
        c_bvalid <= 1;
        csr[aw_a[5:4]][aw_a[3:2]] <= w_d;
        if (aw_a[3:2] == 2'd3 && w_d[0]) job_q.push_back(int'(aw_a[5:4]));
      end
      if (c_bvalid && c_bready) begin c_bvalid <= 0; aw_got <= 0; w_got <= 0; end
    end
  end

  // DMA engines, one transfer at a time. Testbench processes drive one
  // time unit after a clock edge and sample one unit later.
  initial begin
    s_tvalid = '0; s_tdata = '0; m_tready = '0; irq = '0;
    forever begin
      @(posedge clk); #1;
      if (job_q.size() != 0) begin
        int e;
        longint a;
        int unsigned n, st;
        bit to_host, ok;
        e = job_q.pop_front();
        a = {csr[e][1], csr[e][0]};
        n = csr[e][2] / 32;
        to_host = csr[e][3][1];
        st = csr[e][3][3:2];
        if (!to_host) begin
          repeat (RD_LAT) begin @(posedge clk); #1; end
          for (int unsigned i = 0; i < n; i++) begin
            s_tvalid[st] = 1'b1;
            s_tdata[st]  = mem_rd(a + 32 * i);
            do begin #1; ok = s_tready[st]; @(posedge clk); #1; end while (!ok);
          end
          s_tvalid[st] = 1'b0;
        end else begin
          for (int unsigned i = 0; i < n; i++) begin
            while (stall_wr) begin @(posedge clk); #1; end
            m_tready[st] = 1'b1;
            do begin
              #1; ok = m_tvalid[st];
              if (ok) mem[(a >>> 5) + i] = m_tdata[st];
              @(posedge clk); #1;
            end while (!ok);
            m_tready[st] = 1'b0;
          end
        end
        dma_count[e]++;
        irq[e] = 1'b1;
        @(posedge clk); #1;
        irq[e] = 1'b0;
      end
    end
  end

  // host register access
  initial begin
    r_awvalid = 0; r_wvalid = 0; r_bready = 0; r_arvalid = 0; r_rready = 0;
    r_awaddr = 0; r_wdata = 0; r_wstrb = 4'hF; r_araddr = 0;
  end

  task automatic reg_wr(input logic [31:0] a, input logic [31:0] d);
    bit ok;
    @(posedge clk); #1;
    r_awvalid = 1; r_awaddr = a; r_wvalid = 1; r_wdata = d;
    do begin #1; ok = r_awready && r_wready; @(posedge clk); #1; end while (!ok);
    r_awvalid = 0; r_wvalid = 0; r_bready = 1;
    do begin #1; ok = r_bvalid; @(posedge clk); #1; end while (!ok);
    r_bready = 0;
  endtask

  task automatic reg_rd(input logic [31:0] a, output logic [31:0] d);
    bit ok;
    @(posedge clk); #1;
    r_arvalid = 1; r_araddr = a;
    do begin #1; ok = r_arready; @(posedge clk); #1; end while (!ok);
    r_arvalid = 0; r_rready = 1;
    do begin #1; ok = r_rvalid; d = r_rdata; @(posedge clk); #1; end while (!ok);
    r_rready = 0;
  endtask
endmodule

// internal_regs: the DNP's internal registers, reached by the host through
// the PCIe core's AXI4-Lite master (a 32-bit AXI4-Lite slave here).
//
// They hold the node's torus coordinates, the tx ring (base, size in
// entries, the driver's tx_ring_write and the hardware's tx_ring_read), the
// event queue (base, size, the hardware's write pointer and the driver's read
// pointer), and the TLB registration command: the driver writes a virtual
// page, a physical page and an owner ID and then TLB_CMD with the entry index
// (bit 31: 1 registers, 0 unregisters), which writes the entry. Status
// registers show the links' state and their CRC error counters.
//
// Register map (byte offsets):
//   00 ID (ro)            04 NODE_COORD {x,y,z} in bits 23:0
//   08/0C TX_RING_BASE lo/hi  10 TX_RING_SIZE  14 TX_RING_WRITE  18 TX_RING_READ (ro)
//   20/24 EQ_BASE lo/hi   28 EQ_SIZE   2C EQ_WRITE (ro)   30 EQ_READ
//   40/44 TLB_VA lo/hi    48/4C TLB_PA lo/hi   50 TLB_PID   54 TLB_CMD (wo)
//   60 LINK_STATUS (ro)   64/68/6C CRC_ERR X/Y/Z (ro)
//   70 BATCHES (ro): Cmd DMAs issued
// The existence of such registers follows the published text; the map
// itself is this design's choice. A write completes one clock after both
// AW and W are valid, a read one clock after AR. Unmapped reads return 0.
module internal_regs
  import apenet_pkg::*;
#(
  parameter int unsigned TLB_IW = 6
) (
  input  logic        clk,
  input  logic        rst_n,
  // AXI4-Lite slave
  input  logic        s_awvalid,
  input  logic [31:0] s_awaddr,
  output logic        s_awready,
  input  logic        s_wvalid,
  input  logic [31:0] s_wdata,
  input  logic [3:0]  s_wstrb,
  output logic        s_wready,
  output logic        s_bvalid,
  output logic [1:0]  s_bresp,
  input  logic        s_bready,
  input  logic        s_arvalid,
  input  logic [31:0] s_araddr,
  output logic        s_arready,
  output logic        s_rvalid,
  output logic [31:0] s_rdata,
  output logic [1:0]  s_rresp,
  input  logic        s_rready,
  // register outputs
  output coord_t      my_coord,
  output logic [63:0] ring_base,
  output logic [15:0] ring_size,
  output logic [15:0] ring_wr,
  input  logic [15:0] ring_rd,
  output logic [63:0] eq_base,
  output logic [15:0] eq_size,
  input  logic [15:0] eq_wr,
  output logic [15:0] eq_rd,
  output logic        tlb_wr_en,
  output logic [TLB_IW-1:0] tlb_wr_idx,
  output logic        tlb_wr_valid,
  output logic [51:0] tlb_wr_vpn,
  output logic [51:0] tlb_wr_ppn,
  output logic [15:0] tlb_wr_pid,
  input  logic [2:0]  link_up,
  input  logic [2:0][31:0] crc_errs,
  input  logic [31:0] batches
);
  localparam logic [31:0] ID = 32'hA9E5_0005;

  logic [63:0] tlb_va, tlb_pa;
  logic        wr_fire;
  logic [7:0]  wa, ra;

  assign wr_fire   = s_awvalid && s_wvalid && !s_bvalid;
  assign s_awready = wr_fire;
  assign s_wready  = wr_fire;
  assign s_bresp   = 2'b00;
  assign s_rresp   = 2'b00;
  assign s_arready = !s_rvalid;
  assign wa        = s_awaddr[7:0];
  assign ra        = s_araddr[7:0];

  assign tlb_wr_vpn = tlb_va[63:12];
  assign tlb_wr_ppn = tlb_pa[63:12];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      s_bvalid     <= 1'b0;
      my_coord     <= '0;
      ring_base    <= '0;
      ring_size    <= 16'd1;
      ring_wr      <= '0;
      eq_base      <= '0;
      eq_size      <= 16'd1;
      eq_rd        <= '0;
      tlb_va       <= '0;
      tlb_pa       <= '0;
      tlb_wr_pid   <= '0;
      tlb_wr_en    <= 1'b0;
      tlb_wr_idx   <= '0;
      tlb_wr_valid <= 1'b0;
    end else begin
      tlb_wr_en <= 1'b0;
      if (s_bvalid && s_bready) s_bvalid <= 1'b0;
      if (wr_fire) begin
        s_bvalid <= 1'b1;
        unique case (wa)
          8'h04: my_coord         <= s_wdata[23:0];
          8'h08: ring_base[31:0]  <= s_wdata;
          8'h0C: ring_base[63:32] <= s_wdata;
          8'h10: ring_size        <= (s_wdata[15:0] == '0) ? 16'd1 : s_wdata[15:0];
          8'h14: ring_wr          <= s_wdata[15:0];
          8'h20: eq_base[31:0]    <= s_wdata;
          8'h24: eq_base[63:32]   <= s_wdata;
          8'h28: eq_size          <= (s_wdata[15:0] == '0) ? 16'd1 : s_wdata[15:0];
          8'h30: eq_rd            <= s_wdata[15:0];
          8'h40: tlb_va[31:0]     <= s_wdata;
          8'h44: tlb_va[63:32]    <= s_wdata;
          8'h48: tlb_pa[31:0]     <= s_wdata;
          8'h4C: tlb_pa[63:32]    <= s_wdata;
          8'h50: tlb_wr_pid       <= s_wdata[15:0];
          8'h54: begin
                   tlb_wr_en    <= 1'b1;
                   tlb_wr_idx   <= s_wdata[TLB_IW-1:0];
                   tlb_wr_valid <= s_wdata[31];
                 end
          default: ;
        endcase
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      s_rvalid <= 1'b0;
      s_rdata  <= '0;
    end else begin
      if (s_rvalid && s_rready) s_rvalid <= 1'b0;
      if (s_arvalid && s_arready) begin
        s_rvalid <= 1'b1;
        unique case (ra)
          8'h00: s_rdata <= ID;
          8'h04: s_rdata <= {8'd0, my_coord};
          8'h08: s_rdata <= ring_base[31:0];
          8'h0C: s_rdata <= ring_base[63:32];
          8'h10: s_rdata <= {16'd0, ring_size};
          8'h14: s_rdata <= {16'd0, ring_wr};
          8'h18: s_rdata <= {16'd0, ring_rd};
          8'h20: s_rdata <= eq_base[31:0];
          8'h24: s_rdata <= eq_base[63:32];
          8'h28: s_rdata <= {16'd0, eq_size};
          8'h2C: s_rdata <= {16'd0, eq_wr};
          8'h30: s_rdata <= {16'd0, eq_rd};
          8'h60: s_rdata <= {29'd0, link_up};
          8'h64: s_rdata <= crc_errs[0];
          8'h68: s_rdata <= crc_errs[1];
          8'h6C: s_rdata <= crc_errs[2];
          8'h70: s_rdata <= batches;
          default: s_rdata <= '0;
        endcase
      end
    end
  end

  a_b_hold: assert property (@(posedge clk) disable iff (!rst_n)
    (s_bvalid && !s_bready) |=> s_bvalid);
endmodule

// dma_if: the DMA IF of the Core Interface. It owns four request queues, one
// per kind of DMA the network interface needs (Cmd: fetch tx ring descriptors,
// Tx: read payload from host/GPU memory, Rx: write received payload to memory,
// CPL: write a completion event to the event queue), and the DMA Channel
// Manager FSM that serves them.
//
// The FSM pops the queues one request at a time, visiting the non-empty
// queues in round-robin order. Each queue uses its own PCIe DMA engine
// (engine number = queue number). For a request it writes the engine's four
// configuration registers over a 32-bit AXI4-Lite master (address low, address
// high, length, control with the start bit last), then waits for the engine's
// completion interrupt, reports done[q] for one clock and moves on. Only one
// DMA is in flight at a time; the engines are not used in parallel.
//
// Sequential popping, programming through PLDA configuration registers and
// completion by interrupt follow the published text. The register map, the
// control-word layout, the round-robin order and the queue depth are this
// design's choices. Timing: with an always-ready AXI slave a request costs
// 1 + 4*2 clocks of programming, then the transfer itself, then 1 clock.
module dma_if
  import apenet_pkg::*;
#(
  parameter int unsigned QDEPTH = 8
) (
  input  logic                  clk,
  input  logic                  rst_n,
  // request queues
  input  logic     [NQ-1:0]     req_valid,
  input  dma_req_t [NQ-1:0]     req,
  output logic     [NQ-1:0]     req_ready,
  output logic     [NQ-1:0]     done,
  // AXI4-Lite master towards the PCIe core's configuration registers
  output logic                  m_awvalid,
  output logic [31:0]           m_awaddr,
  input  logic                  m_awready,
  output logic                  m_wvalid,
  output logic [31:0]           m_wdata,
  output logic [3:0]            m_wstrb,
  input  logic                  m_wready,
  input  logic                  m_bvalid,
  input  logic [1:0]            m_bresp,
  output logic                  m_bready,
  // completion interrupts of the DMA engines
  input  logic     [NQ-1:0]     irq,
  output logic                  busy
);
  localparam int unsigned QW = $clog2(NQ);
  localparam int unsigned CW = $clog2(QDEPTH + 1);

  typedef enum logic [1:0] {F_IDLE, F_WRITE, F_RESP, F_WAIT} fsm_e;
  fsm_e state;

  dma_req_t [NQ-1:0] head;
  logic     [NQ-1:0] empty, full, pop, gnt;
  logic     [QW-1:0] gnt_idx, cur_q;
  dma_req_t          cur;
  logic     [1:0]    reg_idx;
  logic              aw_done, w_done;
  logic     [NQ-1:0] irq_pend;

  for (genvar q = 0; q < NQ; q++) begin : g_q
    logic [CW-1:0] cnt;
    sync_fifo #(.WIDTH($bits(dma_req_t)), .DEPTH(QDEPTH)) u_q (
      .clk, .rst_n,
      .wr_en(req_valid[q] && req_ready[q]), .wr_data(req[q]), .full(full[q]),
      .rd_en(pop[q]), .rd_data(head[q]), .empty(empty[q]), .count(cnt));
    assign req_ready[q] = !full[q];
  end

  rr_arbiter #(.N(NQ)) u_rr (
    .clk, .rst_n, .req(~empty & {NQ{state == F_IDLE}}), .take(state == F_IDLE),
    .gnt, .gnt_idx);

  assign pop = gnt & {NQ{state == F_IDLE}};

  // register being written: address, data
  always_comb begin
    m_awaddr = 32'(cur_q) * 32'd16 + 32'(reg_idx) * 32'd4;
    unique case (reg_idx)
      2'd0: m_wdata = cur.addr[31:0];
      2'd1: m_wdata = cur.addr[63:32];
      2'd2: m_wdata = cur.len;
      2'd3: m_wdata = {28'd0, cur.stream, cur.to_host, 1'b1};
    endcase
  end
  assign m_wstrb   = 4'hF;
  assign m_awvalid = (state == F_WRITE) && !aw_done;
  assign m_wvalid  = (state == F_WRITE) && !w_done;
  assign m_bready  = (state == F_RESP);
  assign busy      = (state != F_IDLE);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state    <= F_IDLE;
      cur      <= '0;
      cur_q    <= '0;
      reg_idx  <= '0;
      aw_done  <= 1'b0;
      w_done   <= 1'b0;
      done     <= '0;
      irq_pend <= '0;
    end else begin
      done     <= '0;
      irq_pend <= irq_pend | irq;
      unique case (state)
        F_IDLE: if (gnt != '0) begin
                  cur     <= head[gnt_idx];
                  cur_q   <= gnt_idx;
                  reg_idx <= '0;
                  state   <= F_WRITE;
                end
        F_WRITE: begin
                  if (m_awvalid && m_awready) aw_done <= 1'b1;
                  if (m_wvalid && m_wready)   w_done  <= 1'b1;
                  if ((aw_done || m_awready) && (w_done || m_wready)) state <= F_RESP;
                end
        F_RESP: if (m_bvalid) begin
                  aw_done <= 1'b0;
                  w_done  <= 1'b0;
                  if (reg_idx == 2'd3) state <= F_WAIT;
                  else begin
                    reg_idx <= reg_idx + 1'b1;
                    state   <= F_WRITE;
                  end
                end
        F_WAIT: if (irq_pend[cur_q] || irq[cur_q]) begin
                  irq_pend[cur_q] <= 1'b0;
                  done[cur_q]     <= 1'b1;
                  state           <= F_IDLE;
                end
      endcase
    end
  end

  a_aw_stable: assert property (@(posedge clk) disable iff (!rst_n)
    (m_awvalid && !m_awready) |=> m_awvalid && $stable(m_awaddr));
  a_w_stable: assert property (@(posedge clk) disable iff (!rst_n)
    (m_wvalid && !m_wready) |=> m_wvalid && $stable(m_wdata));
endmodule

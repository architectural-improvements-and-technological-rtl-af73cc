// dma_ctrl: the packet engine of the network interface ("DMA Ctrl"). It turns
// descriptors into packets on the transmit side, and packets into RDMA writes
// on the receive side, and reports both with completion events.
//
// Transmit: a descriptor is taken from the command FIFO. A Tx DMA request is
// queued that reads the source page into the HOST TX or GPU TX FIFO
// (src_gpu). A header flit (destination coordinates, destination virtual
// address, length, this node's coordinates) is sent on the router's host or
// GPU local port, followed by len/32 payload flits taken from that FIFO as
// they arrive; the last flit carries eop. Then a "sent" event is raised.
// Receive: packets from the router's two local ports are taken one whole
// packet at a time (round-robin between the ports). The header's virtual
// address is looked up in the TLB (buffer search and V2P translation). On a
// hit, with the payload inside the registered page, an Rx DMA request writes
// len bytes to the physical address and the payload flits are pushed into
// the RX FIFO that the DMA engine drains; a "received" event follows. On a
// miss the payload is discarded and an error event is raised.
// Events: each event is written into the EQ FIFO and a CPL DMA request
// copies it to eq_base + 32*eq_wr; eq_wr then advances (wrapping at eq_size).
// No event is issued while the event queue is full (eq_wr + 1 == eq_rd).
// A "received" event waits until the DMA IF reports the packet's Rx DMA
// done, so the host never sees the event before the data.
//
// The flow (descriptor -> Tx req, header -> BSRC/V2P -> Rx req, events on
// completion and on error) follows the published description; formats,
// the one-page packet limit and the arbitration are this design's choices.
// Lengths are multiples of 32 bytes; len = 0 sends a header-only packet.
module dma_ctrl
  import apenet_pkg::*;
(
  input  logic              clk,
  input  logic              rst_n,
  input  coord_t            my_coord,
  // FIFO COMMAND
  input  logic              cmd_valid,
  input  desc_t             cmd_desc,
  output logic              cmd_pop,
  // FIFO HOST TX / GPU TX (index 0 host, 1 GPU)
  input  logic [1:0]        txd_valid,
  input  logic [1:0][FLIT_W-1:0] txd_data,
  output logic [1:0]        txd_pop,
  // router local ports (index 0 = PORT_HOST, 1 = PORT_GPU)
  output logic [1:0]        tx_valid,
  output flit_t [1:0]       tx_flit,
  input  logic [1:0]        tx_ready,
  input  logic [1:0]        rx_valid,
  input  flit_t [1:0]       rx_flit,
  output logic [1:0]        rx_ready,
  // FIFO RX
  output logic              rxd_push,
  output logic [FLIT_W-1:0] rxd_data,
  input  logic              rxd_full,
  // FIFO EQ
  output logic              eq_push,
  output evt_t              eq_data,
  input  logic              eq_full,
  // DMA IF queues Tx, Rx, CPL
  output logic              txreq_valid,
  output dma_req_t          txreq,
  input  logic              txreq_ready,
  output logic              rxreq_valid,
  output dma_req_t          rxreq,
  input  logic              rxreq_ready,
  output logic              cplreq_valid,
  output dma_req_t          cplreq,
  input  logic              cplreq_ready,
  input  logic              rxreq_done,     // the DMA IF finished an Rx request
  // TLB lookup
  output logic              lk_req,
  output logic [63:0]       lk_va,
  input  logic              lk_done,
  input  logic              lk_hit,
  input  logic [63:0]       lk_pa,
  // event queue
  input  logic [63:0]       eq_base,
  input  logic [15:0]       eq_size,
  input  logic [15:0]       eq_rd,
  output logic [15:0]       eq_wr,
  // statistics
  output logic [31:0]       sent_count,
  output logic [31:0]       recv_count,
  output logic [31:0]       drop_count
);
  // ------------------------------------------------------------ transmit
  typedef enum logic [2:0] {T_IDLE, T_REQ, T_HDR, T_DATA, T_EVT} tstate_e;
  tstate_e tstate;
  desc_t   d;
  logic [15:0] t_left;
  logic        t_sel;       // 0 host, 1 GPU
  hdr_t        t_hdr;
  logic        tx_evt_ack;

  always_comb begin
    t_hdr         = '0;
    t_hdr.dst_va  = d.dst_va;
    t_hdr.len     = d.len;
    t_hdr.dst     = d.dst;
    t_hdr.src     = my_coord;
    t_hdr.dst_gpu = d.dst_gpu;
  end

  assign cmd_pop     = (tstate == T_IDLE) && cmd_valid;
  assign txreq_valid = (tstate == T_REQ);
  assign txreq       = '{addr: d.src_addr, len: d.len, to_host: 1'b0,
                         stream: d.src_gpu ? SIN_GPU_TX : SIN_HOST_TX};

  always_comb begin
    tx_valid = '0;
    tx_flit  = '0;
    txd_pop  = '0;
    if (tstate == T_HDR) begin
      tx_valid[t_sel] = 1'b1;
      tx_flit[t_sel]  = '{sop: 1'b1, eop: (d.len[31:5] == '0), data: t_hdr};
    end else if (tstate == T_DATA) begin
      tx_valid[t_sel] = txd_valid[t_sel];
      tx_flit[t_sel]  = '{sop: 1'b0, eop: (t_left == 16'd1), data: txd_data[t_sel]};
      txd_pop[t_sel]  = txd_valid[t_sel] && tx_ready[t_sel];
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      tstate     <= T_IDLE;
      d          <= '0;
      t_left     <= '0;
      t_sel      <= 1'b0;
      sent_count <= '0;
    end else begin
      unique case (tstate)
        T_IDLE: if (cmd_valid) begin
                  d      <= cmd_desc;
                  t_sel  <= cmd_desc.src_gpu;
                  t_left <= 16'(cmd_desc.len[31:5]);
                  tstate <= (cmd_desc.len[31:5] == '0) ? T_HDR : T_REQ;
                end
        T_REQ:  if (txreq_ready) tstate <= T_HDR;
        T_HDR:  if (tx_ready[t_sel]) tstate <= (t_left == '0) ? T_EVT : T_DATA;
        T_DATA: if (txd_valid[t_sel] && tx_ready[t_sel]) begin
                  t_left <= t_left - 1'b1;
                  if (t_left == 16'd1) tstate <= T_EVT;
                end
        T_EVT:  if (tx_evt_ack) begin
                  tstate     <= T_IDLE;
                  sent_count <= sent_count + 1'b1;
                end
        default: tstate <= T_IDLE;
      endcase
    end
  end

  // ------------------------------------------------------------- receive
  typedef enum logic [2:0] {R_IDLE, R_LOOK, R_REQ, R_DATA, R_DROP, R_EVT} rstate_e;
  rstate_e rstate;
  logic    r_sel, r_last;   // port being served, last port served
  hdr_t    r_hdr;
  logic    r_ok, r_noload;
  logic    rx_evt_ack;
  flit_t   rf;
  logic    rv;

  assign rf = rx_flit[r_sel];
  assign rv = rx_valid[r_sel];

  assign lk_va  = r_hdr.dst_va;
  assign rxreq_valid = (rstate == R_REQ);
  assign rxreq  = '{addr: lk_pa, len: r_hdr.len, to_host: 1'b1, stream: SOUT_RX};
  assign rxd_data = rf.data;

  always_comb begin
    rx_ready = '0;
    rxd_push = 1'b0;
    unique case (rstate)
      R_IDLE: ;
      R_LOOK, R_REQ, R_EVT: ;
      R_DATA: begin
                rx_ready[r_sel] = !rxd_full;
                rxd_push        = rv && !rxd_full;
              end
      R_DROP: rx_ready[r_sel] = 1'b1;
      default: ;
    endcase
    // the header is consumed in R_IDLE when a port is chosen
    if (rstate == R_IDLE) begin
      if (rx_valid[!r_last])     rx_ready[!r_last] = 1'b1;
      else if (rx_valid[r_last]) rx_ready[r_last]  = 1'b1;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rstate     <= R_IDLE;
      r_sel      <= 1'b0;
      r_last     <= 1'b1;
      r_hdr      <= '0;
      r_ok       <= 1'b0;
      r_noload   <= 1'b0;
      lk_req     <= 1'b0;
      recv_count <= '0;
      drop_count <= '0;
    end else begin
      lk_req <= 1'b0;
      unique case (rstate)
        R_IDLE: if (rx_valid != '0) begin
                  logic s;
                  s = rx_valid[!r_last] ? !r_last : r_last;
                  r_sel    <= s;
                  r_last   <= s;
                  r_hdr    <= hdr_t'(rx_flit[s].data);
                  r_noload <= rx_flit[s].eop;
                  lk_req   <= 1'b1;
                  rstate   <= R_LOOK;
                end
        R_LOOK: if (lk_done) begin
                  r_ok <= lk_hit && ({20'd0, r_hdr.dst_va[11:0]} + r_hdr.len <= 32'(PAGE_BYTES));
                  if (lk_hit && ({20'd0, r_hdr.dst_va[11:0]} + r_hdr.len <= 32'(PAGE_BYTES))) begin
                    rstate <= r_noload ? R_EVT : R_REQ;
                  end else begin
                    rstate <= r_noload ? R_EVT : R_DROP;
                  end
                end
        R_REQ:  if (rxreq_ready) rstate <= R_DATA;
        R_DATA: if (rv && !rxd_full && rf.eop) rstate <= R_EVT;
        R_DROP: if (rv && rf.eop) rstate <= R_EVT;
        R_EVT:  if (rx_evt_ack) begin   // rx_pend waits for the Rx DMA (see below)
                  rstate <= R_IDLE;
                  if (r_ok) recv_count <= recv_count + 1'b1;
                  else      drop_count <= drop_count + 1'b1;
                end
        default: rstate <= R_IDLE;
      endcase
    end
  end

  // -------------------------------------------------------------- events
  logic  eq_space, tx_pend, rx_pend, pick_rx, last_rx, fire;
  evt_t  ev;
  logic [15:0] eq_wr_nxt;
  logic [7:0]  rx_issued, rx_completed;

  // a "received" event only once the payload is in memory: count Rx DMAs
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rx_issued    <= '0;
      rx_completed <= '0;
    end else begin
      if (rxreq_valid && rxreq_ready) rx_issued    <= rx_issued + 1'b1;
      if (rxreq_done)                 rx_completed <= rx_completed + 1'b1;
    end
  end

  assign eq_wr_nxt = (eq_wr + 1'b1 >= eq_size) ? '0 : eq_wr + 1'b1;
  assign eq_space  = (eq_wr_nxt != eq_rd);
  assign tx_pend   = (tstate == T_EVT);
  assign rx_pend   = (rstate == R_EVT) && (rx_issued == rx_completed);
  assign pick_rx   = rx_pend && (!tx_pend || !last_rx);
  assign fire      = (tx_pend || rx_pend) && eq_space && !eq_full && cplreq_ready;

  always_comb begin
    ev = '0;
    if (pick_rx) begin
      ev.etype = r_ok ? EVT_RECV : EVT_ERR_NOBUF;
      ev.va    = r_hdr.dst_va;
      ev.len   = r_hdr.len;
    end else begin
      ev.etype = EVT_SENT;
      ev.va    = d.dst_va;
      ev.len   = d.len;
    end
  end

  assign eq_push      = fire;
  assign eq_data      = ev;
  assign cplreq_valid = fire;
  assign cplreq       = '{addr: eq_base + 64'(eq_wr) * 64'(FLIT_BYTES), len: 32'(FLIT_BYTES),
                          to_host: 1'b1, stream: SOUT_EQ};
  assign tx_evt_ack   = fire && !pick_rx;
  assign rx_evt_ack   = fire && pick_rx;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      eq_wr   <= '0;
      last_rx <= 1'b0;
    end else if (fire) begin
      eq_wr   <= eq_wr_nxt;
      last_rx <= pick_rx;
    end
  end
endmodule

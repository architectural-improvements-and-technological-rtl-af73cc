// multi_pkt_inst: descriptor fetcher of the transmit path ("Multi Pkt Inst").
//
// The driver appends 32-byte descriptors to the tx ring in host memory and
// then advances the tx_ring_write pointer; the hardware owns tx_ring_read.
// Whenever the two differ, this block issues a single Cmd DMA request that
// fetches all new descriptors at once (from ring_base + 32*tx_ring_read),
// limited by the end of the ring (a wrapped batch takes two requests), by
// the free space of the command FIFO the descriptors land in, and by
// MAX_BATCH. When the DMA IF reports the request done, tx_ring_read advances
// past the fetched descriptors, which tells the driver their slots are free.
// One request is outstanding at a time.
//
// Batching all pending descriptors into one DMA and the read/write pointer
// pair follow the published driver description; the batch limits are this
// design's choices. Pointers count ring entries; ring_size is at least 1.
module multi_pkt_inst
  import apenet_pkg::*;
#(
  parameter int unsigned MAX_BATCH = 16
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic [63:0] ring_base,
  input  logic [15:0] ring_size,
  input  logic [15:0] ring_wr,
  output logic [15:0] ring_rd,
  input  logic [15:0] cmd_free,     // free entries in the command FIFO
  output logic        req_valid,
  output dma_req_t    req,
  input  logic        req_ready,
  input  logic        req_done,
  output logic [31:0] batch_count   // Cmd DMAs issued
);
  typedef enum logic [1:0] {M_IDLE, M_REQ, M_WAIT} state_e;
  state_e state;

  logic [15:0] avail, n, n_r;

  always_comb begin
    avail = (ring_wr >= ring_rd) ? (ring_wr - ring_rd) : (ring_size - ring_rd);
    n = avail;
    if (n > cmd_free)               n = cmd_free;
    if (n > 16'(MAX_BATCH))         n = 16'(MAX_BATCH);
  end

  assign req_valid = (state == M_REQ);
  assign req = '{addr: ring_base + 64'(ring_rd) * 64'(FLIT_BYTES),
                 len: 32'(n_r) * 32'(FLIT_BYTES), to_host: 1'b0, stream: SIN_CMD};

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state       <= M_IDLE;
      ring_rd     <= '0;
      n_r         <= '0;
      batch_count <= '0;
    end else begin
      unique case (state)
        M_IDLE: if (ring_wr != ring_rd && n != '0) begin
                  n_r   <= n;
                  state <= M_REQ;
                end
        M_REQ:  if (req_ready) begin
                  state       <= M_WAIT;
                  batch_count <= batch_count + 1'b1;
                end
        M_WAIT: if (req_done) begin
                  ring_rd <= (ring_rd + n_r >= ring_size) ? ring_rd + n_r - ring_size
                                                          : ring_rd + n_r;
                  state   <= M_IDLE;
                end
        default: state <= M_IDLE;
      endcase
    end
  end
endmodule

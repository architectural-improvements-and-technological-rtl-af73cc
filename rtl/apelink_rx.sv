// apelink_rx: receive half of the APElink torus link protocol (see
// apelink_tx for the framing).
//
// Deskewed link words arrive from sync_ctrl. Words made of K characters are
// link control: /K28.0/ and /K28.2/ set and clear remote_stop (the far end's
// receiver is full / has room), /K28.5/ idle and /K28.3/ sync words are
// dropped. Data words are de-framed: LW_SOP opens a packet, LW_ESC makes the
// next word plain data, LW_EOP closes the packet and the word after it is the
// CRC-32 of the data words, which is compared with the CRC computed here. A
// mismatch, or a packet that does not end on a flit boundary, raises
// crc_err for one cycle and counts in err_count; the packet is delivered all
// the same (errors are detected, not corrected). Two data words make one
// flit; a flit is held back until the next word shows whether it was the
// last one of its packet. Flits are written into a receive buffer of
// RX_DEPTH flits; local_stop asks the far end to pause while fewer than
// STOP_MARGIN entries are free.
//
// CRC checking follows the published description; the framing words, the
// buffer size and the stop threshold are this design's choices.
module apelink_rx
  import apenet_pkg::*;
#(
  parameter int unsigned RX_DEPTH    = 32,
  parameter int unsigned STOP_MARGIN = 16
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              rx_valid,
  input  lane_t [LANES-1:0] rx_word,
  output logic              out_valid,
  output flit_t             out_flit,
  input  logic              out_ready,
  output logic              remote_stop,
  output logic              local_stop,
  output logic              crc_err,
  output logic [31:0]       err_count,
  output logic [31:0]       pkt_count
);
  typedef enum logic [1:0] {R_IDLE, R_DATA, R_CRC} state_e;
  state_e state;

  localparam int unsigned WI = $clog2(WORDS_PER_FLIT);
  localparam int unsigned CW = $clog2(RX_DEPTH + 1);

  logic [LINK_W-1:0] w;
  logic [LANES*LANE_BYTES-1:0] kv;
  logic              all_k, any_k, esc_seen, first, pend_v;
  logic [WI-1:0]     widx;
  logic [31:0]       crc;
  logic [FLIT_W-1:0] asm_d;
  flit_t             pend;
  logic              push, fifo_full, fifo_empty;
  flit_t             push_flit;
  logic [CW-1:0]     count;

  always_comb begin
    for (int i = 0; i < LANES; i++) begin
      w[i*LANE_W +: LANE_W]          = rx_word[i].d;
      kv[i*LANE_BYTES +: LANE_BYTES] = rx_word[i].k;
    end
  end
  assign all_k = (kv == '1);
  assign any_k = (kv != '0);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state       <= R_IDLE;
      remote_stop <= 1'b0;
      esc_seen    <= 1'b0;
      first       <= 1'b0;
      pend_v      <= 1'b0;
      pend        <= '0;
      widx        <= '0;
      crc         <= '1;
      asm_d       <= '0;
      crc_err     <= 1'b0;
      err_count   <= '0;
      pkt_count   <= '0;
      push        <= 1'b0;
      push_flit   <= '0;
    end else begin
      crc_err <= 1'b0;
      push    <= 1'b0;
      if (rx_valid && all_k) begin
        if (w == {LINK_W/8{K28_0}}) remote_stop <= 1'b1;
        if (w == {LINK_W/8{K28_2}}) remote_stop <= 1'b0;
      end else if (rx_valid && !any_k) begin
        unique case (state)
          R_IDLE: if (w == LW_SOP) begin
                    state    <= R_DATA;
                    crc      <= '1;
                    widx     <= '0;
                    first    <= 1'b1;
                    pend_v   <= 1'b0;
                    esc_seen <= 1'b0;
                  end
          R_DATA: begin
                    if (!esc_seen && w == LW_ESC) begin
                      esc_seen <= 1'b1;
                    end else if (!esc_seen && w == LW_EOP) begin
                      state <= R_CRC;
                      if (pend_v) begin
                        push      <= 1'b1;
                        push_flit <= '{sop: pend.sop, eop: 1'b1, data: pend.data};
                      end
                      if (widx != '0 || !pend_v) begin   // framing error
                        crc_err   <= 1'b1;
                        err_count <= err_count + 1'b1;
                        state     <= R_IDLE;
                      end
                    end else if (!esc_seen && w == LW_SOP) begin
                      // packet cut short: restart on the new start word
                      crc_err   <= 1'b1;
                      err_count <= err_count + 1'b1;
                      crc       <= '1;
                      widx      <= '0;
                      first     <= 1'b1;
                      pend_v    <= 1'b0;
                    end else begin
                      esc_seen <= 1'b0;
                      crc      <= crc32_word(crc, w);
                      asm_d[widx*LINK_W +: LINK_W] <= w;
                      if (widx == WI'(WORDS_PER_FLIT - 1)) begin
                        widx <= '0;
                        if (pend_v) begin
                          push      <= 1'b1;
                          push_flit <= pend;
                        end
                        pend   <= '{sop: first, eop: 1'b0,
                                    data: {w, asm_d[FLIT_W-LINK_W-1:0]}};
                        pend_v <= 1'b1;
                        first  <= 1'b0;
                      end else begin
                        widx <= widx + 1'b1;
                      end
                    end
                  end
          R_CRC:  begin
                    state     <= R_IDLE;
                    pkt_count <= pkt_count + 1'b1;
                    if (w[31:0] != crc) begin
                      crc_err   <= 1'b1;
                      err_count <= err_count + 1'b1;
                    end
                  end
          default: state <= R_IDLE;
        endcase
      end
    end
  end

  sync_fifo #(.WIDTH($bits(flit_t)), .DEPTH(RX_DEPTH)) u_buf (
    .clk, .rst_n,
    .wr_en(push), .wr_data(push_flit), .full(fifo_full),
    .rd_en(out_valid && out_ready), .rd_data(out_flit), .empty(fifo_empty), .count(count));

  assign out_valid  = !fifo_empty;
  assign local_stop = (count > CW'(RX_DEPTH - STOP_MARGIN));

  a_no_overrun: assert property (@(posedge clk) disable iff (!rst_n) push |-> !fifo_full);
endmodule

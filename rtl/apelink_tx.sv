// apelink_tx: transmit half of the APElink torus link protocol.
//
// Router packets (256-bit flits) are encapsulated in a light word-stuffing
// protocol on the 128-bit link word (4 lanes x 32 bits): a start word
// LW_SOP, the packet's data words (two per flit, low half first), an end word
// LW_EOP and a CRC-32 word that covers the data words. A data word that
// happens to equal LW_SOP, LW_EOP or LW_ESC is preceded by LW_ESC so that
// the receiver never mistakes data for framing. Between packets the link
// carries the idle character /K28.5/ on every byte.
// Link-level flow control: when the local receiver's buffer fills
// (local_stop) a /K28.0/ word is sent, when it drains a /K28.2/ word; the
// far end stops sending data words while stopped. Flow-control words have
// priority and may appear inside a packet. While remote_stop is high the
// transmitter sends idle words.
//
// The stuffing-and-CRC idea follows the published description; the framing
// words, the CRC polynomial, the control characters and the flow-control
// scheme are this design's own. One link word leaves per clock; a flit
// without reserved words takes 2 clocks, a packet of N flits 2N+3 clocks.
module apelink_tx
  import apenet_pkg::*;
(
  input  logic              clk,
  input  logic              rst_n,
  input  logic              link_up,
  input  logic              remote_stop,  // far end asked us to pause
  input  logic              local_stop,   // our receiver asks the far end to pause
  // packet input
  input  logic              in_valid,
  input  flit_t             in_flit,
  output logic              in_ready,
  // link words towards sync_ctrl
  output lane_t [LANES-1:0] tx_word,
  output logic [31:0]       pkt_count
);
  typedef enum logic [1:0] {S_IDLE, S_DATA, S_EOP, S_CRC} state_e;
  state_e state;

  localparam int unsigned WI = $clog2(WORDS_PER_FLIT);
  logic [WI-1:0]       widx;
  logic                esc_sent, stop_sent, fc_pend;
  logic [31:0]         crc;
  logic [LINK_W-1:0]   w, out_d;
  logic                out_k, reserved, adv_word;

  assign w        = in_flit.data[widx*LINK_W +: LINK_W];
  assign reserved = (w == LW_SOP) || (w == LW_EOP) || (w == LW_ESC);
  assign fc_pend  = (local_stop != stop_sent);

  // one data word of the current flit leaves this cycle
  assign adv_word = link_up && !fc_pend && !remote_stop && (state == S_DATA)
                    && in_valid && (!reserved || esc_sent);
  assign in_ready = adv_word && (widx == WI'(WORDS_PER_FLIT - 1));

  always_comb begin
    out_k = 1'b1;
    out_d = {LINK_W/8{K28_5}};
    if (link_up) begin
      if (fc_pend) begin
        out_d = local_stop ? {LINK_W/8{K28_0}} : {LINK_W/8{K28_2}};
      end else if (!remote_stop) begin
        unique case (state)
          S_IDLE: if (in_valid) begin out_k = 1'b0; out_d = LW_SOP; end
          S_DATA: if (in_valid) begin
                    out_k = 1'b0;
                    out_d = (reserved && !esc_sent) ? LW_ESC : w;
                  end
          S_EOP:  begin out_k = 1'b0; out_d = LW_EOP; end
          S_CRC:  begin out_k = 1'b0; out_d = {96'd0, crc}; end
        endcase
      end
    end
  end

  always_comb begin
    for (int i = 0; i < LANES; i++) begin
      tx_word[i].k = {LANE_BYTES{out_k}};
      tx_word[i].d = out_d[i*LANE_W +: LANE_W];
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state     <= S_IDLE;
      widx      <= '0;
      esc_sent  <= 1'b0;
      stop_sent <= 1'b0;
      crc       <= '1;
      pkt_count <= '0;
    end else if (link_up) begin
      if (fc_pend) begin
        stop_sent <= local_stop;
      end else if (!remote_stop) begin
        unique case (state)
          S_IDLE: if (in_valid) begin
                    state <= S_DATA;
                    widx  <= '0;
                    crc   <= '1;
                  end
          S_DATA: if (in_valid) begin
                    if (reserved && !esc_sent) begin
                      esc_sent <= 1'b1;
                    end else begin
                      esc_sent <= 1'b0;
                      crc      <= crc32_word(crc, w);
                      widx     <= (widx == WI'(WORDS_PER_FLIT - 1)) ? '0 : widx + 1'b1;
                      if (widx == WI'(WORDS_PER_FLIT - 1) && in_flit.eop) state <= S_EOP;
                    end
                  end
          S_EOP:  state <= S_CRC;
          S_CRC:  begin
                    state     <= S_IDLE;
                    pkt_count <= pkt_count + 1'b1;
                  end
        endcase
      end
    end
  end

  a_sop_first: assert property (@(posedge clk) disable iff (!rst_n)
    (state == S_IDLE && in_valid && link_up && !remote_stop && !fc_pend) |-> in_flit.sop);
endmodule

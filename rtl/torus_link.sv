// torus_link: one bidirectional APElink channel of the Torus Link block,
// between the router port of one dimension and the transceiver PHY.
//
// Transmit: router flits -> apelink_tx (word stuffing, CRC, flow control) ->
// sync_ctrl TX multiplexer (sync keyword until the link is up) -> PHY lanes.
// Receive: PHY lanes -> sync_ctrl deskew FIFOs -> apelink_rx (de-framing,
// CRC check, receive buffer) -> router. The receive buffer's fill level
// drives local_stop, which apelink_tx turns into stop/go words for the far
// end; stop/go words from the far end set remote_stop, which pauses
// apelink_tx.
// The PHY (word aligner, 8B/10B codec, byte ordering, phase-compensation
// FIFOs, serializer, CDR) is vendor transceiver IP and sits outside.
module torus_link
  import apenet_pkg::*;
#(
  parameter int unsigned RX_DEPTH     = 32,
  parameter int unsigned STOP_MARGIN  = 16,
  parameter int unsigned DESKEW_DEPTH = 8,
  parameter int unsigned SYNC_HOLD    = 64
) (
  input  logic              clk,
  input  logic              rst_n,
  // PHY side
  input  logic              tx_ready,
  input  logic              rx_ready,
  input  logic [LANES-1:0]  rx_syncstatus,
  input  lane_t [LANES-1:0] rx_lane,
  output lane_t [LANES-1:0] tx_lane,
  // router side
  input  logic              in_valid,
  input  flit_t             in_flit,
  output logic              in_ready,
  output logic              out_valid,
  output flit_t             out_flit,
  input  logic              out_ready,
  // status
  output logic              link_up,
  output logic              crc_err,
  output logic [31:0]       err_count,
  output logic [31:0]       tx_pkts,
  output logic [31:0]       rx_pkts,
  output logic              stopped        // far end currently stops us
);
  lane_t [LANES-1:0] tx_word, rx_word;
  logic rx_valid, rx_aligned, remote_stop, local_stop;

  sync_ctrl #(.DESKEW_DEPTH(DESKEW_DEPTH), .SYNC_HOLD(SYNC_HOLD)) u_sync (
    .clk, .rst_n, .tx_ready, .rx_ready, .rx_syncstatus, .rx_lane,
    .rx_valid, .rx_word, .tx_word, .tx_lane, .rx_aligned, .link_up);

  apelink_tx u_tx (
    .clk, .rst_n, .link_up, .remote_stop, .local_stop,
    .in_valid, .in_flit, .in_ready, .tx_word, .pkt_count(tx_pkts));

  apelink_rx #(.RX_DEPTH(RX_DEPTH), .STOP_MARGIN(STOP_MARGIN)) u_rx (
    .clk, .rst_n, .rx_valid, .rx_word,
    .out_valid, .out_flit, .out_ready, .remote_stop, .local_stop,
    .crc_err, .err_count, .pkt_count(rx_pkts));

  assign stopped = remote_stop;
endmodule

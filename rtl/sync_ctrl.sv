// sync_ctrl: channel control of one torus link (the "Sync_ctrl" block of the
// link physical layer). It bonds the LANES transceiver lanes of a link into
// one link word.
//
// Receive side: every lane feeds a deskew FIFO in the FPGA fabric. The write
// enable of a lane's FIFO is raised once that lane has recognised the 8B/10B
// keyword /K28.3/ (with the lane's word aligner in sync and the PHY reset
// controller reporting rx_ready) and stays high. The far end sends a run of
// /K28.3/ on all lanes at once, so the point of recognition is taken as the
// end of the run: the first word after the last /K28.3/ is the first word
// written, on every lane. The read enable, common to all FIFOs, is raised
// whenever none of them is empty, so lanes that arrive with different delays
// leave the FIFOs realigned. The first common read marks the receive side as
// aligned.
// Transmit side: a multiplexer in front of the PHY sends /K28.3/ on every
// lane from reset until the PHY reports tx_ready and rx_ready and SYNC_HOLD
// further cycles have passed; then it passes the link transmitter's words.
// link_up is high once the keyword run has been sent and the receive side
// is aligned.
//
// The keyword-triggered write enables and the common read enable follow the
// published description. Taking the end of the keyword run as the alignment
// mark, the FIFO depth, the hold time and dropping the alignment when a lane
// loses rx_syncstatus are this design's choices. Lane skew up to
// DESKEW_DEPTH-1 words is absorbed.
// Timing: a word written in cycle n is readable in cycle n+1 at the earliest;
// rx_valid marks a word on rx_word in the cycle it is read.
module sync_ctrl
  import apenet_pkg::*;
#(
  parameter int unsigned DESKEW_DEPTH = 8,
  parameter int unsigned SYNC_HOLD    = 64
) (
  input  logic                   clk,
  input  logic                   rst_n,
  // from the PHY (reset controller, word aligners, RX phase compensation FIFOs)
  input  logic                   tx_ready,
  input  logic                   rx_ready,
  input  logic [LANES-1:0]       rx_syncstatus,
  input  lane_t [LANES-1:0]      rx_lane,
  // deskewed receive words towards the link receiver
  output logic                   rx_valid,
  output lane_t [LANES-1:0]      rx_word,
  // transmit words from the link transmitter, and to the PHY
  input  lane_t [LANES-1:0]      tx_word,
  output lane_t [LANES-1:0]      tx_lane,
  output logic                   rx_aligned,
  output logic                   link_up
);
  localparam int unsigned HW = $clog2(SYNC_HOLD + 1);
  localparam int unsigned CW = $clog2(DESKEW_DEPTH + 1);

  logic [LANES-1:0] armed, wr_en, empty, full, is_k283, was_k283;
  logic             rd_en;
  logic [HW-1:0]    hold_cnt;
  logic             send_sync;

  for (genvar i = 0; i < LANES; i++) begin : g_lane
    logic [CW-1:0] cnt;
    assign is_k283[i] = (rx_lane[i].k == '1) && (rx_lane[i].d == {LANE_BYTES{K28_3}});

    // write enable: from the first word after a /K28.3/ run, while in sync
    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n) begin
        armed[i]    <= 1'b0;
        was_k283[i] <= 1'b0;
      end else if (!rx_ready || !rx_syncstatus[i]) begin
        armed[i]    <= 1'b0;
        was_k283[i] <= 1'b0;
      end else begin
        was_k283[i] <= is_k283[i];
        if (was_k283[i] && !is_k283[i]) armed[i] <= 1'b1;
      end
    end
    assign wr_en[i] = armed[i] || (was_k283[i] && !is_k283[i]);

    sync_fifo #(.WIDTH($bits(lane_t)), .DEPTH(DESKEW_DEPTH)) u_deskew (
      .clk, .rst_n,
      .wr_en(wr_en[i] && !full[i]), .wr_data(rx_lane[i]), .full(full[i]),
      .rd_en, .rd_data(rx_word[i]), .empty(empty[i]), .count(cnt));
  end

  assign rd_en    = (empty == '0);
  assign rx_valid = rd_en;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)                         rx_aligned <= 1'b0;
    else if (!rx_ready || (rx_syncstatus != '1)) rx_aligned <= 1'b0;
    else if (rd_en)                     rx_aligned <= 1'b1;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)                                   hold_cnt <= '0;
    else if (!tx_ready || !rx_ready)              hold_cnt <= '0;
    else if (hold_cnt != HW'(SYNC_HOLD))          hold_cnt <= hold_cnt + 1'b1;
  end

  assign send_sync = (hold_cnt != HW'(SYNC_HOLD));
  assign link_up   = !send_sync && rx_aligned;

  always_comb begin
    for (int i = 0; i < LANES; i++) begin
      if (send_sync) begin
        tx_lane[i].k = '1;
        tx_lane[i].d = {LANE_BYTES{K28_3}};
      end else begin
        tx_lane[i] = tx_word[i];
      end
    end
  end
endmodule

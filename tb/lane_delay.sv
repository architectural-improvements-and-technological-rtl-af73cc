// lane_delay: testbench model of one transceiver lane between two PHYs: the
// parallel word sent by one side appears at the other DELAY clocks later.
// Different DELAYs on the lanes of a link give lane skew. flip XORs bit 0
// of the word in flight (a transmission error) while it is high.
module lane_delay
  import apenet_pkg::*;
#(
  parameter int unsigned DELAY = 2
) (
  input  logic  clk,
  input  lane_t din,
  input  logic  flip,
  output lane_t dout
);
  lane_t pipe [DELAY];
  initial for (int i = 0; i < DELAY; i++) pipe[i] = '{k: '1, d: {LANE_BYTES{K28_5}}};
  always_ff @(posedge clk) begin
    pipe[0] <= '{k: din.k, d: din.d ^ LANE_W'(flip)};
    for (int i = 1; i < DELAY; i++) pipe[i] <= pipe[i-1];
  end
  assign dout = pipe[DELAY-1];
endmodule

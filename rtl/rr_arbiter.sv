// rr_arbiter: round-robin arbiter. Among the requests in req it grants the
// first one at or after the rotating priority pointer (combinational gnt,
// one-hot or zero). When take is high the pointer moves to the position after
// the granted requester, so every requester is served within N grants.
module rr_arbiter #(
  parameter int unsigned N = 5
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic [N-1:0] req,
  input  logic         take,
  output logic [N-1:0] gnt,
  output logic [$clog2(N)-1:0] gnt_idx
);
  localparam int unsigned IW = $clog2(N);
  logic [IW-1:0] ptr;

  always_comb begin
    gnt     = '0;
    gnt_idx = '0;
    for (int k = N - 1; k >= 0; k--) begin
      // scan from ptr+N-1 down to ptr so that the last match is the first in order
      int unsigned idx;
      idx = (int'(ptr) + k) % N;
      if (req[idx]) begin
        gnt     = '0;
        gnt[idx] = 1'b1;
        gnt_idx = IW'(idx);
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)                 ptr <= '0;
    else if (take && req != '0) ptr <= (gnt_idx == IW'(N - 1)) ? '0 : gnt_idx + 1'b1;
  end
endmodule

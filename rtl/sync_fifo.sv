// sync_fifo: single-clock first-word-fall-through FIFO used for every queue
// and buffer of the DNP (deskew FIFOs, router input buffers, the Core
// Interface FIFOs, DMA request queues). rd_data shows the oldest entry while
// empty is low; rd_en pops it. A write to a full FIFO or a read from an empty
// one is ignored (and flagged by the assertions). Storage is a plain array,
// count gives the fill level. Depth may be any value >= 2.
module sync_fifo #(
  parameter int unsigned WIDTH = 8,
  parameter int unsigned DEPTH = 16,
  localparam int unsigned AW = (DEPTH > 1) ? $clog2(DEPTH) : 1,
  localparam int unsigned CW = $clog2(DEPTH + 1)
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             wr_en,
  input  logic [WIDTH-1:0] wr_data,
  output logic             full,
  input  logic             rd_en,
  output logic [WIDTH-1:0] rd_data,
  output logic             empty,
  output logic [CW-1:0]    count
);
  logic [WIDTH-1:0] mem [DEPTH];
  logic [AW-1:0] wptr, rptr;
  logic do_wr, do_rd;

  assign full    = (count == CW'(DEPTH));
  assign empty   = (count == '0);
  assign do_wr   = wr_en && !full;
  assign do_rd   = rd_en && !empty;
  assign rd_data = mem[rptr];

  always_ff @(posedge clk) begin
    if (do_wr) mem[wptr] <= wr_data;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wptr  <= '0;
      rptr  <= '0;
      count <= '0;
    end else begin
      if (do_wr) wptr <= (wptr == AW'(DEPTH - 1)) ? '0 : wptr + 1'b1;
      if (do_rd) rptr <= (rptr == AW'(DEPTH - 1)) ? '0 : rptr + 1'b1;
      count <= count + CW'(do_wr) - CW'(do_rd);
    end
  end

  a_no_overflow:  assert property (@(posedge clk) disable iff (!rst_n) wr_en |-> !full);
  a_no_underflow: assert property (@(posedge clk) disable iff (!rst_n) rd_en |-> !empty);
endmodule

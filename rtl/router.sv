// router: the DNP router, a 5x5 ports crossbar switch with routing logic and
// an arbiter. Ports 0..2 connect the X, Y and Z torus links, port 3 the host
// side and port 4 the GPU side of the network interface.
//
// Every input port has a buffer of IN_DEPTH flits, at least one maximum
// packet (header + one 4 KB page of payload = 129 flits), as virtual
// cut-through requires: a packet is forwarded as soon as its header reaches
// the head of the buffer and its output is free, and when the output is busy
// the whole packet can wait inside this node without holding the link. The
// routing logic reads the header and applies dimension-ordered routing
// (first correct X, then Y, then Z, then deliver on the host or GPU port
// according to the header's dst_gpu bit). One round-robin arbiter per output
// port chooses among the inputs asking for it; the winner holds the output
// until its tail flit (eop) has passed. All five outputs can move one flit
// per clock at the same time, which is the "5 flows" of the router.
//
// Timing: an idle output is granted one clock after a header appears at the
// head of a buffer; from then on one flit per clock while out_ready is high.
// The port numbering and buffer depth are this design's choices; the port
// count, routing policy and virtual cut-through follow the published text.
module router
  import apenet_pkg::*;
#(
  parameter int unsigned IN_DEPTH = 136
) (
  input  logic               clk,
  input  logic               rst_n,
  input  coord_t             my_coord,
  input  logic  [PORTS-1:0]  in_valid,
  input  flit_t [PORTS-1:0]  in_flit,
  output logic  [PORTS-1:0]  in_ready,
  output logic  [PORTS-1:0]  out_valid,
  output flit_t [PORTS-1:0]  out_flit,
  input  logic  [PORTS-1:0]  out_ready,
  output logic  [PORTS-1:0]  out_busy      // output currently carries a packet
);
  localparam int unsigned PW = $clog2(PORTS);
  localparam int unsigned CW = $clog2(IN_DEPTH + 1);

  flit_t [PORTS-1:0]  head;
  logic  [PORTS-1:0]  empty, full, pop, in_busy;
  logic  [PORTS-1:0][PORTS-1:0] req;      // req[out][in]
  logic  [PORTS-1:0][PORTS-1:0] gnt;      // gnt[out][in]
  logic  [PORTS-1:0][PW-1:0]    gnt_idx;
  logic  [PORTS-1:0][PW-1:0]    owner;    // input connected to an output
  logic  [PORTS-1:0][2:0]       dest;

  for (genvar i = 0; i < PORTS; i++) begin : g_in
    logic [CW-1:0] cnt;
    sync_fifo #(.WIDTH($bits(flit_t)), .DEPTH(IN_DEPTH)) u_buf (
      .clk, .rst_n,
      .wr_en(in_valid[i] && in_ready[i]), .wr_data(in_flit[i]), .full(full[i]),
      .rd_en(pop[i]), .rd_data(head[i]), .empty(empty[i]), .count(cnt));
    assign in_ready[i] = !full[i];
    // routing logic on the header at the head of the buffer
    assign dest[i] = route_port(hdr_t'(head[i].data), my_coord);
  end

  // requests: a header waiting at an input that is not yet connected
  always_comb begin
    req = '0;
    for (int i = 0; i < PORTS; i++)
      if (!empty[i] && !in_busy[i] && head[i].sop)
        req[dest[i]][i] = 1'b1;
  end

  for (genvar o = 0; o < PORTS; o++) begin : g_arb
    rr_arbiter #(.N(PORTS)) u_arb (
      .clk, .rst_n, .req(req[o]), .take(!out_busy[o]),
      .gnt(gnt[o]), .gnt_idx(gnt_idx[o]));
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_busy <= '0;
      in_busy  <= '0;
      owner    <= '0;
    end else begin
      for (int o = 0; o < PORTS; o++) begin
        if (!out_busy[o] && req[o] != '0) begin
          out_busy[o]          <= 1'b1;
          owner[o]             <= gnt_idx[o];
          in_busy[gnt_idx[o]]  <= 1'b1;
        end else if (out_busy[o] && out_valid[o] && out_ready[o] && out_flit[o].eop) begin
          out_busy[o]          <= 1'b0;
          in_busy[owner[o]]    <= 1'b0;
        end
      end
    end
  end

  // crossbar: data and valid depend only on state, never on out_ready
  always_comb begin
    for (int o = 0; o < PORTS; o++) begin
      out_flit[o]  = head[owner[o]];
      out_valid[o] = out_busy[o] && !empty[owner[o]];
    end
  end

  always_comb begin
    pop = '0;
    for (int o = 0; o < PORTS; o++)
      if (out_busy[o] && !empty[owner[o]] && out_ready[o]) pop[owner[o]] = 1'b1;
  end

  for (genvar i = 0; i < PORTS; i++) begin : g_chk
    a_header_first: assert property (@(posedge clk) disable iff (!rst_n)
      (!empty[i] && !in_busy[i]) |-> head[i].sop);
  end
endmodule

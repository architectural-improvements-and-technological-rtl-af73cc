// tlb: translation lookaside buffer of the receive path. It accelerates the
// two steps the receiving network interface takes for every packet: buffer
// search (BSRC, does the destination virtual address belong to a buffer the
// application registered?) and virtual-to-physical translation (V2P).
//
// Each entry maps one registered 4 KB virtual page to its physical page and
// records the owner buffer's process ID. The driver fills entries through
// register commands (wr_en with an index; an entry written with valid = 0 is
// unregistered). A lookup compares the page number of lk_va with all valid
// entries at once; one clock later lk_done returns hit, the physical address
// (physical page plus page offset) and the owner ID. When several entries
// hold the same page, the lowest index wins.
//
// Page-granular entries and a fully associative search are this design's
// choices; the published text names the TLB and its BSRC/V2P role only. The
// number of entries is not given there.
module tlb #(
  parameter int unsigned ENTRIES = 64,
  localparam int unsigned IW = $clog2(ENTRIES)
) (
  input  logic          clk,
  input  logic          rst_n,
  // registration
  input  logic          wr_en,
  input  logic [IW-1:0] wr_idx,
  input  logic          wr_valid,
  input  logic [51:0]   wr_vpn,
  input  logic [51:0]   wr_ppn,
  input  logic [15:0]   wr_pid,
  // lookup
  input  logic          lk_req,
  input  logic [63:0]   lk_va,
  output logic          lk_done,
  output logic          lk_hit,
  output logic [63:0]   lk_pa,
  output logic [15:0]   lk_pid
);
  typedef struct packed {
    logic        valid;
    logic [51:0] vpn;
    logic [51:0] ppn;
    logic [15:0] pid;
  } entry_t;

  entry_t tab [ENTRIES];
  logic          hit;
  logic [IW-1:0] hit_idx;

  always_comb begin
    hit     = 1'b0;
    hit_idx = '0;
    for (int e = ENTRIES - 1; e >= 0; e--) begin
      if (tab[e].valid && tab[e].vpn == lk_va[63:12]) begin
        hit     = 1'b1;
        hit_idx = IW'(e);
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int e = 0; e < ENTRIES; e++) tab[e] <= '0;
    end else if (wr_en) begin
      tab[wr_idx] <= '{valid: wr_valid, vpn: wr_vpn, ppn: wr_ppn, pid: wr_pid};
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      lk_done <= 1'b0;
      lk_hit  <= 1'b0;
      lk_pa   <= '0;
      lk_pid  <= '0;
    end else begin
      lk_done <= lk_req;
      if (lk_req) begin
        lk_hit <= hit;
        lk_pa  <= {tab[hit_idx].ppn, lk_va[11:0]};
        lk_pid <= tab[hit_idx].pid;
      end
    end
  end
endmodule

// tlb: translation lookaside buffer of one accelerator chip's MMU.
//
// Caches page-table entries: logical page number -> physical page number and
// the remote flag (page held in the other chip's memory). The paper gives
// 2048 entries and TLB invalidation by the host driver when it changes the
// mapping; the organisation is this design's choice: direct-mapped, indexed
// by the low log2(ENTRIES) bits of the page number, tagged with the rest.
//
// Interface / timing: lookup is combinational (lk_vpn -> lk_hit, lk_ppn,
// lk_remote). fill writes an entry at the clock edge. flush clears every
// valid bit at the clock edge (and wins over a fill in the same cycle).
module tlb
  import h2m2_pkg::*;
#(
  parameter int ENTRIES = 2048,
  localparam int IW     = $clog2(ENTRIES),
  localparam int TW     = VPN_W - IW
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic [VPN_W-1:0] lk_vpn,
  output logic             lk_hit,
  output logic [PPN_W-1:0] lk_ppn,
  output logic             lk_remote,
  input  logic             fill,
  input  logic [VPN_W-1:0] fill_vpn,
  input  logic [PPN_W-1:0] fill_ppn,
  input  logic             fill_remote,
  input  logic             flush
);

  typedef struct packed {
    logic [TW-1:0]    tag;
    logic             remote;
    logic [PPN_W-1:0] ppn;
  } ent_t;

  logic [ENTRIES-1:0] valid;
  ent_t               ent [ENTRIES];

  wire [IW-1:0] lk_i = lk_vpn[IW-1:0];
  wire [IW-1:0] fl_i = fill_vpn[IW-1:0];

  assign lk_hit    = valid[lk_i] && (ent[lk_i].tag == lk_vpn[VPN_W-1:IW]);
  assign lk_ppn    = ent[lk_i].ppn;
  assign lk_remote = ent[lk_i].remote;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)     valid <= '0;
    else if (flush) valid <= '0;
    else if (fill)  valid[fl_i] <= 1'b1;
  end

  always_ff @(posedge clk)
    if (fill) ent[fl_i] <= '{tag: fill_vpn[VPN_W-1:IW], remote: fill_remote, ppn: fill_ppn};

endmodule

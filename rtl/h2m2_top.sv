// h2m2_top: the asymmetric-memory accelerator board.
//
// Two identical accelerator chips: chip 0 sits on the bandwidth-centric HBM,
// chip 1 on the capacity-centric LPDDR. They are joined by a chip-to-chip
// interconnect that carries direct (zero-copy) accesses to the other side's
// memory, and a kernel synchronisation controller dispatches the kernels the
// host driver launched to the eight cores (0-3 on the HBM side, 4-7 on the
// LPDDR side) once the events they wait for have been recorded. Each side
// translates logical addresses with its own MMU and its own flat page table,
// held in its own memory at pt_base[side]; a logical page may therefore map to
// a local page, to a remote page, or to copies on both sides. The organisation
// follows the paper's overview; the host interface (PCIe in the paper) is
// reduced here to plain ports: kernel launch, event clear, page-table bases
// and TLB flush. The HBM and LPDDR devices are outside: their row ports are
// top-level ports. The host driver changes mappings by writing page tables
// into memory and pulsing tlb_flush.
module h2m2_top
  import h2m2_pkg::*;
#(
  parameter int SPM_ROWS    = 131072,
  parameter int MM_DIM      = 128,
  parameter int TLB_ENTRIES = 2048,
  parameter int SLOTS       = 16,
  parameter int LINK_LAT    = 8
) (
  input  logic            clk,
  input  logic            rst_n,
  // host
  input  logic            launch_valid,
  output logic            launch_ready,
  input  kernel_t         launch,
  input  logic [NEV-1:0]  ev_clear,
  output logic [NEV-1:0]  events,
  input  logic [PA_W-1:0] pt_base   [2],
  input  logic            tlb_flush [2],
  // memories: index 0 HBM, index 1 LPDDR
  output logic            d_req_valid [2],
  input  logic            d_req_ready [2],
  output mem_req_t        d_req       [2],
  input  logic            d_rsp_valid [2],
  output logic            d_rsp_ready [2],
  input  mem_rsp_t        d_rsp       [2],
  // statistics
  output logic [3:0]      fault       [2],
  output logic [31:0]     tlb_hits    [2],
  output logic [31:0]     tlb_misses  [2],
  output logic [31:0]     page_faults [2],
  output logic [31:0]     remote_sent [2],
  output logic [31:0]     remote_served [2],
  output logic [31:0]     overlap_cycles [NCORE_TOT],
  output logic [31:0]     dispatched,
  output logic [31:0]     dep_wait_cycles,
  output logic [$clog2(SLOTS):0] kernels_pending
);

  logic      disp_valid [NCORE_TOT];
  logic      disp_ready [NCORE_TOT];
  core_cmd_t disp_cmd   [NCORE_TOT];
  logic [1:0]      done_valid [NCORE_TOT];
  logic [EV_W-1:0] done_ev    [NCORE_TOT][2];

  logic      tx_valid [2], tx_ready [2], rx_valid [2], rx_ready [2];
  link_msg_t tx_msg [2], rx_msg [2];

  sync_ctrl #(.SLOTS(SLOTS)) u_sync (
    .clk, .rst_n, .launch_valid, .launch_ready, .launch, .ev_clear, .events,
    .disp_valid, .disp_ready, .disp_cmd, .done_valid, .done_ev,
    .dispatched, .dep_wait_cycles, .pending(kernels_pending)
  );

  for (genvar s = 0; s < 2; s++) begin : g_side
    logic            cv [4], cr [4];
    core_cmd_t       cm [4];
    logic [1:0]      dv [4];
    logic [EV_W-1:0] de [4][2];
    logic [31:0]     ov [4];
    for (genvar i = 0; i < 4; i++) begin : g_c
      assign cv[i] = disp_valid[s*4+i];
      assign cm[i] = disp_cmd[s*4+i];
      assign disp_ready[s*4+i] = cr[i];
      assign done_valid[s*4+i] = dv[i];
      assign done_ev[s*4+i]    = de[i];
      assign overlap_cycles[s*4+i] = ov[i];
    end
    accel_chip #(.NCORES(4), .SPM_ROWS(SPM_ROWS), .MM_DIM(MM_DIM), .TLB_ENTRIES(TLB_ENTRIES)) u_chip (
      .clk, .rst_n, .pt_base(pt_base[s]), .tlb_flush(tlb_flush[s]),
      .cmd_valid(cv), .cmd_ready(cr), .cmd(cm), .done_valid(dv), .done_ev(de),
      .d_req_valid(d_req_valid[s]), .d_req_ready(d_req_ready[s]), .d_req(d_req[s]),
      .d_rsp_valid(d_rsp_valid[s]), .d_rsp_ready(d_rsp_ready[s]), .d_rsp(d_rsp[s]),
      .lo_valid(tx_valid[s]), .lo_ready(tx_ready[s]), .lo_msg(tx_msg[s]),
      .li_valid(rx_valid[1-s]), .li_ready(rx_ready[1-s]), .li_msg(rx_msg[1-s]),
      .fault(fault[s]), .tlb_hits(tlb_hits[s]), .tlb_misses(tlb_misses[s]),
      .page_faults(page_faults[s]), .remote_sent(remote_sent[s]), .remote_served(remote_served[s]),
      .overlap_cycles(ov)
    );
  end

  chip_link #(.LAT(LINK_LAT)) u_link (
    .clk, .rst_n, .tx_valid, .tx_ready, .tx_msg, .rx_valid, .rx_ready, .rx_msg
  );

endmodule

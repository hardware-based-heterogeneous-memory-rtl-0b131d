// accel_chip: one accelerator chip of the asymmetric-memory board.
//
// NCORES cores (four in the paper) share one MMU; the MMU's physical requests
// go through the memory controller either to the chip's own DRAM (HBM for the
// bandwidth-centric side, LPDDR for the capacity-centric side) or over the
// interconnect to the other chip. The same chip is used on both sides; only
// the memory behind the DRAM port and the page tables differ. Composition
// follows the paper's overview (cores - MMU - memory controller - memory,
// chip - interconnect); all widths and protocols are those of the sub-blocks.
//
// Interface: per core command/done ports (from the synchronisation
// controller), one DRAM row port, one interconnect transmit/receive pair, the
// page-table base and TLB flush from the host, and statistics.
module accel_chip
  import h2m2_pkg::*;
#(
  parameter int NCORES      = 4,
  parameter int SPM_ROWS    = 131072,
  parameter int MM_DIM      = 128,
  parameter int TLB_ENTRIES = 2048
) (
  input  logic            clk,
  input  logic            rst_n,
  input  logic [PA_W-1:0] pt_base,
  input  logic            tlb_flush,
  input  logic            cmd_valid  [NCORES],
  output logic            cmd_ready  [NCORES],
  input  core_cmd_t       cmd        [NCORES],
  output logic [1:0]      done_valid [NCORES],
  output logic [EV_W-1:0] done_ev    [NCORES][2],
  output logic            d_req_valid,
  input  logic            d_req_ready,
  output mem_req_t        d_req,
  input  logic            d_rsp_valid,
  output logic            d_rsp_ready,
  input  mem_rsp_t        d_rsp,
  output logic            lo_valid,
  input  logic            lo_ready,
  output link_msg_t       lo_msg,
  input  logic            li_valid,
  output logic            li_ready,
  input  link_msg_t       li_msg,
  output logic [NCORES-1:0] fault,
  output logic [31:0]     tlb_hits,
  output logic [31:0]     tlb_misses,
  output logic [31:0]     page_faults,
  output logic [31:0]     remote_sent,
  output logic [31:0]     remote_served,
  output logic [31:0]     overlap_cycles [NCORES]
);

  logic [NCORES-1:0] c_req_valid, c_req_ready, c_rsp_valid;
  mem_req_t          c_req [NCORES];
  mem_rsp_t          c_rsp;
  logic              m_req_valid, m_req_ready, m_rsp_valid;
  mem_req_t          m_req;
  mem_rsp_t          m_rsp;

  for (genvar i = 0; i < NCORES; i++) begin : g_core
    accel_core #(.SPM_ROWS(SPM_ROWS), .MM_DIM(MM_DIM)) u_core (
      .clk, .rst_n,
      .cmd_valid(cmd_valid[i]), .cmd_ready(cmd_ready[i]), .cmd(cmd[i]),
      .done_valid(done_valid[i]), .done_ev(done_ev[i]),
      .mreq_valid(c_req_valid[i]), .mreq_ready(c_req_ready[i]), .mreq(c_req[i]),
      .mrsp_valid(c_rsp_valid[i]), .mrsp(c_rsp),
      .fault(fault[i]), .overlap_cycles(overlap_cycles[i])
    );
  end

  mmu #(.NCORES(NCORES), .TLB_ENTRIES(TLB_ENTRIES)) u_mmu (
    .clk, .rst_n, .pt_base, .tlb_flush,
    .c_req_valid, .c_req_ready, .c_req, .c_rsp_valid, .c_rsp,
    .m_req_valid, .m_req_ready, .m_req, .m_rsp_valid, .m_rsp,
    .tlb_hits, .tlb_misses, .faults(page_faults)
  );

  mem_ctrl u_mc (
    .clk, .rst_n,
    .u_req_valid(m_req_valid), .u_req_ready(m_req_ready), .u_req(m_req),
    .u_rsp_valid(m_rsp_valid), .u_rsp(m_rsp),
    .d_req_valid, .d_req_ready, .d_req, .d_rsp_valid, .d_rsp_ready, .d_rsp,
    .lo_valid, .lo_ready, .lo_msg, .li_valid, .li_ready, .li_msg,
    .remote_sent, .remote_served
  );

endmodule

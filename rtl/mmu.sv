// mmu: address translation for the cores of one accelerator chip.
//
// The cores issue row requests with logical addresses. The MMU picks one
// (round robin), looks its page up in the TLB and, on a miss, walks the flat
// page table with a single memory read: the 8-byte entry of page VPN sits at
// pt_base + 8*VPN in the chip's own memory. A valid entry is written into the
// TLB and the request continues with the physical address {PPN, offset} and
// the entry's remote flag, which tells the memory controller to reach the page
// over the interconnect (direct access to the other chip's memory without a
// copy). An invalid entry is a page fault: the core gets a response with err
// set and the fault counter advances. The paper gives the per-chip MMU, the
// 2048-entry TLB, the flat table with one access per miss, 2 MB pages and the
// host-driven TLB invalidation; the PTE layout, the remote flag, round-robin
// arbitration, one request in flight and the fault response are this design's
// choices. The 300 ns TLB miss latency of the paper is not a parameter: it is
// the time of the page-table read in the memory behind this block.
//
// Interface: per core c_req_valid/ready/c_req (mem_req_t with a logical
// address in addr; remote ignored) and c_rsp_valid/c_rsp (no back-pressure).
// Toward memory m_req_valid/ready/m_req and m_rsp_valid/m_rsp, in order.
// Timing: a TLB hit issues the memory request 2 cycles after acceptance
// (arbitrate, translate); a miss adds the page-table read.
module mmu
  import h2m2_pkg::*;
#(
  parameter int NCORES      = 4,
  parameter int TLB_ENTRIES = 2048,
  localparam int CW         = $clog2(NCORES)
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic [PA_W-1:0]   pt_base,
  input  logic              tlb_flush,
  input  logic [NCORES-1:0] c_req_valid,
  output logic [NCORES-1:0] c_req_ready,
  input  mem_req_t          c_req [NCORES],
  output logic [NCORES-1:0] c_rsp_valid,
  output mem_rsp_t          c_rsp,
  output logic              m_req_valid,
  input  logic              m_req_ready,
  output mem_req_t          m_req,
  input  logic              m_rsp_valid,
  input  mem_rsp_t          m_rsp,
  output logic [31:0]       tlb_hits,
  output logic [31:0]       tlb_misses,
  output logic [31:0]       faults
);

  typedef enum logic [2:0] { S_IDLE, S_XLATE, S_PTW_REQ, S_PTW_WAIT, S_SEND, S_WAIT } state_e;
  state_e state;

  mem_req_t       cur;
  logic [CW-1:0]  src, rr;
  logic [PA_W-1:0] pa;
  logic           pa_remote;

  wire [VPN_W-1:0] vpn = cur.addr[VA_W-1:PAGE_OFS_W];

  logic             lk_hit, lk_remote;
  logic [PPN_W-1:0] lk_ppn;
  logic             fill;
  logic [63:0]      pte;

  tlb #(.ENTRIES(TLB_ENTRIES)) u_tlb (
    .clk, .rst_n,
    .lk_vpn(vpn), .lk_hit, .lk_ppn, .lk_remote,
    .fill, .fill_vpn(vpn), .fill_ppn(pte[PPN_W-1:0]), .fill_remote(pte[PTE_REM]),
    .flush(tlb_flush)
  );

  // the entry inside the returned row
  assign pte  = m_rsp.rdata[int'(vpn[$clog2(PTE_PER_ROW)-1:0]) * 64 +: 64];
  assign fill = (state == S_PTW_WAIT) && m_rsp_valid && pte[PTE_V];

  // round-robin choice
  logic [CW-1:0] pick;
  logic          any;
  always_comb begin
    pick = rr; any = 1'b0;
    for (int k = 0; k < NCORES; k++) begin
      logic [CW-1:0] c;
      c = CW'(int'(rr) + k);
      if (!any && c_req_valid[c]) begin pick = c; any = 1'b1; end
    end
  end

  always_comb begin
    c_req_ready = '0;
    if (state == S_IDLE && any) c_req_ready[pick] = 1'b1;
  end

  always_comb begin
    m_req_valid = 1'b0;
    m_req       = cur;
    if (state == S_PTW_REQ) begin
      m_req_valid  = 1'b1;
      m_req.we     = 1'b0;
      m_req.remote = 1'b0;
      m_req.addr   = pt_base + PA_W'({vpn, 3'b000});
    end else if (state == S_SEND) begin
      m_req_valid  = 1'b1;
      m_req.addr   = pa;
      m_req.remote = pa_remote;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE; cur <= '0; src <= '0; rr <= '0; pa <= '0; pa_remote <= 1'b0;
      c_rsp_valid <= '0; c_rsp <= '0;
      tlb_hits <= '0; tlb_misses <= '0; faults <= '0;
    end else begin
      c_rsp_valid <= '0;
      unique case (state)
        S_IDLE: if (any) begin
          cur <= c_req[pick]; src <= pick; rr <= pick + 1'b1; state <= S_XLATE;
        end
        S_XLATE: if (lk_hit) begin
          tlb_hits  <= tlb_hits + 1;
          pa        <= {lk_ppn, cur.addr[PAGE_OFS_W-1:0]};
          pa_remote <= lk_remote;
          state     <= S_SEND;
        end else begin
          tlb_misses <= tlb_misses + 1;
          state      <= S_PTW_REQ;
        end
        S_PTW_REQ: if (m_req_ready) state <= S_PTW_WAIT;
        S_PTW_WAIT: if (m_rsp_valid) begin
          if (pte[PTE_V]) begin
            pa        <= {pte[PPN_W-1:0], cur.addr[PAGE_OFS_W-1:0]};
            pa_remote <= pte[PTE_REM];
            state     <= S_SEND;
          end else begin
            faults           <= faults + 1;
            c_rsp_valid[src] <= 1'b1;
            c_rsp            <= '{err: 1'b1, rdata: '0};
            state            <= S_IDLE;
          end
        end
        S_SEND: if (m_req_ready) state <= S_WAIT;
        S_WAIT: if (m_rsp_valid) begin
          c_rsp_valid[src] <= 1'b1;
          c_rsp            <= m_rsp;
          state            <= S_IDLE;
        end
        default: state <= S_IDLE;
      endcase
    end
  end

endmodule

// tb_mmu: self-checking test of the MMU with a behavioural memory.
// A flat page table in memory maps logical page 0 to local physical page 5,
// page 1 to remote page 9 and leaves page 2 invalid. Four requesters issue
// reads and writes; the test checks the physical addresses and data, the
// remote flag, TLB miss then hit, the page-walk read at pt_base + 8*VPN, the
// page fault, the effect of a TLB flush, and the 2-cycle hit path.
// Timing: checks the 2-cycle hit path; a watchdog bounds the run. The
// single-access flat-table walk follows the paper; the PTE layout is this
// design's own.
module tb_mmu;
  import h2m2_pkg::*;
  localparam int NC = 4;
  localparam logic [PA_W-1:0] PTB = 40'h00_4000_0000;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic [NC-1:0] c_req_valid, c_req_ready, c_rsp_valid;
  mem_req_t c_req [NC];
  mem_rsp_t c_rsp;
  logic m_req_valid, m_req_ready, m_rsp_valid, tlb_flush;
  mem_req_t m_req;
  mem_rsp_t m_rsp;
  logic [31:0] tlb_hits, tlb_misses, faults;

  mmu #(.NCORES(NC), .TLB_ENTRIES(2048)) dut (.clk, .rst_n, .pt_base(PTB), .tlb_flush,
    .c_req_valid, .c_req_ready, .c_req, .c_rsp_valid, .c_rsp,
    .m_req_valid, .m_req_ready, .m_req, .m_rsp_valid, .m_rsp, .tlb_hits, .tlb_misses, .faults);

  logic rsp_ready = 1'b1;
  dram_model #(.LAT(5)) mem (.clk, .rst_n, .req_valid(m_req_valid), .req_ready(m_req_ready), .req(m_req),
    .rsp_valid(m_rsp_valid), .rsp_ready(rsp_ready), .rsp(m_rsp));

  int checks = 0, failures = 0;
  task automatic expect_(bit c, string what);
    checks++; if (!c) begin failures++; $display("FAIL: %s", what); end
  endtask

  function automatic row_t pat(logic [PA_W-1:0] a);
    return {16{a[39:0], 24'h5a5a5a}};
  endfunction

  // record the memory requests seen
  logic [PA_W-1:0] last_addr; logic last_remote; longint last_req_t;
  always @(posedge clk) if (m_req_valid && m_req_ready) begin
    last_addr = m_req.addr; last_remote = m_req.remote; last_req_t = $time;
  end

  task automatic access(int c, bit we, logic [VA_W-1:0] va, row_t wd, output mem_rsp_t r, output longint acc_t);
    @(negedge clk);
    c_req_valid[c] = 1; c_req[c] = '{we: we, remote: 1'b0, addr: PA_W'(va), wdata: wd};
    do @(posedge clk); while (!c_req_ready[c]);
    acc_t = $time;
    #1 c_req_valid[c] = 0;
    do @(posedge clk); while (!c_rsp_valid[c]);
    r = c_rsp;
  endtask

  initial begin
    #200000; failures++; $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    mem_rsp_t r; longint t;
    logic [PA_W-1:0] pa;
    c_req_valid = '0; tlb_flush = 0;
    for (int c = 0; c < NC; c++) c_req[c] = '0;
    mem.set_pte(PTB, 0, 1, 0, 5);
    mem.set_pte(PTB, 1, 1, 1, 9);
    mem.set_pte(PTB, 2, 0, 0, 0);
    for (int k = 0; k < 4; k++) begin
      mem.poke({19'd5, 21'h0} + PA_W'(k * 128), pat({19'd5, 21'h0} + PA_W'(k * 128)));
    end
    repeat (3) @(posedge clk); rst_n = 1;

    // first access to page 0: miss, walk, then data
    access(0, 0, 40'h0_0000_0080, '0, r, t);
    expect_(tlb_misses == 1 && tlb_hits == 0, "first access misses");
    expect_(r.rdata == pat({19'd5, 21'h80}) && !r.err, "translated read data");
    expect_(last_addr == {19'd5, 21'h80} && !last_remote, "physical address of page 0");
    // second access, other core: hit; request 2 cycles after acceptance
    access(2, 0, 40'h0_0000_0100, '0, r, t);
    expect_(tlb_hits == 1 && tlb_misses == 1, "second access hits");
    expect_((last_req_t - t) / 10 == 2, "hit path takes 2 cycles");
    expect_(r.rdata == pat({19'd5, 21'h100}), "hit read data");
    // write through page 0
    access(1, 1, 40'h0_0000_0180, {32{32'hcafe_0001}}, r, t);
    expect_(mem.peek({19'd5, 21'h180}) == {32{32'hcafe_0001}}, "write reaches physical row");
    // remote page 1
    access(3, 0, 40'h0_0020_0040, '0, r, t);
    expect_(last_remote && last_addr == {19'd9, 21'h40}, "remote page flagged and translated");
    // invalid page 2: fault
    access(0, 0, 40'h0_0040_0000, '0, r, t);
    expect_(r.err && faults == 1, "page fault reported");
    // all four at once: all served
    begin
      int served = 0;
      @(negedge clk);
      for (int c = 0; c < NC; c++) begin
        c_req_valid[c] = 1; c_req[c] = '{we: 1'b0, remote: 1'b0, addr: PA_W'(c * 128), wdata: '0};
      end
      while (served < NC) begin
        @(posedge clk);
        for (int c = 0; c < NC; c++) if (c_req_ready[c]) #0 c_req_valid[c] = 0;
        for (int c = 0; c < NC; c++) if (c_rsp_valid[c]) begin
          served++; expect_(c_rsp.rdata == mem.peek({19'd5, 21'h0} + PA_W'(c * 128)), "arbitrated read data");
        end
      end
    end
    // flush: next access misses again
    @(negedge clk); tlb_flush = 1; @(negedge clk); tlb_flush = 0;
    begin
      int m0;
      m0 = int'(tlb_misses);
      access(0, 0, 40'h0_0000_0000, '0, r, t);
      expect_(int'(tlb_misses) == m0 + 1, "miss after flush");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

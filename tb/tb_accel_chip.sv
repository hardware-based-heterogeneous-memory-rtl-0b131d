// tb_accel_chip: self-checking test of one accelerator chip (four cores, MMU,
// memory controller) at reduced size: 8x8 systolic arrays, 256-row
// scratchpad buffers and a 16-entry TLB so that set conflicts are easy to
// provoke. The chip's DRAM is a fixed-latency row model; the other chip is
// stood in for by a second memory controller with its own DRAM, wired
// straight to the link ports. Page tables are written into the local DRAM by
// the testbench, as the host driver would.
// Checked: local loads/stores move the right rows; rows of a remote page are
// read from and written to the far memory; TLB misses and hits are counted
// exactly (first touch, conflict eviction, flush); an unmapped page raises the
// core's fault flag; four cores issuing at once all complete with correct
// data (MMU arbitration).
// Timing: 32/45-cycle memories; a watchdog ends the run after 3 ms.
// The four-core chip with one MMU and a flat page table follows the paper;
// the TLB size is reduced here only to make conflicts easy to reach.
module tb_accel_chip;
  import h2m2_pkg::*;
  localparam int D = 8, SR = 256, TE = 16;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic [PA_W-1:0] pt_base;
  logic            tlb_flush;
  logic            cmd_valid [4], cmd_ready [4];
  core_cmd_t       cmd [4];
  logic [1:0]      done_valid [4];
  logic [EV_W-1:0] done_ev [4][2];
  logic            d_req_valid, d_req_ready, d_rsp_valid, d_rsp_ready;
  mem_req_t        d_req;
  mem_rsp_t        d_rsp;
  logic            lo_valid, lo_ready, li_valid, li_ready;
  link_msg_t       lo_msg, li_msg;
  logic [3:0]      fault;
  logic [31:0]     tlb_hits, tlb_misses, page_faults, remote_sent, remote_served;
  logic [31:0]     overlap_cycles [4];

  accel_chip #(.SPM_ROWS(SR), .MM_DIM(D), .TLB_ENTRIES(TE)) dut (.*);
  dram_model #(.LAT(32)) mem (.clk, .rst_n, .req_valid(d_req_valid), .req_ready(d_req_ready), .req(d_req),
                              .rsp_valid(d_rsp_valid), .rsp_ready(d_rsp_ready), .rsp(d_rsp));

  // far side: memory controller + DRAM of the other chip
  logic     f_req_valid, f_req_ready, f_rsp_valid, f_rsp_ready, f_u_ready, f_u_rsp_valid;
  mem_req_t f_req;
  mem_rsp_t f_rsp, f_u_rsp;
  logic [31:0] f_sent, f_served;
  mem_ctrl u_far (.clk, .rst_n, .u_req_valid(1'b0), .u_req_ready(f_u_ready), .u_req('0),
                  .u_rsp_valid(f_u_rsp_valid), .u_rsp(f_u_rsp),
                  .d_req_valid(f_req_valid), .d_req_ready(f_req_ready), .d_req(f_req),
                  .d_rsp_valid(f_rsp_valid), .d_rsp_ready(f_rsp_ready), .d_rsp(f_rsp),
                  .lo_valid(li_valid), .lo_ready(li_ready), .lo_msg(li_msg),
                  .li_valid(lo_valid), .li_ready(lo_ready), .li_msg(lo_msg),
                  .remote_sent(f_sent), .remote_served(f_served));
  dram_model #(.LAT(45)) far (.clk, .rst_n, .req_valid(f_req_valid), .req_ready(f_req_ready), .req(f_req),
                              .rsp_valid(f_rsp_valid), .rsp_ready(f_rsp_ready), .rsp(f_rsp));

  int checks = 0, failures = 0;
  task automatic expect_(bit c, string what);
    checks++; if (!c) begin failures++; $display("FAIL: %s", what); end
  endtask

  localparam logic [PA_W-1:0] PTB = 40'h0_4000_0000;
  function automatic logic [VA_W-1:0] va(int vp, int row);
    return VA_W'(vp) * VA_W'(1 << PAGE_OFS_W) + VA_W'(row * ROW_BYTES);
  endfunction
  function automatic logic [PA_W-1:0] pa(int pp, int row);
    return PA_W'(pp) * PA_W'(1 << PAGE_OFS_W) + PA_W'(row * ROW_BYTES);
  endfunction
  function automatic row_t rnd_row();
    row_t r;
    for (int i = 0; i < ROW_W / 32; i++) r[i*32 +: 32] = $urandom;
    return r;
  endfunction

  // issue one command and wait for its completion pulse
  task automatic run(int c, op_e op, logic [VA_W-1:0] v, int a, int d, int len);
    int port;
    port = (op == OP_LOAD || op == OP_STORE) ? 0 : 1;
    @(negedge clk);
    cmd[c] = '0; cmd[c].op = op; cmd[c].vaddr = v; cmd[c].a = SPM_AW'(a); cmd[c].d = SPM_AW'(d);
    cmd[c].len = LEN_W'(len); cmd_valid[c] = 1;
    do @(posedge clk); while (!cmd_ready[c]);
    #1 cmd_valid[c] = 0;
    do @(posedge clk); while (!done_valid[c][port]);
  endtask

  // copy len rows through the DMA-side scratchpad bank: LOAD from page vs,
  // STORE to page vd (both use the bank the compute side is not using)
  task automatic copy(int c, int vs, int rs, int vd, int rd, int len);
    run(c, OP_LOAD, va(vs, rs), 0, 0, len);
    run(c, OP_STORE, va(vd, rd), 0, 0, len);
  endtask

  row_t src [4][8];
  initial begin #3000000; failures++; $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end

  initial begin
    int m0, h0, f0;
    pt_base = PTB; tlb_flush = 0;
    for (int c = 0; c < 4; c++) begin cmd_valid[c] = 0; cmd[c] = '0; end
    for (int r = 0; r < 8; r++) begin
      src[0][r] = rnd_row(); mem.poke(pa(3, r), src[0][r]);     // vpn 0  -> local ppn 3
      src[1][r] = rnd_row(); far.poke(pa(7, r), src[1][r]);     // vpn 2  -> remote ppn 7
      src[2][r] = rnd_row(); mem.poke(pa(9, r), src[2][r]);     // vpn 16 -> local ppn 9 (TLB set 0)
    end
    mem.set_pte(PTB, 0, 1, 0, 3);  mem.set_pte(PTB, 1, 1, 0, 5);
    mem.set_pte(PTB, 2, 1, 1, 7);  mem.set_pte(PTB, 3, 0, 0, 0);
    mem.set_pte(PTB, 16, 1, 0, 9);
    repeat (3) @(posedge clk); rst_n = 1;

    // local copy: one walk per page, hits after that
    copy(0, 0, 0, 1, 0, 4);
    for (int r = 0; r < 4; r++) expect_(mem.peek(pa(5, r)) == src[0][r], $sformatf("local copy row %0d", r));
    expect_(tlb_misses == 2 && tlb_hits == 6, $sformatf("TLB counts after local copy: %0d miss %0d hit", tlb_misses, tlb_hits));
    expect_(remote_sent == 0, "no remote traffic for local pages");

    // remote read: far page into local page
    copy(1, 2, 0, 1, 8, 4);
    for (int r = 0; r < 4; r++) expect_(mem.peek(pa(5, 8 + r)) == src[1][r], $sformatf("remote read row %0d", r));
    expect_(remote_sent == 4 && f_served == 4, "four remote reads served by the far side");
    expect_(tlb_misses == 3 && tlb_hits == 13, "remote page walked once");

    // remote write: local page into far page
    copy(2, 0, 4, 2, 16, 4);
    for (int r = 0; r < 4; r++) expect_(far.peek(pa(7, 16 + r)) == src[0][4 + r], $sformatf("remote write row %0d", r));
    expect_(remote_sent == 8, "four remote writes");

    // conflict: vpn 16 evicts vpn 0 in the 16-entry TLB
    m0 = int'(tlb_misses);
    copy(0, 16, 0, 1, 24, 2);
    copy(0, 0, 0, 1, 28, 1);
    expect_(int'(tlb_misses) == m0 + 2, "conflict eviction re-walks vpn 0");
    for (int r = 0; r < 2; r++) expect_(mem.peek(pa(5, 24 + r)) == src[2][r], "conflicting page data");
    expect_(mem.peek(pa(5, 28)) == src[0][0], "vpn 0 data after eviction");

    // flush, remap vpn 1 to ppn 6, copy again: goes to the new frame
    mem.set_pte(PTB, 1, 1, 0, 6);
    @(negedge clk); tlb_flush = 1; @(negedge clk); tlb_flush = 0;
    m0 = int'(tlb_misses);
    copy(3, 0, 0, 1, 0, 2);
    expect_(int'(tlb_misses) == m0 + 2, "every page walked again after flush");
    expect_(mem.peek(pa(6, 0)) == src[0][0] && mem.peek(pa(6, 1)) == src[0][1], "remapped page written");

    // page fault
    f0 = int'(page_faults);
    expect_(fault == 4'b0, "no fault yet");
    run(3, OP_LOAD, va(3, 0), 0, 0, 1);
    expect_(fault == 4'b1000 && int'(page_faults) == f0 + 1, "unmapped page faults core 3 only");

    // four cores at once: each copies 8 rows of a shared source to its own slot
    h0 = int'(tlb_hits);
    fork
      copy(0, 0, 0, 1, 64, 8);
      copy(1, 2, 0, 1, 80, 8);
      copy(2, 16, 0, 1, 96, 8);
      begin run(3, OP_NOP, '0, 0, 0, 0); copy(3, 0, 0, 1, 112, 8); end
    join
    for (int r = 0; r < 8; r++) begin
      expect_(mem.peek(pa(6, 64 + r)) == src[0][r], $sformatf("parallel core0 row %0d", r));
      expect_(mem.peek(pa(6, 80 + r)) == src[1][r], $sformatf("parallel core1 row %0d", r));
      expect_(mem.peek(pa(6, 96 + r)) == src[2][r], $sformatf("parallel core2 row %0d", r));
      expect_(mem.peek(pa(6, 112 + r)) == src[0][r], $sformatf("parallel core3 row %0d", r));
    end
    expect_(int'(tlb_hits) > h0, "hits under concurrent traffic");
    $display("misses=%0d hits=%0d faults=%0d remote=%0d", tlb_misses, tlb_hits, page_faults, remote_sent);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

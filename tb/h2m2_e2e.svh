// Shared body of the end-to-end board tests (included inside a testbench
// module that declares localparam D = systolic array size and instantiates
// h2m2_top as "dut" with the signals declared here).
//
// Workload: one head-aware mapped slice of a decoder layer, with the host
// driver's work done by the testbench (page tables, data, launches):
//   step 1 (qkv-linear): GEMM T x W on an HBM-side core and an LPDDR-side core
//          (heads split between the sides); the LPDDR core writes its output
//          straight into HBM over the interconnect (remote page);
//   barrier: step-2 kernels wait on the events of both step-1 kernels;
//   step 2 (attention scores): GEMV K x q on each side, each with its own
//          KV-cache page; the LPDDR side reads its q from HBM remotely;
//          meanwhile the HBM core preloads its next tile (double buffering);
//   page fault: a kernel reads a logical page that has no mapping;
//   remap: an HBM core copies the LPDDR KV page into a free HBM frame over
//          the interconnect, the driver rewrites the HBM side's page table
//          and flushes its TLB; step 3 recomputes the LPDDR
//          scores on an HBM core from the migrated (now local) page.
// Every result is compared with a reference computed here, and each
// mechanism (TLB miss, TLB hit, remote access, barrier hold, buffer overlap,
// page fault, TLB flush + remap) must have happened at least once.

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic            launch_valid, launch_ready;
  kernel_t         launch;
  logic [NEV-1:0]  ev_clear, events;
  logic [PA_W-1:0] pt_base [2];
  logic            tlb_flush [2];
  logic            d_req_valid [2], d_req_ready [2], d_rsp_valid [2], d_rsp_ready [2];
  mem_req_t        d_req [2];
  mem_rsp_t        d_rsp [2];
  logic [3:0]      fault [2];
  logic [31:0]     tlb_hits [2], tlb_misses [2], page_faults [2], remote_sent [2], remote_served [2];
  logic [31:0]     overlap_cycles [NCORE_TOT];
  logic [31:0]     dispatched, dep_wait_cycles;
  logic [$clog2(16):0] kernels_pending;   // 16 = default kernel-table size

  // HBM 32 ns and LPDDR 45 ns access latency at 1 GHz
  dram_model #(.LAT(32)) hbm   (.clk, .rst_n, .req_valid(d_req_valid[0]), .req_ready(d_req_ready[0]), .req(d_req[0]),
                                .rsp_valid(d_rsp_valid[0]), .rsp_ready(d_rsp_ready[0]), .rsp(d_rsp[0]));
  dram_model #(.LAT(45)) lpddr (.clk, .rst_n, .req_valid(d_req_valid[1]), .req_ready(d_req_ready[1]), .req(d_req[1]),
                                .rsp_valid(d_rsp_valid[1]), .rsp_ready(d_rsp_ready[1]), .rsp(d_rsp[1]));

  int checks = 0, failures = 0;
  task automatic expect_(bit c, string what);
    checks++; if (!c) begin failures++; $display("FAIL: %s", what); end
  endtask

  localparam int B = 4;          // batch rows of T
  localparam int S = 16;         // cached tokens per KV page
  localparam int SH = 6;
  localparam logic [PA_W-1:0] PTB = 40'h0_8000_0000;   // page tables at 2 GB on both sides
  // logical pages
  localparam int VP_T = 0, VP_WH = 1, VP_WL = 2, VP_KH = 3, VP_KL = 4, VP_O = 5, VP_BAD = 6, VP_MIG = 7;
  function automatic logic [VA_W-1:0] va(int vp, int row);
    return VA_W'(vp) * VA_W'(1 << PAGE_OFS_W) + VA_W'(row * ROW_BYTES);
  endfunction
  function automatic logic [PA_W-1:0] pa(int pp, int row);
    return PA_W'(pp) * PA_W'(1 << PAGE_OFS_W) + PA_W'(row * ROW_BYTES);
  endfunction

  // data
  logic signed [7:0] T  [B][D];
  logic signed [7:0] WH [D][D], WL [D][D];
  logic signed [7:0] KH [S][ROW_BYTES], KL [S][ROW_BYTES];
  logic [7:0] QH [B][D], QL [B][D];

  function automatic row_t row_of_t(int b);
    row_t r; r = '0;
    for (int k = 0; k < D; k++) r[k*8 +: 8] = T[b][k];
    return r;
  endfunction

  // ---------------------------------------------------------------- launches
  int n_launch = 0;
  task automatic k_launch(int core, op_e op, int ev, logic [NEV-1:0] w, logic [VA_W-1:0] vaddr,
                          int a, int b, int d, int len, bit acc = 0);
    @(negedge clk);
    launch_valid = 1;
    launch = '0;
    launch.core = CORE_W'(core); launch.wait_mask = w;
    launch.cmd = '{op: op, vop: VOP_ADD, acc: acc, shift: 5'(SH), vaddr: vaddr, a: SPM_AW'(a), b: SPM_AW'(b),
                   d: SPM_AW'(d), len: LEN_W'(len), ev: EV_W'(ev)};
    do @(posedge clk); while (!launch_ready);
    #1 launch_valid = 0;
    n_launch++;
  endtask

  task automatic wait_events(logic [NEV-1:0] m);
    while ((events & m) != m) @(posedge clk);
  endtask

  // mechanism counters sampled from the design
  int barrier_held = 0;
  always @(posedge clk) if (rst_n && dut.u_sync.has_hd[5] && !dut.u_sync.rdy_hd[5]) barrier_held++;

  initial begin
    #20000000; failures++; $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    logic [NEV-1:0] E1, E2;
    int miss_before, rem_before;
    launch_valid = 0; launch = '0; ev_clear = '0;
    pt_base[0] = PTB; pt_base[1] = PTB; tlb_flush[0] = 0; tlb_flush[1] = 0;

    // ---- data
    for (int b = 0; b < B; b++) for (int k = 0; k < D; k++) T[b][k] = 8'($urandom_range(0, 15) - 8);
    for (int r = 0; r < D; r++) for (int c = 0; c < D; c++) begin
      WH[r][c] = 8'($urandom_range(0, 15) - 8); WL[r][c] = 8'($urandom_range(0, 15) - 8);
    end
    for (int s = 0; s < S; s++) for (int k = 0; k < ROW_BYTES; k++) begin
      KH[s][k] = (k < D) ? 8'($urandom_range(0, 31) - 16) : 8'($urandom);
      KL[s][k] = (k < D) ? 8'($urandom_range(0, 31) - 16) : 8'($urandom);
    end

    // ---- memory images and page tables (the host driver's job)
    // HBM physical pages: 10 T copy, 11 WH, 13 KH, 15 O.  LPDDR: 20 T copy, 22 WL, 24 KL.
    for (int b = 0; b < B; b++) begin hbm.poke(pa(10, b), row_of_t(b)); lpddr.poke(pa(20, b), row_of_t(b)); end
    for (int r = 0; r < D; r++) begin
      row_t wh, wl; wh = '0; wl = '0;
      for (int c = 0; c < D; c++) begin wh[c*8 +: 8] = WH[r][c]; wl[c*8 +: 8] = WL[r][c]; end
      hbm.poke(pa(11, r), wh); lpddr.poke(pa(22, r), wl);
    end
    for (int s = 0; s < S; s++) begin
      row_t kh, kl;
      for (int k = 0; k < ROW_BYTES; k++) begin kh[k*8 +: 8] = KH[s][k]; kl[k*8 +: 8] = KL[s][k]; end
      hbm.poke(pa(13, s), kh); lpddr.poke(pa(24, s), kl);
    end
    // HBM side table
    hbm.set_pte(PTB, VP_T, 1, 0, 10);  hbm.set_pte(PTB, VP_WH, 1, 0, 11);
    hbm.set_pte(PTB, VP_KH, 1, 0, 13); hbm.set_pte(PTB, VP_KL, 1, 1, 24);
    hbm.set_pte(PTB, VP_O, 1, 0, 15);  hbm.set_pte(PTB, VP_BAD, 0, 0, 0);
    // LPDDR side table: T duplicated locally, output page lives in HBM
    lpddr.set_pte(PTB, VP_T, 1, 0, 20);  lpddr.set_pte(PTB, VP_WL, 1, 0, 22);
    lpddr.set_pte(PTB, VP_KL, 1, 0, 24); lpddr.set_pte(PTB, VP_O, 1, 1, 15);

    repeat (3) @(posedge clk); rst_n = 1;

    // ---- step 1: qkv-linear, HBM core 0 and LPDDR core 4. SPM rows: T 0.., W 16.., out 32..
    // events: 1 HBM step-1 done, 2 LPDDR step-1 done
    for (int side = 0; side < 2; side++) begin
      int c;
      c = side * 4;
      k_launch(c, OP_LOAD, 0, '0, va(VP_T, 0), 0, 0, 0, B);
      k_launch(c, OP_LOAD, 0, '0, va(side == 0 ? VP_WH : VP_WL, 0), 0, 0, 16, D);
      k_launch(c, OP_SWAP, 0, '0, '0, 0, 0, 0, 0);
      k_launch(c, OP_MM_W, 0, '0, '0, 0, 16, 0, 0);
      k_launch(c, OP_MM,   0, '0, '0, 0, 0, 32, B);
      k_launch(c, OP_SWAP, 0, '0, '0, 0, 0, 0, 0);
      k_launch(c, OP_STORE, 1 + side, '0, va(VP_O, side * 8), 32, 0, 0, B);
    end
    E1 = (NEV'(1) << 1) | (NEV'(1) << 2);
    // ---- step 2 (after the barrier): attention scores. q row 0 of each side, K page of each side.
    // SPM rows: q 0, K 1..S, scores 40. events 3 HBM, 4 LPDDR
    for (int side = 0; side < 2; side++) begin
      int c;
      c = side * 4 + 1;
      k_launch(c, OP_LOAD, 0, E1, va(VP_O, side * 8), 0, 0, 0, 1);
      k_launch(c, OP_LOAD, 0, '0, va(side == 0 ? VP_KH : VP_KL, 0), 0, 0, 1, S);
      k_launch(c, OP_SWAP, 0, '0, '0, 0, 0, 0, 0);
      k_launch(c, OP_MV,   0, '0, '0, 0, 1, 40, S);
      if (side == 0)   // preload the next tile while the GEMV runs
        k_launch(c, OP_LOAD, 0, '0, va(VP_KH, 0), 0, 0, 100, S);
      k_launch(c, OP_SWAP, 0, '0, '0, 0, 0, 0, 0);
      k_launch(c, OP_STORE, 3 + side, '0, va(VP_O, 16 + side), 40, 0, 0, 1);
    end
    // ---- an HBM core reads the LPDDR KV page directly (remote, cached in the TLB)
    k_launch(2, OP_LOAD, 7, '0, va(VP_KL, 0), 0, 0, 1, S);
    // ---- a kernel touching an unmapped page
    k_launch(3, OP_LOAD, 5, '0, va(VP_BAD, 0), 0, 0, 0, 1);
    E2 = (NEV'(1) << 3) | (NEV'(1) << 4) | (NEV'(1) << 5) | (NEV'(1) << 7);
    wait_events(E2);

    // ---- migration of the LPDDR KV page into HBM page 17 by an HBM core: the
    // driver maps the free frame at a spare logical page, the core copies the
    // page over the interconnect (LOAD remote, STORE local), then the driver
    // points the KV page at the new frame and flushes the HBM side's TLB
    hbm.set_pte(PTB, VP_MIG, 1, 0, 17);
    k_launch(2, OP_LOAD, 0, '0, va(VP_KL, 0), 0, 0, 200, S);
    k_launch(2, OP_STORE, 8, '0, va(VP_MIG, 0), 200, 0, 0, S);
    wait_events(NEV'(1) << 8);
    for (int s = 0; s < S; s++) expect_(hbm.peek(pa(17, s)) == lpddr.peek(pa(24, s)), $sformatf("migrated row %0d", s));
    hbm.set_pte(PTB, VP_KL, 1, 0, 17);
    @(negedge clk); tlb_flush[0] = 1; @(negedge clk); tlb_flush[0] = 0;
    miss_before = int'(tlb_misses[0]);
    rem_before  = int'(remote_sent[0]);
    expect_(rem_before == 2 * S, "HBM side read the LPDDR page remotely (direct access, then migration)");
    // ---- step 3: recompute the LPDDR-side scores on HBM core 2 from the migrated page
    k_launch(2, OP_LOAD, 0, '0, va(VP_O, 8), 0, 0, 0, 1);
    k_launch(2, OP_LOAD, 0, '0, va(VP_KL, 0), 0, 0, 1, S);
    k_launch(2, OP_SWAP, 0, '0, '0, 0, 0, 0, 0);
    k_launch(2, OP_MV,   0, '0, '0, 0, 1, 40, S);
    k_launch(2, OP_SWAP, 0, '0, '0, 0, 0, 0, 0);
    k_launch(2, OP_STORE, 6, '0, va(VP_O, 18), 40, 0, 0, 1);
    wait_events(NEV'(1) << 6);
    repeat (5) @(posedge clk);

    // ---- reference results
    for (int b = 0; b < B; b++) for (int c = 0; c < D; c++) begin
      int sh, sl;
      sh = 0; sl = 0;
      for (int r = 0; r < D; r++) begin sh += int'(T[b][r]) * int'(WH[r][c]); sl += int'(T[b][r]) * int'(WL[r][c]); end
      QH[b][c] = requant(32'(sh), 5'(SH)); QL[b][c] = requant(32'(sl), 5'(SH));
    end
    for (int b = 0; b < B; b++) begin
      row_t gh, gl;
      gh = hbm.peek(pa(15, b)); gl = hbm.peek(pa(15, 8 + b));
      for (int c = 0; c < D; c++) begin
        expect_(gh[c*8 +: 8] == QH[b][c], $sformatf("HBM-side GEMM out %0d,%0d", b, c));
        expect_(gl[c*8 +: 8] == QL[b][c], $sformatf("LPDDR-side GEMM out (written remotely) %0d,%0d", b, c));
      end
    end
    for (int side = 0; side < 3; side++) begin
      row_t g;
      g = hbm.peek(pa(15, 16 + side));
      for (int s = 0; s < S; s++) begin
        int acc;
        acc = 0;
        for (int k = 0; k < D; k++)
          acc += (side == 0) ? int'($signed(QH[0][k])) * int'(KH[s][k]) : int'($signed(QL[0][k])) * int'(KL[s][k]);
        expect_(g[s*8 +: 8] == requant(32'(acc), 5'(SH)), $sformatf("scores step %0d token %0d", side, s));
      end
    end

    // ---- mechanisms
    $display("mechanisms: remote_sent[0] before/after remap %0d/%0d", rem_before, remote_sent[0]);
    $display("mechanisms: tlb_miss=%0d/%0d tlb_hit=%0d/%0d remote_sent=%0d/%0d remote_served=%0d/%0d",
             tlb_misses[0], tlb_misses[1], tlb_hits[0], tlb_hits[1], remote_sent[0], remote_sent[1],
             remote_served[0], remote_served[1]);
    $display("mechanisms: barrier_held_cycles=%0d overlap_core1=%0d page_faults=%0d dispatched=%0d/%0d",
             barrier_held, overlap_cycles[1], page_faults[0], dispatched, n_launch);
    expect_(tlb_misses[0] > 0 && tlb_misses[1] > 0, "TLB misses (page walks) on both sides");
    expect_(tlb_hits[0] > 0 && tlb_hits[1] > 0, "TLB hits on both sides");
    expect_(remote_sent[1] > 0 && remote_served[0] > 0, "LPDDR side reached HBM directly");
    expect_(remote_served[1] == 32'(2 * S), "LPDDR side served the HBM side's direct reads");
    expect_(barrier_held > 0 && dep_wait_cycles > 0, "step-2 kernels held at the barrier");
    expect_(overlap_cycles[1] > 0, "DMA overlapped compute (double buffering)");
    expect_(page_faults[0] == 1 && fault[0][3], "page fault on the unmapped page");
    expect_(int'(tlb_misses[0]) > miss_before, "TLB refilled after the flush");
    expect_(int'(remote_sent[0]) == rem_before, "after the remap the migrated page is read locally");
    expect_(dispatched == 32'(n_launch), "every launched kernel dispatched");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

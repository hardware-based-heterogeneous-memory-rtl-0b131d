// tb_accel_core: self-checking test of one accelerator core (reduced sizes:
// 8x8 systolic array, 256-row SPM buffers) with a behavioural memory.
// The program loads operands into the DMA buffer, swaps buffers, runs every
// compute operation (systolic GEMM with and without K-tile accumulation,
// GEMV, the four vector operations, lookup-table activation, row sums) while
// a second load runs in the other buffer, swaps again and stores all results.
// The stored rows are compared with reference results computed here; the
// GEMM command's cycle count (len + 2*MM_DIM + 2 from acceptance to done) and
// the DMA/compute overlap are checked too.
// Timing: the GEMM cycle count (len + 2*MM_DIM + 2) is checked; a
// watchdog bounds the run. The unit types and double buffering follow the
// paper; the command set under test is this design's own.
module tb_accel_core;
  import h2m2_pkg::*;
  localparam int D = 8, SR = 256;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic cmd_valid, cmd_ready, mreq_valid, mreq_ready, mrsp_valid, fault;
  core_cmd_t cmd;
  logic [1:0] done_valid;
  logic [EV_W-1:0] done_ev [2];
  mem_req_t mreq;
  mem_rsp_t mrsp;
  logic [31:0] overlap_cycles;

  accel_core #(.SPM_ROWS(SR), .MM_DIM(D), .MM_ACC(16), .MV_LANES(32)) dut (.*);
  logic rsp_ready = 1'b1;
  dram_model #(.LAT(6)) mem (.clk, .rst_n, .req_valid(mreq_valid), .req_ready(mreq_ready), .req(mreq),
    .rsp_valid(mrsp_valid), .rsp_ready(rsp_ready), .rsp(mrsp));

  int checks = 0, failures = 0;
  task automatic expect_(bit c, string what);
    checks++; if (!c) begin failures++; $display("FAIL: %s", what); end
  endtask

  // SPM layout (rows)
  localparam int RW = 0, RA = 8, NA = 12, RA2 = 20, RX = 30, RM = 32, NM = 40;
  localparam int RVA = 80, RVB = 84, RL = 90, RS = 92;
  localparam int OMM = 100, OMV = 120, OVEC = 124, OACT = 130, OSUM = 140, OMM2 = 150;
  localparam int SH = 4;
  localparam logic [VA_W-1:0] OUT_BASE = 40'h1_0000;

  row_t img [100];
  logic [EV_W-1:0] done_seen [$];
  always @(posedge clk) if (rst_n) begin
    if (done_valid[0]) done_seen.push_back(done_ev[0]);
    if (done_valid[1]) done_seen.push_back(done_ev[1]);
  end

  longint acc_t;
  task automatic issue(op_e op, int a, int b, int d, int len, int ev, logic [VA_W-1:0] va = '0,
                       vop_e vop = VOP_ADD, bit acc = 0);
    @(negedge clk);
    cmd_valid = 1;
    cmd = '{op: op, vop: vop, acc: acc, shift: 5'(SH), vaddr: va, a: SPM_AW'(a), b: SPM_AW'(b),
            d: SPM_AW'(d), len: LEN_W'(len), ev: EV_W'(ev)};
    do @(posedge clk); while (!cmd_ready);
    acc_t = $time;
    #1 cmd_valid = 0;
  endtask
  task automatic wait_ev(int ev);
    while (1) begin
      @(posedge clk); #1;
      foreach (done_seen[i]) if (done_seen[i] == EV_W'(ev)) begin done_seen.delete(i); return; end
    end
  endtask

  function automatic logic signed [7:0] b8(int row, int k);
    return $signed(img[row][k*8 +: 8]);
  endfunction
  function automatic logic [7:0] rq(int v);
    return requant(32'(v), 5'(SH));
  endfunction

  initial begin
    #2000000; failures++; $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    longint mm_t;
    cmd_valid = 0; cmd = '0;
    for (int r = 0; r < 100; r++) begin
      for (int k = 0; k < 32; k++) img[r][k*32 +: 32] = $urandom;
      mem.poke(PA_W'(r * 128), img[r]);
    end
    for (int k = 0; k < 128; k++) begin           // lookup table: y = 3 - x
      img[RL + k / 128][(k % 128)*8 +: 8] = 8'(3 - k);
    end
    for (int k = 0; k < 128; k++) img[RL + 1][k*8 +: 8] = 8'(3 - (128 + k));
    mem.poke(PA_W'(RL * 128), img[RL]); mem.poke(PA_W'((RL + 1) * 128), img[RL + 1]);
    repeat (3) @(posedge clk); rst_n = 1;

    issue(OP_LOAD, 0, 0, 0, 100, 1, 40'h0);   wait_ev(1);
    issue(OP_SWAP, 0, 0, 0, 0, 2);             wait_ev(2);
    // second load into the other buffer, overlapping the compute below
    issue(OP_LOAD, 0, 0, 0, 40, 3, 40'h2_0000);
    issue(OP_MM_W, 0, RW, 0, 0, 4);            wait_ev(4);
    issue(OP_MM, RA, 0, OMM, NA, 5);           mm_t = acc_t; wait_ev(5);
    expect_(($time - 1 - mm_t) / 10 == NA + 2 * D + 2, $sformatf("GEMM cycles %0d", ($time - 1 - mm_t) / 10));
    // second K tile accumulated onto the first: weights from rows RW+1.., acts RA2..
    issue(OP_MM, RA, 0, OMM2, 4, 6);           wait_ev(6);
    issue(OP_MM_W, 0, RW + 1, 0, 0, 7);        wait_ev(7);
    issue(OP_MM, RA2, 0, OMM2, 4, 8, '0, VOP_ADD, 1); wait_ev(8);
    issue(OP_MV, RX, RM, OMV, NM, 9);          wait_ev(9);
    for (int v = 0; v < 4; v++) begin
      issue(OP_VEC, RVA + v, RVB + v, OVEC + v, 1, 10 + v, '0, vop_e'(v)); wait_ev(10 + v);
    end
    issue(OP_SFU_LUT, RL, 0, 0, 2, 14);        wait_ev(14);
    issue(OP_SFU_ACT, RS, 0, OACT, 4, 15);     wait_ev(15);
    issue(OP_SFU_SUM, RS, 0, OSUM, 4, 16);     wait_ev(16);
    wait_ev(3);
    expect_(overlap_cycles > 0, "DMA and compute overlapped");
    issue(OP_SWAP, 0, 0, 0, 0, 17);            wait_ev(17);
    issue(OP_STORE, OMM, 0, 0, 60, 18, OUT_BASE); wait_ev(18);
    expect_(!fault, "no fault");

    // ---- reference checks on the stored rows
    for (int n = 0; n < NA; n++) begin
      row_t got; got = mem.peek(PA_W'(OUT_BASE) + PA_W'((n) * 128));
      for (int c = 0; c < D; c++) begin
        int s; s = 0;
        for (int r = 0; r < D; r++) s += int'(b8(RA + n, r)) * int'(b8(RW + D - 1 - (D - 1 - r), c));
        expect_(got[c*8 +: 8] == rq(s), $sformatf("GEMM out %0d col %0d", n, c));
      end
    end
    for (int n = 0; n < 4; n++) begin
      row_t got; got = mem.peek(PA_W'(OUT_BASE) + PA_W'((OMM2 - OMM + n) * 128));
      for (int c = 0; c < D; c++) begin
        int s; s = 0;
        for (int r = 0; r < D; r++) s += int'(b8(RA + n, r)) * int'(b8(RW + r, c))
                                      + int'(b8(RA2 + n, r)) * int'(b8(RW + 1 + r, c));
        expect_(got[c*8 +: 8] == rq(s), $sformatf("accumulated GEMM out %0d col %0d", n, c));
      end
    end
    begin
      row_t got; got = mem.peek(PA_W'(OUT_BASE) + PA_W'((OMV - OMM) * 128));
      for (int n = 0; n < NM; n++) begin
        int s; s = 0;
        for (int k = 0; k < 128; k++) s += int'(b8(RX, k)) * int'(b8(RM + n, k));
        expect_(got[n*8 +: 8] == rq(s), $sformatf("GEMV out %0d", n));
      end
    end
    for (int v = 0; v < 4; v++) begin
      row_t got; got = mem.peek(PA_W'(OUT_BASE) + PA_W'((OVEC - OMM + v) * 128));
      for (int k = 0; k < 128; k++) begin
        int x, z, r;
        x = int'(b8(RVA + v, k)); z = int'(b8(RVB + v, k));
        case (v)
          0: r = x + z;
          1: r = x - z;
          2: r = (x * z) >>> SH;
          default: r = (z == 0) ? ((x < 0) ? -128 : 127) : x / z;
        endcase
        expect_(got[k*8 +: 8] == sat8(32'(r)), $sformatf("vector op %0d lane %0d: %0d %0d -> %0d", v, k, x, z, $signed(got[k*8 +: 8])));
      end
    end
    for (int n = 0; n < 4; n++) begin
      row_t got; got = mem.peek(PA_W'(OUT_BASE) + PA_W'((OACT - OMM + n) * 128));
      for (int k = 0; k < 128; k++)
        expect_(got[k*8 +: 8] == 8'(3 - int'(img[RS + n][k*8 +: 8])), $sformatf("lookup activation %0d %0d: in %0d got %0d", n, k, img[RS + n][k*8 +: 8], got[k*8 +: 8]));
    end
    begin
      row_t got; got = mem.peek(PA_W'(OUT_BASE) + PA_W'((OSUM - OMM) * 128));
      for (int n = 0; n < 4; n++) begin
        int s; s = 0;
        for (int k = 0; k < 128; k++) s += int'(b8(RS + n, k));
        expect_($signed(got[n*32 +: 32]) == s, "row sum");
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

// tb_sync_ctrl: self-checking test of the kernel synchronisation controller.
// The testbench plays the eight cores (accepting a command, finishing it a
// few cycles later and reporting its event) and the host. It launches a
// two-step head-aware layer: step-1 kernels on both chips, then step-2 kernels
// that wait on all step-1 events (a barrier), plus back-to-back kernels on
// one core. It checks that no kernel starts before the events it waits for,
// that kernels of one core start in launch order, that every kernel runs
// once (kernel 17 has no dependency but still follows kernel 9 on core 0), that the table back-pressures launches when full, and event clear.
// Interface: none; prints TB_RESULT and has a watchdog. Event-style
// dependencies follow the paper; in-order dispatch per core is this design's
// own choice.
module tb_sync_ctrl;
  import h2m2_pkg::*;
  localparam int SLOTS = 16;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic launch_valid, launch_ready;
  kernel_t launch;
  logic [NEV-1:0] ev_clear, events;
  logic disp_valid [NCORE_TOT], disp_ready [NCORE_TOT];
  core_cmd_t disp_cmd [NCORE_TOT];
  logic [1:0] done_valid [NCORE_TOT];
  logic [EV_W-1:0] done_ev [NCORE_TOT][2];
  logic [31:0] dispatched, dep_wait_cycles;
  logic [$clog2(SLOTS):0] pending;

  sync_ctrl #(.SLOTS(SLOTS)) dut (.*);

  int checks = 0, failures = 0;
  task automatic expect_(bit c, string what);
    checks++; if (!c) begin failures++; $display("FAIL: %s", what); end
  endtask

  // kernel bookkeeping, indexed by the event each kernel records
  logic [NEV-1:0] wait_of [NEV];
  int             core_of [NEV];
  int             started [NEV];
  logic [NEV-1:0] done_set;
  int             order_seen [NCORE_TOT][$];
  bit             hold = 1;   // cores refuse work while the table is filled

  // core models: accept, run 3..9 cycles, report done on channel 1
  for (genvar c = 0; c < NCORE_TOT; c++) begin : g_core
    int busy = 0;
    logic [EV_W-1:0] ev;
    always @(negedge clk) disp_ready[c] <= (busy == 0) && !hold;
    always @(posedge clk) begin
      done_valid[c] <= 2'b00;
      done_ev[c][0] <= '0;
      if (busy > 0) begin
        busy <= busy - 1;
        if (busy == 1) begin
          done_valid[c] <= 2'b10; done_ev[c][1] <= ev; done_set[ev] = 1'b1;
        end
      end else if (rst_n && disp_valid[c] && disp_ready[c]) begin
        ev <= disp_cmd[c].ev;
        busy <= $urandom_range(3, 9);
        started[disp_cmd[c].ev]++;
        order_seen[c].push_back(int'(disp_cmd[c].ev));
        checks++;
        if ((wait_of[disp_cmd[c].ev] & ~done_set) != '0) begin
          failures++; $display("kernel %0d started before its events", disp_cmd[c].ev);
        end
        checks++;
        if (core_of[disp_cmd[c].ev] != c) begin failures++; $display("wrong core"); end
      end
    end
  end

  task automatic do_launch(int core, int ev, logic [NEV-1:0] w);
    @(negedge clk);
    launch_valid = 1;
    launch = '0; launch.core = CORE_W'(core); launch.wait_mask = w;
    launch.cmd.op = OP_MM; launch.cmd.ev = EV_W'(ev);
    wait_of[ev] = w; core_of[ev] = core;
    do @(posedge clk); while (!launch_ready);
    #1 launch_valid = 0;
  endtask

  initial begin
    #300000; failures++; $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    logic [NEV-1:0] step1;
    launch_valid = 0; launch = '0; ev_clear = '0; done_set = '0;
    for (int e = 0; e < NEV; e++) begin started[e] = 0; wait_of[e] = '0; core_of[e] = -1; end
    repeat (3) @(posedge clk); rst_n = 1;
    // step 1: fused heads on all 8 cores, events 1..8
    step1 = '0;
    for (int c = 0; c < 8; c++) step1[c + 1] = 1'b1;
    for (int c = 0; c < 8; c++) do_launch(c, 1 + c, '0);
    // step 2 after a barrier on all step-1 events, events 9..16
    for (int c = 0; c < 8; c++) do_launch(c, 9 + c, step1);
    // table is now full: a further launch must wait until a slot frees
    @(negedge clk);
    expect_(!launch_ready, "launch_ready low with a full table");
    fork
      do_launch(0, 17, '0);     // third kernel of core 0, no dependency
      begin repeat (5) @(negedge clk); hold = 0; end
    join
    wait (done_set[17] && (done_set[16:9] == 8'hff));
    repeat (3) @(posedge clk);
    for (int e = 1; e <= 17; e++) expect_(started[e] == 1, $sformatf("kernel %0d ran once", e));
    expect_(dispatched == 17, "dispatch count");
    expect_(dep_wait_cycles > 0, "kernels were held on dependencies");
    // core 0 runs its kernels in launch order: 1, 9 (after the barrier), 17
    expect_(order_seen[0].size() == 3 && order_seen[0][0] == 1 && order_seen[0][1] == 9 && order_seen[0][2] == 17,
            "launch order on core 0");
    expect_(events[17:1] == '1, "events recorded");
    @(negedge clk); ev_clear = '1; @(negedge clk); ev_clear = '0;
    expect_(events == '0, "events cleared");
    expect_(pending == 0, "table empty");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

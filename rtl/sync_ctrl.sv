// sync_ctrl: hardware kernel synchronisation controller.
//
// The host driver launches all kernels of an iteration up front, each with the
// core that runs it, a mask of events it waits for and the event it records
// when it completes (cmd.ev). A launched kernel is held in a table of SLOTS
// entries, out of the scheduling pool, until every event in its wait mask has
// been recorded; then it is dispatched to its core. Kernels of one core are
// dispatched in launch order (the oldest pending kernel of a core is the only
// candidate, like a CUDA stream), kernels of different cores independently.
// A barrier between the HBM-side and LPDDR-side kernels of one step is simply
// the next step's kernels waiting on the events of all of this step's kernels.
// The paper gives the mechanism (event-like, dependencies registered at
// launch, kernels reintroduced when their prerequisites complete); the table
// size, the event vector, per-core launch order and the counters are this
// design's choices.
//
// Interface: launch_valid/ready/launch (kernel_t); per core
// disp_valid/ready/disp_cmd; per core two completion inputs (DMA engine and
// compute engine) done_valid/done_ev; ev_clear clears events (for the next
// iteration; a completion in the same cycle wins). Timing: a kernel whose
// events are all set is offered to its core in the cycle after it was
// launched or after its last event was recorded.
module sync_ctrl
  import h2m2_pkg::*;
#(
  parameter int SLOTS = 16
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             launch_valid,
  output logic             launch_ready,
  input  kernel_t          launch,
  input  logic [NEV-1:0]   ev_clear,
  output logic [NEV-1:0]   events,
  output logic             disp_valid [NCORE_TOT],
  input  logic             disp_ready [NCORE_TOT],
  output core_cmd_t        disp_cmd   [NCORE_TOT],
  input  logic [1:0]       done_valid [NCORE_TOT],
  input  logic [EV_W-1:0]  done_ev    [NCORE_TOT][2],
  output logic [31:0]      dispatched,
  output logic [31:0]      dep_wait_cycles,
  output logic [$clog2(SLOTS):0] pending
);

  localparam int SW = $clog2(SLOTS);

  logic [SLOTS-1:0] sv;
  kernel_t          sk   [SLOTS];
  logic [31:0]      sseq [SLOTS];
  logic [31:0]      seq;

  // free slot for a launch
  logic [SW-1:0] free_i;
  logic          has_free;
  always_comb begin
    free_i = '0; has_free = 1'b0;
    for (int s = SLOTS-1; s >= 0; s--)
      if (!sv[s]) begin free_i = SW'(s); has_free = 1'b1; end
  end
  assign launch_ready = has_free;

  // oldest pending kernel of each core
  logic [SW-1:0] head   [NCORE_TOT];
  logic          has_hd [NCORE_TOT];
  logic          rdy_hd [NCORE_TOT];
  always_comb begin
    for (int c = 0; c < NCORE_TOT; c++) begin
      head[c] = '0; has_hd[c] = 1'b0;
      for (int s = 0; s < SLOTS; s++) begin
        if (sv[s] && (int'(sk[s].core) == c) && (!has_hd[c] || (sseq[s] < sseq[head[c]]))) begin
          head[c] = SW'(s); has_hd[c] = 1'b1;
        end
      end
      rdy_hd[c]     = has_hd[c] && ((sk[head[c]].wait_mask & ~events) == '0);
      disp_valid[c] = rdy_hd[c];
      disp_cmd[c]   = sk[head[c]].cmd;
    end
  end

  logic [NEV-1:0] ev_set;
  always_comb begin
    ev_set = '0;
    for (int c = 0; c < NCORE_TOT; c++)
      for (int k = 0; k < 2; k++)
        if (done_valid[c][k]) ev_set[done_ev[c][k]] = 1'b1;
  end

  always_comb begin
    pending = '0;
    for (int s = 0; s < SLOTS; s++) pending += ($clog2(SLOTS)+1)'(sv[s]);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      sv <= '0; seq <= '0; events <= '0; dispatched <= '0; dep_wait_cycles <= '0;
    end else begin
      events <= (events & ~ev_clear) | ev_set;
      for (int c = 0; c < NCORE_TOT; c++) begin
        if (rdy_hd[c] && disp_ready[c]) begin
          sv[head[c]] <= 1'b0;
        end
      end
      dispatched <= dispatched + 32'(count_disp());
      if (any_dep_wait()) dep_wait_cycles <= dep_wait_cycles + 1;
      if (launch_valid && has_free) begin
        sv[free_i]   <= 1'b1;
        seq          <= seq + 1;
      end
    end
  end

  always_ff @(posedge clk) begin
    if (launch_valid && has_free) begin
      sk[free_i]   <= launch;
      sseq[free_i] <= seq;
    end
  end

  function automatic int count_disp();
    int n = 0;
    for (int c = 0; c < NCORE_TOT; c++) if (rdy_hd[c] && disp_ready[c]) n++;
    return n;
  endfunction

  function automatic logic any_dep_wait();
    logic w = 1'b0;
    for (int c = 0; c < NCORE_TOT; c++) if (has_hd[c] && !rdy_hd[c]) w = 1'b1;
    return w;
  endfunction

endmodule

// tb_h2m2_top: end-to-end test of the board at reduced size (8x8 systolic
// arrays, 512-row scratchpad buffers); see h2m2_e2e.svh for the workload.
// Interface and timing as in h2m2_e2e.svh (HBM 32 and LPDDR 45 cycle
// memories, 20 ms watchdog).
module tb_h2m2_top;
  import h2m2_pkg::*;
  localparam int D = 8;
  h2m2_top #(.SPM_ROWS(512), .MM_DIM(D)) dut (.*);
  `include "h2m2_e2e.svh"
endmodule

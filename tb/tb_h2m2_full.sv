// tb_h2m2_full: the end-to-end test of h2m2_e2e.svh on the board at its
// default size (128x128 systolic arrays, 32-wide MV units, two 16 MB
// scratchpad buffers per core, 2048-entry TLBs, 16-slot kernel table).
// Interface and timing as in h2m2_e2e.svh; about a minute of simulation.
module tb_h2m2_full;
  import h2m2_pkg::*;
  localparam int D = 128;
  h2m2_top dut (.*);
  `include "h2m2_e2e.svh"
endmodule

// spm: double-buffered on-chip scratchpad of one accelerator core.
//
// Two banks of BANK_ROWS rows. At any time one bank is the compute buffer,
// read and written by the core's units, and the other is the DMA buffer,
// filled from or drained to memory; swap exchanges the roles, so loading the
// next tile overlaps computing on the current one. The paper gives the double
// buffering and 16 MB x 2 per core (131072 rows of 128 B each); the port set
// (compute: two read ports and one write port, DMA: one read/write port),
// synchronous reads and bank 0 being the compute bank after reset are this
// design's choices.
//
// Timing: reads return data the cycle after the request. swap takes effect for
// accesses in the following cycle; the caller must not swap while accesses
// are in flight.
module spm
  import h2m2_pkg::*;
#(
  parameter int BANK_ROWS = 131072,
  localparam int AW       = $clog2(BANK_ROWS)
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          swap,
  output logic          sel,        // index of the current compute bank
  // compute side
  input  logic          c_re0,
  input  logic [AW-1:0] c_raddr0,
  output row_t          c_rdata0,
  input  logic          c_re1,
  input  logic [AW-1:0] c_raddr1,
  output row_t          c_rdata1,
  input  logic          c_we,
  input  logic [AW-1:0] c_waddr,
  input  row_t          c_wdata,
  // DMA side
  input  logic          d_re,
  input  logic          d_we,
  input  logic [AW-1:0] d_addr,
  input  row_t          d_wdata,
  output row_t          d_rdata
);

  row_t bank0 [BANK_ROWS];
  row_t bank1 [BANK_ROWS];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)    sel <= 1'b0;
    else if (swap) sel <= ~sel;
  end

  always_ff @(posedge clk) begin
    if (c_we) begin
      if (!sel) bank0[c_waddr] <= c_wdata;
      else      bank1[c_waddr] <= c_wdata;
    end
    if (d_we) begin
      if (!sel) bank1[d_addr] <= d_wdata;
      else      bank0[d_addr] <= d_wdata;
    end
    if (c_re0) c_rdata0 <= sel ? bank1[c_raddr0] : bank0[c_raddr0];
    if (c_re1) c_rdata1 <= sel ? bank1[c_raddr1] : bank0[c_raddr1];
    if (d_re)  d_rdata  <= sel ? bank0[d_addr]   : bank1[d_addr];
  end

endmodule

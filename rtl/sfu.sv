// sfu: special function unit with a lookup table and an adder tree.
//
// Lookup mode: each of the LANES INT8 inputs indexes a 256-entry INT8 table,
// giving LANES lookups per cycle; loaded with a piecewise table of an
// activation function (GELU, exponent, ...), it evaluates that function.
// Reduce mode: an adder tree of LANES inputs sums the row into one 32-bit
// value (for softmax denominators and normalisation statistics).
// The paper gives 128 lookups per cycle and a 128-adder tree; the table depth,
// its indexing by the raw INT8 code and the table being written by software
// (the paper does not say which functions it holds) are this design's choices.
//
// Interface / timing:
//   * lut_we writes LANES entries at once: entries lut_half*LANES + i get byte
//     i of lut_wdata. Two writes fill the 256-entry table when LANES = 128.
//   * in_valid with mode (0 lookup, 1 reduce) and x; one cycle later
//     out_valid with y (lookup results) and sum (row sum), registered.
//     Table entry k answers input code k read as an unsigned byte.
module sfu #(
  parameter int LANES     = 128,
  parameter int LUT_DEPTH = 256
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic               lut_we,
  input  logic               lut_half,
  input  logic [LANES*8-1:0] lut_wdata,
  input  logic               in_valid,
  input  logic               mode,
  input  logic [LANES*8-1:0] x,
  output logic               out_valid,
  output logic [LANES*8-1:0] y,
  output logic [31:0]        sum
);

  logic [7:0] lut [LUT_DEPTH];
  logic signed [31:0] tree;

  always_comb begin
    tree = '0;
    for (int i = 0; i < LANES; i++) tree += 32'($signed(x[i*8 +: 8]));
  end

  always_ff @(posedge clk) begin
    if (lut_we)
      for (int i = 0; i < LANES; i++)
        lut[($clog2(LUT_DEPTH))'(int'(lut_half) * LANES + i)] <= lut_wdata[i*8 +: 8];
    if (in_valid) begin
      if (mode) sum <= tree;
      else
        for (int i = 0; i < LANES; i++) y[i*8 +: 8] <= lut[x[i*8 +: 8]];
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) out_valid <= 1'b0;
    else        out_valid <= in_valid;
  end

endmodule

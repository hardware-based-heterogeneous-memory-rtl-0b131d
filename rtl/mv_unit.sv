// mv_unit: matrix-vector (GEMV) unit.
//
// LANES independent dot-product lanes, each WIDTH INT8 multipliers followed by
// an adder tree, and a final adder whose other input is either zero or the
// lane's previous result (accumulation across vectors longer than WIDTH).
// The paper gives 32 lanes of 128 elements, the dot-product algorithm, the
// per-lane operand buffers, the multiplier/adder-tree structure and the final
// adder with a multiplexed feedback; how rows reach the lanes is this design's
// choice: one matrix row per cycle, written into the buffer of lane
// (r_idx mod LANES), with the vector operand x held in a shared register.
//
// Interface / timing:
//   * x_valid loads x_vec (may coincide with the first row).
//   * r_valid loads r_row for output index r_idx. A group of LANES rows fires
//     when its last lane (r_idx mod LANES = LANES-1) is loaded or on r_last.
//   * The fire cycle computes all LANES dot products (registered); the next
//     cycle adds them to (r_acc) or stores them in the OUTS-entry accumulator
//     array, and the cycle after that presents o_valid with the INT32 results
//     in o_sums and the index of lane 0 in o_base. o_valid is high 3 cycles
//     after the cycle in which the group's last row was presented.
//   OUTS must be a multiple of LANES.
//   Lanes above the last loaded one in a partial group carry stale data.
module mv_unit #(
  parameter int LANES = 32,
  parameter int WIDTH = 128,
  parameter int OUTS  = 128,
  localparam int IW   = $clog2(OUTS)
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 x_valid,
  input  logic [WIDTH*8-1:0]   x_vec,
  input  logic                 r_valid,
  input  logic [WIDTH*8-1:0]   r_row,
  input  logic [IW-1:0]        r_idx,
  input  logic                 r_acc,
  input  logic                 r_last,
  output logic                 o_valid,
  output logic [LANES*32-1:0]  o_sums,
  output logic [IW-1:0]        o_base
);

  localparam int LW = $clog2(LANES);

  logic signed [7:0]  x   [WIDTH];
  logic signed [7:0]  rb  [LANES][WIDTH];   // lane operand buffers
  logic signed [31:0] dot [LANES];
  logic signed [31:0] dot_r [LANES];
  logic signed [31:0] accv [OUTS];

  logic          fire, fire_acc, s2_v, s2_acc;
  logic [IW-1:0] fire_base, s2_base;

  always_ff @(posedge clk) begin
    if (x_valid)
      for (int k = 0; k < WIDTH; k++) x[k] <= $signed(x_vec[k*8 +: 8]);
    if (r_valid)
      for (int k = 0; k < WIDTH; k++) rb[LW'(r_idx)][k] <= $signed(r_row[k*8 +: 8]);
  end

  // fire control
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      fire <= 1'b0; fire_acc <= 1'b0; fire_base <= '0;
      s2_v <= 1'b0; s2_acc <= 1'b0; s2_base <= '0;
    end else begin
      fire      <= r_valid && (r_last || (LW'(r_idx) == LW'(LANES-1)));
      fire_acc  <= r_acc;
      fire_base <= r_idx & ~IW'(LANES-1);
      s2_v      <= fire;
      s2_acc    <= fire_acc;
      s2_base   <= fire_base;
    end
  end

  // multipliers + adder tree of every lane (balanced tree left to synthesis)
  always_comb begin
    for (int l = 0; l < LANES; l++) begin
      dot[l] = '0;
      for (int k = 0; k < WIDTH; k++) dot[l] += 32'(x[k]) * 32'(rb[l][k]);
    end
  end

  always_ff @(posedge clk) begin
    if (fire) dot_r <= dot;
    if (s2_v)
      for (int l = 0; l < LANES; l++)
        accv[s2_base + IW'(l)] <= (s2_acc ? accv[s2_base + IW'(l)] : 32'sd0) + dot_r[l];
  end

  // outputs: the accumulator values written in the previous cycle
  logic          o_v_r;
  logic [IW-1:0] o_base_r;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin o_v_r <= 1'b0; o_base_r <= '0; end
    else begin o_v_r <= s2_v; o_base_r <= s2_base; end
  end
  assign o_valid = o_v_r;
  assign o_base  = o_base_r;
  always_comb
    for (int l = 0; l < LANES; l++) o_sums[l*32 +: 32] = accv[o_base_r + IW'(l)];

endmodule

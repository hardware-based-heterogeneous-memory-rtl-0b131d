// mm_unit: weight-stationary systolic array for GEMM (matrix-matrix unit).
//
// ROWS x COLS processing elements each hold one INT8 weight. PE(r,c) multiplies
// the activation element r travelling right along row r by its weight and adds
// the partial sum arriving from PE(r-1,c); the sum leaves the bottom of column c
// as element c of the output vector, out = sum_r a[r] * W[r][c].
// Following the paper, the array is 128x128 and weight-stationary, with buffers
// feeding the weights from the top and the activations from the left, and a
// buffer with an adder and a multiplexer under every column. Here the left
// buffers are skew registers (row r delayed r cycles) and the bottom buffers
// are per-column accumulation buffers of ACC_DEPTH entries: a result either
// replaces an entry or is added to it (a_acc), so K > ROWS is handled by
// running successive K tiles with the same indices. Skew depths, buffer depth
// and the accumulate control are this design's choices.
//
// Interface / timing:
//   * Weights: w_valid shifts w_row into PE row 0 and every row down by one.
//     After ROWS pushes the first row pushed sits in PE row ROWS-1, so the
//     weight row for activation element k is pushed (ROWS-1-k)-th.
//     Do not push weights while activations are in flight.
//   * Activations: one vector per cycle on a_valid with its index a_idx and
//     accumulate flag a_acc. Column c writes its buffer at the end of cycle
//     t+ROWS+c for a vector presented in cycle t.
//   * Output: o_valid/o_vec/o_idx appear ROWS+COLS cycles after the input,
//     carrying the (accumulated) INT32 values of entry o_idx for all columns.
//     Throughput: one vector per cycle.
//   Precondition: an index must not be reused by a vector issued fewer than
//   COLS cycles after the previous use (the core drains between K tiles).
module mm_unit #(
  parameter int ROWS      = 128,
  parameter int COLS      = 128,
  parameter int ACC_DEPTH = 128,
  localparam int IW       = $clog2(ACC_DEPTH)
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic                  w_valid,
  input  logic [COLS*8-1:0]     w_row,
  input  logic                  a_valid,
  input  logic [ROWS*8-1:0]     a_vec,
  input  logic [IW-1:0]         a_idx,
  input  logic                  a_acc,
  output logic                  o_valid,
  output logic [COLS*32-1:0]    o_vec,
  output logic [IW-1:0]         o_idx
);

  localparam int PL = ROWS + COLS;   // length of the control pipeline

  typedef struct packed {
    logic          v;
    logic          acc;
    logic [IW-1:0] idx;
  } ctl_t;

  logic signed [7:0]  w    [ROWS][COLS];   // stationary weights
  logic signed [7:0]  act  [ROWS][COLS];   // activation registers (move right)
  logic signed [31:0] ps   [ROWS][COLS];   // partial-sum registers (move down)
  logic signed [7:0]  sk   [ROWS][ROWS];   // input skew: row r uses sk[r][r-1]
  logic signed [31:0] accb [COLS][ACC_DEPTH];
  ctl_t               ctl0;
  ctl_t               ctl  [1:PL];
  logic signed [7:0]  a_in [ROWS];

  // Skewed activation seen by column 0 of row r.
  always_comb begin
    for (int r = 0; r < ROWS; r++)
      a_in[r] = (r == 0) ? $signed(a_vec[7:0]) : sk[r][r-1];
  end

  always_ff @(posedge clk) begin
    if (w_valid) begin
      for (int c = 0; c < COLS; c++) begin
        w[0][c] <= $signed(w_row[c*8 +: 8]);
        for (int r = 1; r < ROWS; r++) w[r][c] <= w[r-1][c];
      end
    end
    // skew shift registers: sk[r][0] takes a_vec[r], then moves along
    for (int r = 1; r < ROWS; r++) begin
      sk[r][0] <= $signed(a_vec[r*8 +: 8]);
      for (int k = 1; k < r; k++) sk[r][k] <= sk[r][k-1];
    end
    // the array
    for (int r = 0; r < ROWS; r++) begin
      for (int c = 0; c < COLS; c++) begin
        logic signed [7:0]  ain;
        logic signed [31:0] pin;
        ain = (c == 0) ? a_in[r] : act[r][c-1];
        pin = (r == 0) ? 32'sd0  : ps[r-1][c];
        act[r][c] <= ain;
        ps[r][c]  <= pin + 32'(ain) * 32'(w[r][c]);
      end
    end
    // per-column accumulation buffers: column c's sum for a vector leaves the
    // array when that vector's control word reaches stage ROWS+c
    for (int c = 0; c < COLS; c++) begin
      if (ctl[ROWS+c].v)
        accb[c][ctl[ROWS+c].idx] <= (ctl[ROWS+c].acc ? accb[c][ctl[ROWS+c].idx] : 32'sd0)
                                    + ps[ROWS-1][c];
    end
  end

  // control pipeline: ctl0 is this cycle's input, ctl[k] is the control of the vector issued k cycles ago
  always_comb ctl0 = '{v: a_valid, acc: a_acc, idx: a_idx};
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int k = 1; k <= PL; k++) ctl[k] <= '0;
    end else begin
      ctl[1] <= ctl0;
      for (int k = 2; k <= PL; k++) ctl[k] <= ctl[k-1];
    end
  end

  assign o_valid = ctl[PL].v;
  assign o_idx   = ctl[PL].idx;
  always_comb begin
    for (int c = 0; c < COLS; c++) o_vec[c*32 +: 32] = accb[c][ctl[PL].idx];
  end

endmodule

// vector_unit: 128-lane element-wise INT8 ALU (add, subtract, multiply, divide).
//
// Used for residual connections and the arithmetic of layer normalisation.
// The paper gives a 1D array of 128 ADD/SUB/MUL/DIV lanes; the saturating INT8
// result, the right shift applied to products and the divide-by-zero result
// are this design's choices.
//
// Interface / timing: in_valid with op, a, b and shift; one cycle later
// out_valid and y (registered). One row per cycle.
//   ADD/SUB: y = sat8(a +/- b)
//   MUL:     y = sat8((a * b) >>> shift)
//   DIV:     y = sat8(a / b), truncating toward zero; b = 0 gives +127 for
//            a >= 0 and -128 for a < 0.
module vector_unit
  import h2m2_pkg::*;
#(
  parameter int LANES = 128
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic               in_valid,
  input  vop_e               op,
  input  logic [LANES*8-1:0] a,
  input  logic [LANES*8-1:0] b,
  input  logic [4:0]         shift,
  output logic               out_valid,
  output logic [LANES*8-1:0] y
);

  logic [LANES*8-1:0] y_n;

  always_comb begin
    for (int i = 0; i < LANES; i++) begin
      logic signed [31:0] ai, bi, r;
      ai = 32'($signed(a[i*8 +: 8]));
      bi = 32'($signed(b[i*8 +: 8]));
      unique case (op)
        VOP_ADD: r = ai + bi;
        VOP_SUB: r = ai - bi;
        VOP_MUL: r = (ai * bi) >>> shift;
        VOP_DIV: r = (bi == 0) ? ((ai < 0) ? -32'sd128 : 32'sd127) : ai / bi;
        default: r = '0;
      endcase
      y_n[i*8 +: 8] = sat8(r);
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) out_valid <= 1'b0;
    else        out_valid <= in_valid;
  end
  always_ff @(posedge clk) if (in_valid) y <= y_n;

endmodule

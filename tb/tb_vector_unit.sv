// tb_vector_unit: self-checking test of the 128-lane element-wise ALU.
// Random operand rows for each operation (plus forced extremes: zero divisors,
// -128/-1, saturating sums); every lane is compared with a reference computed
// here, and the one-cycle latency is checked.
// Timing: one-cycle latency is checked; a watchdog bounds the run. The
// four operations follow the paper; saturation and divide-by-zero results
// are this design's own.
module tb_vector_unit;
  import h2m2_pkg::*;
  localparam int L = 128;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic in_valid, out_valid;
  vop_e op;
  logic [L*8-1:0] a, b, y;
  logic [4:0] shift;

  vector_unit #(.LANES(L)) dut (.*);

  int checks = 0, failures = 0;

  function automatic logic [7:0] ref_op(vop_e o, logic signed [7:0] x, logic signed [7:0] z, int sh);
    int r;
    case (o)
      VOP_ADD: r = int'(x) + int'(z);
      VOP_SUB: r = int'(x) - int'(z);
      VOP_MUL: r = (int'(x) * int'(z)) >>> sh;
      default: r = (z == 0) ? ((x < 0) ? -128 : 127) : int'(x) / int'(z);
    endcase
    if (r > 127) r = 127;
    if (r < -128) r = -128;
    return 8'(r);
  endfunction

  initial begin
    #100000; failures++; $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    in_valid = 0; op = VOP_ADD; a = '0; b = '0; shift = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < 40; t++) begin
      vop_e o;
      int sh;
      o  = vop_e'(t % 4);
      sh = $urandom_range(0, 7);
      @(negedge clk);
      in_valid = 1; op = o; shift = 5'(sh);
      for (int i = 0; i < L; i++) begin
        a[i*8 +: 8] = 8'($urandom);
        b[i*8 +: 8] = (i % 17 == 0) ? 8'd0 : 8'($urandom);
      end
      a[7:0] = 8'h80; b[15:8] = 8'hff; a[15:8] = 8'h80;   // -128 / -1 in lane 1
      @(posedge clk);
      #1;
      checks++;
      if (!out_valid) begin failures++; $display("out_valid missing"); end
      for (int i = 0; i < L; i++) begin
        checks++;
        if (y[i*8 +: 8] !== ref_op(o, a[i*8 +: 8], b[i*8 +: 8], sh)) begin
          failures++;
          $display("op %0d lane %0d: %0d %0d -> %0d", o, i, $signed(a[i*8 +: 8]), $signed(b[i*8 +: 8]), $signed(y[i*8 +: 8]));
        end
      end
    end
    @(negedge clk); in_valid = 0;
    @(posedge clk); #1;
    checks++; if (out_valid) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

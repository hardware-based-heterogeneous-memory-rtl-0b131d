// tb_sfu: self-checking test of the special function unit.
// Writes a lookup table holding a clipped ReLU-like function (two writes of
// 128 entries), looks up random rows and checks every lane; then reduces
// random rows with the adder tree and checks the sums. One-cycle latency.
// Interface: none; prints TB_RESULT and has a watchdog. 128 lookups per
// cycle and the 128-input adder tree follow the paper; the table contents
// are this test's own.
module tb_sfu;
  localparam int L = 128;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic lut_we, lut_half, in_valid, mode, out_valid;
  logic [L*8-1:0] lut_wdata, x, y;
  logic [31:0] sum;

  sfu #(.LANES(L)) dut (.*);

  int checks = 0, failures = 0;
  logic [7:0] table_ [256];

  initial begin
    #100000; failures++; $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    lut_we = 0; lut_half = 0; in_valid = 0; mode = 0; lut_wdata = '0; x = '0;
    for (int k = 0; k < 256; k++) table_[k] = 8'((k * 37 + 11) ^ (k >> 3));   // arbitrary contents
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int h = 0; h < 2; h++) begin
      @(negedge clk);
      lut_we = 1; lut_half = h[0];
      for (int i = 0; i < L; i++) lut_wdata[i*8 +: 8] = table_[h*L + i];
    end
    @(negedge clk); lut_we = 0;
    for (int t = 0; t < 20; t++) begin
      int s;
      @(negedge clk);
      in_valid = 1; mode = t[0];
      s = 0;
      for (int i = 0; i < L; i++) begin
        x[i*8 +: 8] = 8'($urandom);
        s += int'($signed(x[i*8 +: 8]));
      end
      @(posedge clk); #1;
      checks++; if (!out_valid) failures++;
      if (mode) begin
        checks++;
        if ($signed(sum) != s) begin failures++; $display("sum %0d vs %0d", $signed(sum), s); end
      end else begin
        for (int i = 0; i < L; i++) begin
          checks++;
          if (y[i*8 +: 8] !== table_[x[i*8 +: 8]]) begin failures++; $display("lut lane %0d", i); end
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

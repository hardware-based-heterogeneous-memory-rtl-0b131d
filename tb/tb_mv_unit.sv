// tb_mv_unit: self-checking test of the matrix-vector unit.
// Streams a random vector and matrix (rows = outputs, two full lane groups and
// a partial one) and checks every lane result against dot products computed
// here; then repeats with accumulation on. Checks the 3-cycle latency from a
// group's last row to o_valid.
// Interface: none; prints TB_RESULT and has a watchdog. Lane count and
// width are reduced here; the dot-product organisation follows the paper.
module tb_mv_unit;
  localparam int L = 32, W = 128, O = 128, NR = 80;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic x_valid, r_valid, r_acc, r_last, o_valid;
  logic [W*8-1:0] x_vec, r_row;
  logic [6:0] r_idx, o_base;
  logic [L*32-1:0] o_sums;

  mv_unit #(.LANES(L), .WIDTH(W), .OUTS(O)) dut (.*);

  int checks = 0, failures = 0, groups = 0;
  logic signed [7:0] X [2][W];
  logic signed [7:0] M [2][NR][W];
  int pass = 0;
  longint last_t;

  function automatic int dotp(int p, int n);
    int s = 0;
    for (int k = 0; k < W; k++) s += int'(X[p][k]) * int'(M[p][n][k]);
    return s;
  endfunction

  always @(posedge clk) if (rst_n && o_valid) begin
    groups++;
    for (int l = 0; l < L; l++) begin
      int n, e;
      n = int'(o_base) + l;
      if (n < NR) begin
        e = dotp(pass, n) + ((pass == 1) ? dotp(0, n) : 0);
        checks++;
        if ($signed(o_sums[l*32 +: 32]) != e) begin
          failures++; $display("pass %0d out %0d: %0d vs %0d", pass, n, $signed(o_sums[l*32 +: 32]), e);
        end
      end
    end
    checks++;
    if (($time - last_t) / 10 != 3) begin
      failures++; $display("latency %0d", ($time - last_t) / 10);
    end
  end

  initial begin
    #500000; failures++; $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    x_valid = 0; r_valid = 0; r_acc = 0; r_last = 0; x_vec = '0; r_row = '0; r_idx = '0;
    for (int p = 0; p < 2; p++) begin
      for (int k = 0; k < W; k++) X[p][k] = 8'($urandom);
      for (int n = 0; n < NR; n++) for (int k = 0; k < W; k++) M[p][n][k] = 8'($urandom);
    end
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int p = 0; p < 2; p++) begin
      pass = p;
      @(negedge clk);
      for (int n = 0; n < NR; n++) begin
        x_valid = (n == 0);
        for (int k = 0; k < W; k++) x_vec[k*8 +: 8] = X[p][k];
        r_valid = 1; r_idx = 7'(n); r_acc = (p == 1); r_last = (n == NR - 1);
        for (int k = 0; k < W; k++) r_row[k*8 +: 8] = M[p][n][k];
        if ((n % L) == L - 1 || n == NR - 1) last_t = $time + 5;
        @(negedge clk);
        if ((n % L) == L - 1) begin    // leave the group time to leave the pipe
          r_valid = 0; x_valid = 0; repeat (4) @(negedge clk);
        end
      end
      r_valid = 0; x_valid = 0;
      repeat (6) @(negedge clk);
    end
    checks++; if (groups != 6) begin failures++; $display("groups %0d", groups); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

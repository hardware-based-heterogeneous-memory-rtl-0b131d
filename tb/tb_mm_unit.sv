// tb_mm_unit: self-checking test of the systolic matrix-matrix unit.
// Loads a random weight tile, streams random activation vectors back to back,
// checks every output vector against a reference matrix product computed here,
// checks the ROWS+COLS cycle latency, then runs a second K tile with
// accumulation and checks the accumulated sums.
// Timing: checks the ROWS+COLS result latency and one vector per cycle; a
// watchdog bounds the run. The weight-stationary array follows the paper; the
// array is reduced to 8x6 here to keep the run short.
module tb_mm_unit;
  localparam int R = 8, C = 6, D = 16, N = 10;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic w_valid, a_valid, a_acc, o_valid;
  logic [C*8-1:0] w_row;
  logic [R*8-1:0] a_vec;
  logic [3:0] a_idx, o_idx;
  logic [C*32-1:0] o_vec;

  mm_unit #(.ROWS(R), .COLS(C), .ACC_DEPTH(D)) dut (.*);

  int checks = 0, failures = 0;
  logic signed [7:0] W [2][R][C];
  logic signed [7:0] A [2][N][R];
  longint issue_t [N];
  int got = 0;

  function automatic int ref_out(int t, int n, int c, bit acc);
    int s = 0;
    for (int r = 0; r < R; r++) s += int'(A[t][n][r]) * int'(W[t][r][c]);
    if (acc) s += ref_out(0, n, c, 0);
    return s;
  endfunction

  int tile = 0;
  always @(posedge clk) if (rst_n && o_valid) begin
    for (int c = 0; c < C; c++) begin
      checks++;
      if ($signed(o_vec[c*32 +: 32]) != ref_out(tile, int'(o_idx), c, tile == 1)) begin
        failures++;
        $display("mismatch tile %0d idx %0d col %0d: %0d vs %0d", tile, o_idx, c,
                 $signed(o_vec[c*32 +: 32]), ref_out(tile, int'(o_idx), c, tile == 1));
      end
    end
    checks++;
    // output sampled at a rising edge PL cycles after the edge that took the input
    if (($time - issue_t[o_idx]) / 10 != R + C) begin
      failures++; $display("latency %0d, expected %0d", ($time - issue_t[o_idx]) / 10, R + C);
    end
    got++;
  end

  initial begin
    #200000; failures++; $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    w_valid = 0; a_valid = 0; a_acc = 0; w_row = '0; a_vec = '0; a_idx = '0;
    for (int t = 0; t < 2; t++) begin
      for (int r = 0; r < R; r++) for (int c = 0; c < C; c++) W[t][r][c] = 8'($urandom);
      for (int n = 0; n < N; n++) for (int r = 0; r < R; r++) A[t][n][r] = 8'($urandom);
    end
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < 2; t++) begin
      tile = t;
      @(negedge clk);
      for (int k = 0; k < R; k++) begin      // row R-1-k pushed k-th
        w_valid = 1;
        for (int c = 0; c < C; c++) w_row[c*8 +: 8] = W[t][R-1-k][c];
        @(negedge clk);
      end
      w_valid = 0;
      for (int n = 0; n < N; n++) begin
        a_valid = 1; a_idx = 4'(n); a_acc = (t == 1);
        for (int r = 0; r < R; r++) a_vec[r*8 +: 8] = A[t][n][r];
        issue_t[n] = $time + 5;   // the next rising edge samples it
        @(negedge clk);
      end
      a_valid = 0;
      wait (got == N * (t + 1));
      @(negedge clk);
    end
    checks++; if (got != 2 * N) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

// tb_spm: self-checking test of the double-buffered scratchpad.
// Fills the compute buffer and the DMA buffer with different patterns at the
// same row addresses, checks that each side reads its own buffer, swaps and
// checks that the roles exchanged, including concurrent reads on all ports.
// Timing: one-cycle synchronous reads are checked; a watchdog bounds the
// run. Double buffering follows the paper; the port structure is this
// design's own.
module tb_spm;
  import h2m2_pkg::*;
  localparam int ROWS = 64;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic swap, sel, c_re0, c_re1, c_we, d_re, d_we;
  logic [5:0] c_raddr0, c_raddr1, c_waddr, d_addr;
  row_t c_rdata0, c_rdata1, c_wdata, d_wdata, d_rdata;

  spm #(.BANK_ROWS(ROWS)) dut (.*);

  int checks = 0, failures = 0;
  function automatic row_t pat(int side, int r);
    return {32{32'(side * 1000 + r * 7 + 1)}};
  endfunction

  task automatic chk(row_t got, row_t exp, string what);
    checks++;
    if (got !== exp) begin failures++; $display("%s mismatch", what); end
  endtask

  initial begin
    #100000; failures++; $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    {swap, c_re0, c_re1, c_we, d_re, d_we} = '0;
    c_raddr0 = '0; c_raddr1 = '0; c_waddr = '0; d_addr = '0; c_wdata = '0; d_wdata = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    // write both buffers at the same addresses in the same cycles
    for (int r = 0; r < ROWS; r++) begin
      @(negedge clk);
      c_we = 1; c_waddr = 6'(r); c_wdata = pat(0, r);
      d_we = 1; d_addr  = 6'(r); d_wdata = pat(1, r);
    end
    @(negedge clk); c_we = 0; d_we = 0;
    for (int s = 0; s < 3; s++) begin
      for (int r = 0; r < ROWS; r++) begin
        @(negedge clk);
        c_re0 = 1; c_raddr0 = 6'(r); c_re1 = 1; c_raddr1 = 6'(ROWS - 1 - r);
        d_re = 1; d_addr = 6'(r);
        @(posedge clk); #1;
        chk(c_rdata0, pat(s % 2, r), "compute port 0");
        chk(c_rdata1, pat(s % 2, ROWS - 1 - r), "compute port 1");
        chk(d_rdata,  pat(1 - s % 2, r), "dma port");
      end
      @(negedge clk); c_re0 = 0; c_re1 = 0; d_re = 0;
      swap = 1; @(negedge clk); swap = 0;
      checks++; if (sel != ((s + 1) % 2 == 1)) failures++;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

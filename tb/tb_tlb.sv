// tb_tlb: self-checking test of the direct-mapped TLB.
// Fills entries, checks hits and returned translations, checks that a page
// with the same index but another tag misses and replaces the entry, and that
// a flush invalidates everything.
// Interface: none; prints TB_RESULT and has a watchdog. The 2048-entry
// size follows the paper (reduced here); direct mapping is this design's own.
module tb_tlb;
  import h2m2_pkg::*;
  localparam int E = 2048;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic [VPN_W-1:0] lk_vpn, fill_vpn;
  logic lk_hit, lk_remote, fill, fill_remote, flush;
  logic [PPN_W-1:0] lk_ppn, fill_ppn;

  tlb #(.ENTRIES(E)) dut (.*);

  int checks = 0, failures = 0;
  task automatic look(int vpn, bit hit, int ppn, bit rem);
    lk_vpn = VPN_W'(vpn); #1;
    checks++;
    if (lk_hit !== hit || (hit && (lk_ppn !== PPN_W'(ppn) || lk_remote !== rem))) begin
      failures++; $display("vpn %0d: hit %0b ppn %0d rem %0b", vpn, lk_hit, lk_ppn, lk_remote);
    end
  endtask
  task automatic put(int vpn, int ppn, bit rem);
    @(negedge clk); fill = 1; fill_vpn = VPN_W'(vpn); fill_ppn = PPN_W'(ppn); fill_remote = rem;
    @(negedge clk); fill = 0;
  endtask

  initial begin
    #100000; failures++; $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    fill = 0; flush = 0; fill_vpn = '0; fill_ppn = '0; fill_remote = 0; lk_vpn = '0;
    repeat (2) @(posedge clk); rst_n = 1;
    @(negedge clk);
    look(5, 0, 0, 0);
    for (int i = 0; i < 64; i++) put(i * 37, 1000 + i, i[0]);
    for (int i = 0; i < 64; i++) look(i * 37, 1, 1000 + i, i[0]);
    look(37 + E, 0, 0, 0);              // same index, other tag
    put(37 + E, 77, 1);
    look(37 + E, 1, 77, 1);
    look(37, 0, 0, 0);                  // replaced
    look(74, 1, 1002, 0);
    @(negedge clk); flush = 1; @(negedge clk); flush = 0;
    for (int i = 0; i < 64; i++) look(i * 37, 0, 0, 0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

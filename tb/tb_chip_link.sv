// tb_chip_link: self-checking test of the chip-to-chip interconnect.
// Sends numbered messages on both channels with random valid patterns while
// the receivers apply random back-pressure; checks that every message arrives
// once, in order, unchanged, no earlier than LAT+1 cycles after it was sent,
// and that one message per cycle passes when nothing stalls.
// Interface: none (self-contained); prints TB_RESULT at the end and has a
// watchdog. The link latency is this design's choice; the paper gives only
// the interconnect's bandwidth.
module tb_chip_link;
  import h2m2_pkg::*;
  localparam int LAT = 6, DEPTH = 8, N = 300;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic tx_valid [2], tx_ready [2], rx_valid [2], rx_ready [2];
  link_msg_t tx_msg [2], rx_msg [2];

  chip_link #(.LAT(LAT), .DEPTH(DEPTH)) dut (.*);

  int checks = 0, failures = 0;
  int sent [2], rcvd [2];
  longint sent_t [2][N];
  bit stall = 1;

  function automatic link_msg_t mk(int ch, int k);
    link_msg_t m;
    m = '0; m.is_rsp = k[0]; m.req.addr = PA_W'(ch * 1000000 + k); m.rsp.rdata = {32{32'(k * 3 + ch)}};
    return m;
  endfunction

  for (genvar ch = 0; ch < 2; ch++) begin : g
    always @(negedge clk) begin
      tx_valid[ch] <= (sent[ch] < N) && (!stall || $urandom_range(0, 3) != 0);
      tx_msg[ch]   <= mk(ch, sent[ch]);
      rx_ready[ch] <= !stall || ($urandom_range(0, 2) != 0);
    end
    always @(posedge clk) if (rst_n) begin
      if (tx_valid[ch] && tx_ready[ch]) begin sent_t[ch][sent[ch]] = $time; sent[ch]++; end
      if (rx_valid[ch] && rx_ready[ch]) begin
        checks++;
        if (rx_msg[ch] !== mk(ch, rcvd[ch])) begin failures++; $display("ch %0d msg %0d corrupted/out of order", ch, rcvd[ch]); end
        checks++;
        if (($time - sent_t[ch][rcvd[ch]]) / 10 < LAT + 1) begin failures++; $display("too early"); end
        rcvd[ch]++;
      end
    end
  end

  initial begin
    #400000; failures++; $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    longint t0;
    int r0;
    sent = '{0, 0}; rcvd = '{0, 0};
    for (int ch = 0; ch < 2; ch++) begin tx_valid[ch] = 0; rx_ready[ch] = 0; tx_msg[ch] = '0; end
    repeat (3) @(posedge clk); rst_n = 1;
    wait (sent[0] >= N / 2 && sent[1] >= N / 2);
    // now full rate: 50 cycles should pass ~50 messages on channel 0
    stall = 0;
    repeat (LAT + 4) @(posedge clk);
    r0 = rcvd[0]; t0 = $time;
    repeat (50) @(posedge clk);
    checks++;
    if (rcvd[0] - r0 < 48 && sent[0] < N) begin failures++; $display("throughput %0d/50", rcvd[0] - r0); end
    wait (rcvd[0] == N && rcvd[1] == N);
    checks++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

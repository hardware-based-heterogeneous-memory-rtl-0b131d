// chip_link: interconnect between the HBM-side and the LPDDR-side chips.
//
// Two independent channels, index 0 from chip A to chip B and index 1 from B
// to A. Each carries link messages (remote row requests and their responses)
// through a LAT-stage pipeline into a DEPTH-entry receive FIFO. A sender may
// only inject while the FIFO has room for everything already in flight, so
// nothing is ever dropped and back-pressure reaches the sender. The paper
// names the interconnect and its 960 GB/s; the fixed latency, the FIFO and one
// message (one 128-byte row) per cycle and direction are this design's choices;
// the serial PHY of a real chip-to-chip link is not modelled.
//
// Interface: tx_valid/tx_ready/tx_msg in, rx_valid/rx_ready/rx_msg out, per
// channel. Timing: a message accepted in cycle t can appear at rx in cycle
// t+LAT+1.
module chip_link
  import h2m2_pkg::*;
#(
  parameter int LAT   = 8,
  parameter int DEPTH = 16
) (
  input  logic      clk,
  input  logic      rst_n,
  input  logic      tx_valid [2],
  output logic      tx_ready [2],
  input  link_msg_t tx_msg   [2],
  output logic      rx_valid [2],
  input  logic      rx_ready [2],
  output link_msg_t rx_msg   [2]
);

  localparam int AW = $clog2(DEPTH);

  for (genvar ch = 0; ch < 2; ch++) begin : g_ch
    logic      pv [LAT];
    link_msg_t pm [LAT];
    link_msg_t q  [DEPTH];
    logic [AW-1:0] wp, rp;
    logic [AW:0]   cnt;
    logic [$clog2(LAT+1):0] infl;
    logic push, pop, acc;

    assign acc      = tx_valid[ch] && tx_ready[ch];
    assign tx_ready[ch] = (int'(cnt) + int'(infl)) < DEPTH;
    assign push     = pv[LAT-1];
    assign rx_valid[ch] = (cnt != 0);
    assign rx_msg[ch]   = q[rp];
    assign pop      = rx_valid[ch] && rx_ready[ch];

    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n) begin
        for (int k = 0; k < LAT; k++) pv[k] <= 1'b0;
        wp <= '0; rp <= '0; cnt <= '0; infl <= '0;
      end else begin
        pv[0] <= acc;
        for (int k = 1; k < LAT; k++) pv[k] <= pv[k-1];
        infl <= infl + $bits(infl)'(acc) - $bits(infl)'(push);
        if (push) wp <= (wp == AW'(DEPTH-1)) ? '0 : wp + 1'b1;
        if (pop)  rp <= (rp == AW'(DEPTH-1)) ? '0 : rp + 1'b1;
        cnt <= cnt + (AW+1)'(push) - (AW+1)'(pop);
      end
    end
    always_ff @(posedge clk) begin
      pm[0] <= tx_msg[ch];
      for (int k = 1; k < LAT; k++) pm[k] <= pm[k-1];
      if (push) q[wp] <= pm[LAT-1];
    end
  end

endmodule

// tb_mem_ctrl: self-checking test of the memory-controller front end.
// Two controllers are wired back to back (A's link output to B's link input
// and vice versa), each with its own behavioural DRAM. Requesters on both
// sides issue local and remote reads and writes at the same time; the test
// checks that local requests reach the own DRAM, remote ones the other DRAM,
// that every response returns to its requester with the right data, and the
// remote counters.
// Interface: none; prints TB_RESULT and has a watchdog. The routing of
// remote pages over the interconnect follows the paper's direct access; the
// tags and priorities under test are this design's own.
module tb_mem_ctrl;
  import h2m2_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic      u_req_valid [2], u_req_ready [2], u_rsp_valid [2];
  mem_req_t  u_req [2];
  mem_rsp_t  u_rsp [2];
  logic      d_req_valid [2], d_req_ready [2], d_rsp_valid [2], d_rsp_ready [2];
  mem_req_t  d_req [2];
  mem_rsp_t  d_rsp [2];
  logic      lo_valid [2], lo_ready [2];
  link_msg_t lo_msg [2];
  logic [31:0] rs [2], rv [2];

  for (genvar s = 0; s < 2; s++) begin : g
    mem_ctrl dut (.clk, .rst_n,
      .u_req_valid(u_req_valid[s]), .u_req_ready(u_req_ready[s]), .u_req(u_req[s]),
      .u_rsp_valid(u_rsp_valid[s]), .u_rsp(u_rsp[s]),
      .d_req_valid(d_req_valid[s]), .d_req_ready(d_req_ready[s]), .d_req(d_req[s]),
      .d_rsp_valid(d_rsp_valid[s]), .d_rsp_ready(d_rsp_ready[s]), .d_rsp(d_rsp[s]),
      .lo_valid(lo_valid[s]), .lo_ready(lo_ready[s]), .lo_msg(lo_msg[s]),
      .li_valid(lo_valid[1-s]), .li_ready(lo_ready[1-s]), .li_msg(lo_msg[1-s]),
      .remote_sent(rs[s]), .remote_served(rv[s]));
    dram_model #(.LAT(4 + 3 * s)) mem (.clk, .rst_n, .req_valid(d_req_valid[s]), .req_ready(d_req_ready[s]),
      .req(d_req[s]), .rsp_valid(d_rsp_valid[s]), .rsp_ready(d_rsp_ready[s]), .rsp(d_rsp[s]));
  end

  int checks = 0, failures = 0;
  task automatic expect_(bit c, string what);
    checks++; if (!c) begin failures++; $display("FAIL: %s", what); end
  endtask
  function automatic row_t pat(int side, int k);
    return {32{32'(side * 100000 + k)}};
  endfunction

  // one requester per side: N accesses, alternating local/remote, one in flight
  task automatic requester(int s, int n);
    for (int k = 0; k < n; k++) begin
      bit rem, we;
      mem_rsp_t r;
      rem = k[0]; we = k[1];
      @(negedge clk);
      u_req_valid[s] = 1;
      u_req[s] = '{we: we, remote: rem, addr: PA_W'(k * 128 + s * 65536), wdata: pat(10 + s, k)};
      do @(posedge clk); while (!u_req_ready[s]);
      #1 u_req_valid[s] = 0;
      do @(posedge clk); while (!u_rsp_valid[s]);
      r = u_rsp[s];
      if (!we) expect_(r.rdata == pat(rem ? 1 - s : s, k), "read data from the right memory");
      else begin
        // the write went to the memory of side (rem ? 1-s : s)
        if (rem) expect_(s == 0 ? (g[1].mem.peek(PA_W'(k * 128 + s * 65536)) == pat(10 + s, k))
                                : (g[0].mem.peek(PA_W'(k * 128 + s * 65536)) == pat(10 + s, k)), "remote write lands in other memory");
        else     expect_(s == 0 ? (g[0].mem.peek(PA_W'(k * 128 + s * 65536)) == pat(10 + s, k))
                                : (g[1].mem.peek(PA_W'(k * 128 + s * 65536)) == pat(10 + s, k)), "local write lands in own memory");
      end
    end
  endtask

  initial begin
    #300000; failures++; $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    for (int s = 0; s < 2; s++) begin u_req_valid[s] = 0; u_req[s] = '0; end
    for (int k = 0; k < 64; k++) begin
      g[0].mem.poke(PA_W'(k * 128),         pat(0, k));
      g[0].mem.poke(PA_W'(k * 128 + 65536), pat(0, k));
      g[1].mem.poke(PA_W'(k * 128),         pat(1, k));
      g[1].mem.poke(PA_W'(k * 128 + 65536), pat(1, k));
    end
    repeat (3) @(posedge clk); rst_n = 1;
    fork
      requester(0, 40);
      requester(1, 40);
    join
    expect_(rs[0] == 20 && rs[1] == 20, "remote requests sent");
    expect_(rv[0] == 20 && rv[1] == 20, "remote requests served");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

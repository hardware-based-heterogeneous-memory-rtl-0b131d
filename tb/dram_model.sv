// dram_model: behavioural row memory standing for an HBM or LPDDR device and
// its controller/PHY in simulation. Sparse (associative array keyed by the row
// address), fixed access latency of LAT cycles, responses in request order,
// writes acknowledged with a response. Unwritten rows read as zero.
// Backdoor tasks let a testbench play the host driver (writing data and page
// tables) and read results.
// Timing: a fixed LAT cycles from request to response (the tests use
// the paper's 32 ns for HBM and 45 ns for LPDDR at 1 GHz), responses in
// order, writes acknowledged. The device itself is outside the design; its
// row interface is this design's choice.
module dram_model
  import h2m2_pkg::*;
#(
  parameter int LAT   = 32,
  parameter int QUEUE = 16
) (
  input  logic     clk,
  input  logic     rst_n,
  input  logic     req_valid,
  output logic     req_ready,
  input  mem_req_t req,
  output logic     rsp_valid,
  input  logic     rsp_ready,
  output mem_rsp_t rsp
);
  row_t   mem [logic [PA_W-ROW_OFS_W-1:0]];
  longint cyc = 0;
  longint due [$];
  row_t   dat [$];
  int     accesses = 0;

  assign req_ready = (due.size() < QUEUE);
  assign rsp_valid = (due.size() != 0) && (due[0] <= cyc);
  assign rsp       = '{err: 1'b0, rdata: (dat.size() != 0) ? dat[0] : '0};

  always @(posedge clk) begin
    cyc <= cyc + 1;
    if (rst_n) begin
      if (rsp_valid && rsp_ready) begin void'(due.pop_front()); void'(dat.pop_front()); end
      if (req_valid && req_ready) begin
        logic [PA_W-ROW_OFS_W-1:0] k;
        k = req.addr[PA_W-1:ROW_OFS_W];
        accesses++;
        if (req.we) begin mem[k] = req.wdata; dat.push_back('0); end
        else        dat.push_back(mem.exists(k) ? mem[k] : '0);
        due.push_back(cyc + LAT);
      end
    end
  end

  function automatic row_t peek(logic [PA_W-1:0] a);
    logic [PA_W-ROW_OFS_W-1:0] k;
    k = a[PA_W-1:ROW_OFS_W];
    return mem.exists(k) ? mem[k] : '0;
  endfunction
  function automatic void poke(logic [PA_W-1:0] a, row_t v);
    mem[a[PA_W-1:ROW_OFS_W]] = v;
  endfunction
  // write the flat page-table entry of logical page vpn
  function automatic void set_pte(logic [PA_W-1:0] pt_base, int vpn, bit valid, bit remote, int ppn);
    logic [PA_W-1:0] a;
    row_t r;
    logic [63:0] e;
    a = pt_base + PA_W'(vpn) * 8;
    r = peek(a);
    e = '0; e[PTE_V] = valid; e[PTE_REM] = remote; e[PPN_W-1:0] = PPN_W'(ppn);
    r[int'(a[ROW_OFS_W-1:3]) * 64 +: 64] = e;
    poke(a, r);
  endfunction
endmodule

// mem_ctrl: memory-controller front end of one accelerator chip.
//
// Steers the MMU's physical row requests: a request to a local page goes to
// this chip's DRAM (HBM on one side, LPDDR on the other); a request whose
// page-table entry is marked remote is sent over the interconnect and served
// by the other chip's controller, which puts it on its own DRAM and returns
// the response over the interconnect. This gives the direct (zero-copy)
// access to the other memory that the paper requires next to page copies.
// The paper only names the memory controller; the steering, the in-order
// response tags, local-before-remote priority and responses-before-requests
// priority on the link are this design's choices. The DRAM protocol engine
// and PHY are outside (the DRAM port is a plain row request/response port).
//
// Interface / timing: every port is valid/ready except u_rsp (the MMU always
// accepts). DRAM responses (reads and write acknowledgements) return in
// request order; a FIFO of FIFO_DEPTH one-bit tags records whether each
// outstanding DRAM access belongs to the MMU or to the other chip.
// The block is a router: request and response payloads pass from its inputs
// to its outputs through multiplexers only, without a register stage, so the
// payload outputs are combinational functions of the inputs.
module mem_ctrl
  import h2m2_pkg::*;
#(
  parameter int FIFO_DEPTH = 8
) (
  input  logic      clk,
  input  logic      rst_n,
  // from / to the MMU
  input  logic      u_req_valid,
  output logic      u_req_ready,
  input  mem_req_t  u_req,
  output logic      u_rsp_valid,
  output mem_rsp_t  u_rsp,
  // local DRAM
  output logic      d_req_valid,
  input  logic      d_req_ready,
  output mem_req_t  d_req,
  input  logic      d_rsp_valid,
  output logic      d_rsp_ready,
  input  mem_rsp_t  d_rsp,
  // interconnect
  output logic      lo_valid,
  input  logic      lo_ready,
  output link_msg_t lo_msg,
  input  logic      li_valid,
  output logic      li_ready,
  input  link_msg_t li_msg,
  // statistics
  output logic [31:0] remote_sent,
  output logic [31:0] remote_served
);

  localparam int AW = $clog2(FIFO_DEPTH);

  logic [FIFO_DEPTH-1:0] tagq;
  logic [AW-1:0]         wp, rp;
  logic [AW:0]           cnt;
  logic                  push, pop, push_tag;
  wire                   full = (cnt == (AW+1)'(FIFO_DEPTH));
  wire                   head = tagq[rp];

  wire u_local  = u_req_valid && !u_req.remote;
  wire u_remote = u_req_valid &&  u_req.remote;
  wire li_req   = li_valid && !li_msg.is_rsp;
  wire li_rsp   = li_valid &&  li_msg.is_rsp;

  // DRAM responses
  wire rsp_to_link = d_rsp_valid && (cnt != 0) && head;
  wire rsp_to_mmu  = d_rsp_valid && (cnt != 0) && !head;
  assign d_rsp_ready = rsp_to_mmu || (rsp_to_link && lo_ready);
  assign pop         = d_rsp_valid && d_rsp_ready;

  // DRAM requests: local first, then requests from the other chip
  always_comb begin
    d_req_valid = 1'b0; d_req = u_req; push_tag = 1'b0;
    if (u_local && !full) begin
      d_req_valid = 1'b1;
    end else if (!u_local && li_req && !full) begin
      d_req_valid = 1'b1; d_req = li_msg.req; d_req.remote = 1'b0; push_tag = 1'b1;
    end
  end
  assign push = d_req_valid && d_req_ready;

  // link output: responses to the other chip first, then our remote requests
  always_comb begin
    lo_valid = 1'b0;
    lo_msg   = '{is_rsp: 1'b0, req: u_req, rsp: d_rsp};
    if (rsp_to_link) begin
      lo_valid = 1'b1; lo_msg.is_rsp = 1'b1;
    end else if (u_remote) begin
      lo_valid = 1'b1;
    end
  end

  assign u_req_ready = u_local ? (!full && d_req_ready) : (u_remote && !rsp_to_link && lo_ready);
  assign li_ready    = li_rsp ? !rsp_to_mmu : (!u_local && !full && d_req_ready);

  assign u_rsp_valid = rsp_to_mmu || li_rsp;
  assign u_rsp       = rsp_to_mmu ? d_rsp : li_msg.rsp;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wp <= '0; rp <= '0; cnt <= '0; tagq <= '0;
      remote_sent <= '0; remote_served <= '0;
    end else begin
      if (push) begin tagq[wp] <= push_tag; wp <= (wp == AW'(FIFO_DEPTH-1)) ? '0 : wp + 1'b1; end
      if (pop)  rp <= (rp == AW'(FIFO_DEPTH-1)) ? '0 : rp + 1'b1;
      cnt <= cnt + (AW+1)'(push) - (AW+1)'(pop);
      if (u_remote && u_req_ready)      remote_sent   <= remote_sent + 1;
      if (push && push_tag)             remote_served <= remote_served + 1;
    end
  end

endmodule

// h2m2_pkg: types and constants shared by the asymmetric-memory accelerator.
//
// Data are INT8 (the precision assumed throughout the design); accumulators
// are 32-bit. Every transfer between memory, scratchpad and the compute units
// moves one "row" of 128 bytes, matching the 128-lane vector/SFU arrays and the
// 128x128 systolic array. Logical (virtual) addresses are 40 bits, i.e. a 1 TB
// logical space, split into 2 MB huge pages: 19-bit page number + 21-bit
// offset. The flat page table therefore has 512K entries of 8 bytes (4 MB).
// The row width, the physical address width and the PTE layout are this
// design's choices; the 1 TB space, 2 MB pages and 4 MB table are the paper's.
package h2m2_pkg;

  localparam int ROW_BYTES  = 128;
  localparam int ROW_W      = ROW_BYTES * 8;
  localparam int ROW_OFS_W  = $clog2(ROW_BYTES);   // 7

  localparam int VA_W       = 40;                  // 1 TB logical space
  localparam int PAGE_OFS_W = 21;                  // 2 MB pages
  localparam int VPN_W      = VA_W - PAGE_OFS_W;   // 19
  localparam int PA_W       = 40;
  localparam int PPN_W      = PA_W - PAGE_OFS_W;   // 19
  localparam int PTE_BYTES  = 8;                   // 4 MB / 512K entries
  localparam int PTE_PER_ROW = ROW_BYTES / PTE_BYTES;  // 16

  localparam int SPM_AW     = 17;                  // up to 131072 rows (16 MB)
  localparam int LEN_W      = 18;
  localparam int NEV        = 32;                  // synchronisation events
  localparam int EV_W       = $clog2(NEV);
  localparam int NCORE_TOT  = 8;                   // 2 chips x 4 cores
  localparam int CORE_W     = $clog2(NCORE_TOT);

  typedef logic [ROW_W-1:0] row_t;

  // Page-table entry, 64 bits: bit 63 valid, bit 62 remote (the page lives in
  // the memory of the other chip and is reached over the interconnect),
  // bits PPN_W-1:0 physical page number.
  localparam int PTE_V   = 63;
  localparam int PTE_REM = 62;

  // Row-granular memory request. addr is a byte address (low 7 bits ignored).
  typedef struct packed {
    logic            we;
    logic            remote;   // set by the MMU from the PTE
    logic [PA_W-1:0] addr;
    row_t            wdata;
  } mem_req_t;

  typedef struct packed {
    logic err;                 // page fault (from the MMU) or none
    row_t rdata;
  } mem_rsp_t;

  // One message on the chip-to-chip interconnect: a remote request or the
  // response to one.
  typedef struct packed {
    logic     is_rsp;
    mem_req_t req;
    mem_rsp_t rsp;
  } link_msg_t;

  typedef enum logic [3:0] {
    OP_NOP     = 4'd0,
    OP_LOAD    = 4'd1,   // memory[vaddr + i*128]  -> SPM DMA buffer row d+i
    OP_STORE   = 4'd2,   // SPM DMA buffer row a+i -> memory[vaddr + i*128]
    OP_SWAP    = 4'd3,   // exchange compute and DMA buffers
    OP_MM_W    = 4'd4,   // load systolic-array weights from rows b..b+DIM-1
    OP_MM      = 4'd5,   // stream activation rows a+i, results to rows d+i
    OP_MV      = 4'd6,   // x = row a, dot(x, row b+i) -> byte i of row d
    OP_VEC     = 4'd7,   // row d+i = row a+i (vop) row b+i
    OP_SFU_LUT = 4'd8,   // lookup table <- rows a, a+1
    OP_SFU_ACT = 4'd9,   // row d+i = LUT(row a+i)
    OP_SFU_SUM = 4'd10   // 32-bit word i of row d = sum of bytes of row a+i
  } op_e;

  typedef enum logic [1:0] { VOP_ADD = 2'd0, VOP_SUB = 2'd1, VOP_MUL = 2'd2, VOP_DIV = 2'd3 } vop_e;

  typedef struct packed {
    op_e               op;
    vop_e              vop;
    logic              acc;     // accumulate onto the previous K tile
    logic [4:0]        shift;   // requantisation right shift
    logic [VA_W-1:0]   vaddr;
    logic [SPM_AW-1:0] a;
    logic [SPM_AW-1:0] b;
    logic [SPM_AW-1:0] d;
    logic [LEN_W-1:0]  len;
    logic [EV_W-1:0]   ev;      // event recorded when the command completes
  } core_cmd_t;

  // Kernel as launched by the host driver into the synchronisation controller.
  typedef struct packed {
    logic [CORE_W-1:0] core;    // 0-3 HBM-side chip, 4-7 LPDDR-side chip
    logic [NEV-1:0]    wait_mask;
    core_cmd_t         cmd;
  } kernel_t;

  // Saturate a 32-bit value to INT8.
  function automatic logic [7:0] sat8(input logic signed [31:0] v);
    if (v > 32'sd127)       return 8'h7f;
    else if (v < -32'sd128) return 8'h80;
    else                    return v[7:0];
  endfunction

  // Requantise an INT32 accumulator to INT8: arithmetic shift, then saturate.
  function automatic logic [7:0] requant(input logic signed [31:0] v, input logic [4:0] sh);
    return sat8(v >>> sh);
  endfunction

endpackage

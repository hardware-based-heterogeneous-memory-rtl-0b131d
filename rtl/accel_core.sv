// accel_core: one core of an accelerator chip.
//
// Four units share the core's double-buffered scratchpad (SPM): the systolic
// matrix-matrix unit (GEMM), the matrix-vector unit (GEMV), the vector unit
// (element-wise arithmetic) and the special function unit (lookup table and
// adder tree). Two engines run side by side on the two SPM buffers:
//   * the DMA engine moves rows between memory (logical addresses, translated
//     by the chip's MMU) and the DMA buffer: OP_LOAD and OP_STORE;
//   * the compute engine streams rows of the compute buffer through one unit
//     and writes the results back to the compute buffer: OP_MM_W, OP_MM,
//     OP_MV, OP_VEC, OP_SFU_LUT, OP_SFU_ACT, OP_SFU_SUM.
// OP_SWAP exchanges the two buffers once both engines are idle, so the next
// tile is loaded while the current one is computed (double buffering).
// The paper gives the four unit types, the shared SPM with double buffering
// and the sizes; the command set, the two engines, the INT8 requantisation of
// results (arithmetic shift by cmd.shift, then saturation) and one memory
// request in flight are this design's choices. See h2m2_pkg for the command
// fields and the exact meaning of each opcode.
//
// Interface / timing:
//   * cmd_valid/cmd_ready/cmd: cmd_ready depends on the opcode (DMA op: DMA
//     engine idle; compute op: compute engine idle; SWAP: both idle).
//   * done_valid[0]/done_ev[0] pulse when a DMA command ends, done_valid[1]/
//     done_ev[1] when a compute command, SWAP or NOP ends.
//   * mreq_*/mrsp_*: row requests with logical addresses, one at a time.
//   * Compute rates: one row per cycle. OP_MM results appear MM_DIM*2 cycles
//     after their row was read; OP_MV results 3 cycles after a group of
//     MV_LANES rows.
//   Constraints: OP_MM len <= MM_ACC, OP_MV len <= 128, OP_SFU_SUM len <= 32.
//   Each engine keeps a whole copy of its command (dc, cc) but reads only
//   the fields its opcodes use, so lint reports some of their bits as unused.
module accel_core
  import h2m2_pkg::*;
#(
  parameter int SPM_ROWS = 131072,
  parameter int MM_DIM   = 128,
  parameter int MM_ACC   = 128,
  parameter int MV_LANES = 32,
  localparam int AW      = $clog2(SPM_ROWS)
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        cmd_valid,
  output logic        cmd_ready,
  input  core_cmd_t   cmd,
  output logic [1:0]  done_valid,
  output logic [EV_W-1:0] done_ev [2],
  output logic        mreq_valid,
  input  logic        mreq_ready,
  output mem_req_t    mreq,
  input  logic        mrsp_valid,
  input  mem_rsp_t    mrsp,
  output logic        fault,
  output logic [31:0] overlap_cycles
);

  localparam int MV_OUTS = ROW_BYTES;
  localparam int MIW     = $clog2(MM_ACC);
  localparam int VIW     = $clog2(MV_OUTS);

  // ------------------------------------------------------------------ SPM
  logic          swap, sel;
  logic          c_re0, c_re1, c_we, d_re, d_we;
  logic [AW-1:0] c_raddr0, c_raddr1, c_waddr, d_addr;
  row_t          c_rdata0, c_rdata1, c_wdata, d_wdata, d_rdata;

  spm #(.BANK_ROWS(SPM_ROWS)) u_spm (
    .clk, .rst_n, .swap, .sel,
    .c_re0, .c_raddr0, .c_rdata0, .c_re1, .c_raddr1, .c_rdata1,
    .c_we, .c_waddr, .c_wdata,
    .d_re, .d_we, .d_addr, .d_wdata, .d_rdata
  );

  // ------------------------------------------------------------------ command acceptance
  logic dma_busy, cmp_busy;
  wire  is_dma = (cmd.op == OP_LOAD) || (cmd.op == OP_STORE);
  always_comb begin
    if (is_dma)                 cmd_ready = !dma_busy;
    else if (cmd.op == OP_SWAP) cmd_ready = !dma_busy && !cmp_busy;
    else                        cmd_ready = !cmp_busy;
  end
  wire take     = cmd_valid && cmd_ready;
  assign swap   = take && (cmd.op == OP_SWAP);

  // ------------------------------------------------------------------ DMA engine
  typedef enum logic [2:0] { D_IDLE, D_LREQ, D_LWAIT, D_SRD, D_SREQ, D_SWAIT } dstate_e;
  dstate_e        ds;
  core_cmd_t      dc;
  logic [LEN_W-1:0] di;
  assign dma_busy = (ds != D_IDLE);

  always_comb begin
    mreq_valid   = (ds == D_LREQ) || (ds == D_SREQ);
    mreq.we      = (ds == D_SREQ);
    mreq.remote  = 1'b0;
    mreq.addr    = PA_W'(dc.vaddr) + (PA_W'(di) << ROW_OFS_W);
    mreq.wdata   = d_rdata;
    d_re         = (ds == D_SRD);
    d_we         = (ds == D_LWAIT) && mrsp_valid;
    d_addr       = (ds == D_SRD) ? AW'(dc.a + SPM_AW'(di)) : AW'(dc.d + SPM_AW'(di));
    d_wdata      = mrsp.rdata;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      ds <= D_IDLE; dc <= '0; di <= '0; done_valid[0] <= 1'b0; done_ev[0] <= '0; fault <= 1'b0;
    end else begin
      done_valid[0] <= 1'b0;
      unique case (ds)
        D_IDLE: if (take && is_dma) begin
          dc <= cmd; di <= '0; done_ev[0] <= cmd.ev;
          if (cmd.len == 0) done_valid[0] <= 1'b1;
          else ds <= (cmd.op == OP_LOAD) ? D_LREQ : D_SRD;
        end
        D_LREQ:  if (mreq_ready) ds <= D_LWAIT;
        D_SRD:   ds <= D_SREQ;
        D_SREQ:  if (mreq_ready) ds <= D_SWAIT;
        D_LWAIT, D_SWAIT: if (mrsp_valid) begin
          if (mrsp.err) fault <= 1'b1;
          if (di + 1'b1 == dc.len) begin
            ds <= D_IDLE; done_valid[0] <= 1'b1;
          end else begin
            di <= di + 1'b1;
            ds <= (ds == D_LWAIT) ? D_LREQ : D_SRD;
          end
        end
        default: ds <= D_IDLE;
      endcase
    end
  end

  // ------------------------------------------------------------------ compute engine
  typedef enum logic [1:0] { C_IDLE, C_RUN, C_WB } cstate_e;
  cstate_e          cs;
  core_cmd_t        cc;
  logic [LEN_W-1:0] n_iss, iss, exp_out, out_cnt, wcnt;
  logic             rd_v, rd_last;
  logic [LEN_W-1:0] rd_i;
  row_t             res;
  assign cmp_busy = (cs != C_IDLE);

  // units
  logic                  mm_o_valid;
  logic [MM_DIM*32-1:0]  mm_o_vec;
  logic [MIW-1:0]        mm_o_idx;
  logic                  mv_o_valid;
  logic [MV_LANES*32-1:0] mv_o_sums;
  logic [VIW-1:0]        mv_o_base;
  logic                  vu_o_valid, sf_o_valid;
  logic [ROW_W-1:0]      vu_y, sf_y;
  logic [31:0]           sf_sum;

  mm_unit #(.ROWS(MM_DIM), .COLS(MM_DIM), .ACC_DEPTH(MM_ACC)) u_mm (
    .clk, .rst_n,
    .w_valid(rd_v && cc.op == OP_MM_W), .w_row(c_rdata1[MM_DIM*8-1:0]),
    .a_valid(rd_v && cc.op == OP_MM), .a_vec(c_rdata0[MM_DIM*8-1:0]),
    .a_idx(MIW'(rd_i)), .a_acc(cc.acc),
    .o_valid(mm_o_valid), .o_vec(mm_o_vec), .o_idx(mm_o_idx)
  );

  mv_unit #(.LANES(MV_LANES), .WIDTH(ROW_BYTES), .OUTS(MV_OUTS)) u_mv (
    .clk, .rst_n,
    .x_valid(rd_v && cc.op == OP_MV && rd_i == 0), .x_vec(c_rdata0),
    .r_valid(rd_v && cc.op == OP_MV), .r_row(c_rdata1), .r_idx(VIW'(rd_i)),
    .r_acc(cc.acc), .r_last(rd_last),
    .o_valid(mv_o_valid), .o_sums(mv_o_sums), .o_base(mv_o_base)
  );

  vector_unit #(.LANES(ROW_BYTES)) u_vu (
    .clk, .rst_n,
    .in_valid(rd_v && cc.op == OP_VEC), .op(cc.vop), .a(c_rdata0), .b(c_rdata1), .shift(cc.shift),
    .out_valid(vu_o_valid), .y(vu_y)
  );

  sfu #(.LANES(ROW_BYTES)) u_sfu (
    .clk, .rst_n,
    .lut_we(rd_v && cc.op == OP_SFU_LUT), .lut_half(rd_i[0]), .lut_wdata(c_rdata0),
    .in_valid(rd_v && (cc.op == OP_SFU_ACT || cc.op == OP_SFU_SUM)),
    .mode(cc.op == OP_SFU_SUM), .x(c_rdata0),
    .out_valid(sf_o_valid), .y(sf_y), .sum(sf_sum)
  );

  // SPM read issue
  wire issuing = (cs == C_RUN) && (iss < n_iss);
  always_comb begin
    c_re0 = issuing && (cc.op != OP_MM_W);
    c_re1 = issuing && (cc.op == OP_MM_W || cc.op == OP_MV || cc.op == OP_VEC);
    c_raddr0 = (cc.op == OP_MV) ? AW'(cc.a) : AW'(cc.a + SPM_AW'(iss));
    c_raddr1 = (cc.op == OP_MM_W) ? AW'(cc.b + SPM_AW'(MM_DIM - 1) - SPM_AW'(iss))
                                  : AW'(cc.b + SPM_AW'(iss));
  end

  // one output event of the running operation
  logic out_ev;
  always_comb begin
    unique case (cc.op)
      OP_MM_W, OP_SFU_LUT:    out_ev = rd_v;
      OP_MM:                  out_ev = mm_o_valid;
      OP_MV:                  out_ev = mv_o_valid;
      OP_VEC:                 out_ev = vu_o_valid;
      OP_SFU_ACT, OP_SFU_SUM: out_ev = sf_o_valid;
      default:                out_ev = 1'b0;
    endcase
  end

  // result write-back
  always_comb begin
    c_we = 1'b0; c_waddr = AW'(cc.d); c_wdata = '0;
    if (cs == C_RUN) begin
      if (cc.op == OP_MM && mm_o_valid) begin
        c_we = 1'b1; c_waddr = AW'(cc.d + SPM_AW'(mm_o_idx));
        for (int c = 0; c < MM_DIM; c++) c_wdata[c*8 +: 8] = requant(mm_o_vec[c*32 +: 32], cc.shift);
      end else if (cc.op == OP_VEC && vu_o_valid) begin
        c_we = 1'b1; c_waddr = AW'(cc.d + SPM_AW'(wcnt)); c_wdata = vu_y;
      end else if (cc.op == OP_SFU_ACT && sf_o_valid) begin
        c_we = 1'b1; c_waddr = AW'(cc.d + SPM_AW'(wcnt)); c_wdata = sf_y;
      end
    end else if (cs == C_WB) begin
      c_we = 1'b1; c_waddr = AW'(cc.d); c_wdata = res;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cs <= C_IDLE; cc <= '0; n_iss <= '0; iss <= '0; exp_out <= '0; out_cnt <= '0; wcnt <= '0;
      rd_v <= 1'b0; rd_last <= 1'b0; rd_i <= '0; res <= '0;
      done_valid[1] <= 1'b0; done_ev[1] <= '0;
    end else begin
      done_valid[1] <= 1'b0;
      rd_v    <= issuing;
      rd_i    <= iss;
      rd_last <= issuing && (iss + 1'b1 == n_iss);
      unique case (cs)
        C_IDLE: if (take && !is_dma) begin
          cc <= cmd; iss <= '0; out_cnt <= '0; wcnt <= '0; res <= '0; done_ev[1] <= cmd.ev;
          unique case (cmd.op)
            OP_MM_W:    begin n_iss <= LEN_W'(MM_DIM); exp_out <= LEN_W'(MM_DIM); end
            OP_SFU_LUT: begin n_iss <= LEN_W'(2);      exp_out <= LEN_W'(2);      end
            OP_MV:      begin n_iss <= cmd.len; exp_out <= (cmd.len + LEN_W'(MV_LANES-1)) / LEN_W'(MV_LANES); end
            default:    begin n_iss <= cmd.len; exp_out <= cmd.len; end
          endcase
          if (cmd.op == OP_NOP || cmd.op == OP_SWAP) done_valid[1] <= 1'b1;
          else cs <= C_RUN;
        end
        C_RUN: begin
          if (issuing) iss <= iss + 1'b1;
          if (out_ev) begin
            out_cnt <= out_cnt + 1'b1;
            wcnt    <= wcnt + 1'b1;
          end
          if (cc.op == OP_MV && mv_o_valid)
            for (int l = 0; l < MV_LANES; l++)
              if (int'(mv_o_base) + l < int'(cc.len))
                res[(int'(mv_o_base) + l)*8 +: 8] <= requant(mv_o_sums[l*32 +: 32], cc.shift);
          if (cc.op == OP_SFU_SUM && sf_o_valid)
            res[int'(wcnt[4:0])*32 +: 32] <= sf_sum;
          if ((out_cnt + LEN_W'(out_ev)) == exp_out) begin
            if (cc.op == OP_MV || cc.op == OP_SFU_SUM) cs <= C_WB;
            else begin cs <= C_IDLE; done_valid[1] <= 1'b1; end
          end
        end
        C_WB: begin cs <= C_IDLE; done_valid[1] <= 1'b1; end
        default: cs <= C_IDLE;
      endcase
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)                    overlap_cycles <= '0;
    else if (dma_busy && cmp_busy) overlap_cycles <= overlap_cycles + 1;
  end

  // the compute buffer changes exactly when a SWAP is taken
  logic sel_q, swap_q;
  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) begin sel_q <= 1'b0; swap_q <= 1'b0; end
    else        begin sel_q <= sel;  swap_q <= swap; end
  always_comb if (rst_n) a_swap_sel: assert ((sel != sel_q) == swap_q);

endmodule

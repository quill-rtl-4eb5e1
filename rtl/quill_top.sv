// quill_top: deformable-attention accelerator, top level.
//
// One MSDeformAttn layer pass over n queries runs as follows.  The host has
// loaded the reference points (ref-point SRAM, one {y,x} per compact query
// id), the folded projection W'' (W'' SRAM) and, for pruned models, the
// original token index of every compact query (gather-scatter index buffer);
// feature maps and per-query operands (offsets dp, scores A') sit in external
// memory.  On start:
//   feeder        streams the reference points in stored order into
//   dooq          which reorders them by l1 proximity (lookup window WD) and
//                 hands each chosen query, one step ahead, to
//   feature_cache which prefetches that query's operands and feature regions
//                 into its idle buffer (ping-pong) while
//   msda_core     computes the current query in one fused pass and writes its
//                 D-byte result into the output SRAM at the query id.
//   gather_scatter, once all n queries are done, drains the output SRAM to
//                 external memory at OUT_BASE + token index, then done rises.
// The two systolic GEMM engines for the surrounding dense layers (32x32
// before the attention, 64x64 after it) share the chip but exchange data with
// the attention path only through external memory; their operand and result
// ports are brought out to the host side unchanged.  The host interface and
// the external memory are outside this module: mem_rd_* is the feature
// cache's read port, mem_wr_* the output write port.
// Block set and connections follow the paper's overview figure; the feeder,
// the start/done sequencing and all port protocols are this design's.
module quill_top
  import quill_pkg::*;
#(
  parameter int unsigned D   = D_DEF,
  parameter int unsigned M   = M_DEF,
  parameter int unsigned L   = L_DEF,
  parameter int unsigned K   = K_DEF,
  parameter int unsigned PD  = PD_DEF,
  parameter int unsigned WD  = WD_DEF,
  parameter int unsigned NQ  = NQ_DEF,
  parameter int unsigned R   = 4,
  parameter int unsigned VD  = 16,
  parameter int unsigned QW  = 15,
  parameter int unsigned PRE_SIZE  = 32,
  parameter int unsigned POST_SIZE = 64
) (
  input  logic                 clk,
  input  logic                 rst_n,
  // host: loads
  input  logic                 rp_we,
  input  logic [QW-1:0]        rp_waddr,
  input  logic [2*PW-1:0]      rp_wdata,      // {y, x}, Q0.12 each
  input  logic                 wm_we,
  input  logic [$clog2(D/PD)-1:0] wm_waddr,
  input  logic [D*PD*8-1:0]    wm_wdata,
  input  logic                 idx_we,
  input  logic [QW-1:0]        idx_waddr,
  input  logic [QW-1:0]        idx_wdata,
  // host: control
  input  logic                 flush,
  input  logic                 start,
  input  logic [QW:0]          n_queries,
  output logic                 done,
  // external memory read (feature cache)
  output logic                 mem_rd_valid,
  input  logic                 mem_rd_ready,
  output logic [31:0]          mem_rd_addr,
  input  logic                 mem_rsp_valid,
  input  logic [D*8-1:0]       mem_rsp_data,
  // external memory write (output scatter)
  output logic                 mem_wr_valid,
  input  logic                 mem_wr_ready,
  output logic [31:0]          mem_wr_addr,
  output logic [D*8-1:0]       mem_wr_data,
  // pre-attention GEMM engine
  input  logic                 pre_clear,
  input  logic                 pre_valid,
  input  logic signed [7:0]    pre_a [PRE_SIZE],
  input  logic signed [7:0]    pre_b [PRE_SIZE],
  input  logic [$clog2(PRE_SIZE)-1:0] pre_sel,
  output logic signed [31:0]   pre_c [PRE_SIZE],
  // post-attention (FFN) GEMM engine
  input  logic                 post_clear,
  input  logic                 post_valid,
  input  logic signed [7:0]    post_a [POST_SIZE],
  input  logic signed [7:0]    post_b [POST_SIZE],
  input  logic [$clog2(POST_SIZE)-1:0] post_sel,
  output logic signed [31:0]   post_c [POST_SIZE],
  // statistics
  output logic [31:0]          stat_hit,
  output logic [31:0]          stat_miss,
  output logic [31:0]          stat_victim,
  output logic [31:0]          stat_stall,
  output logic [31:0]          stat_query,
  output logic [31:0]          stat_dist     // sum of l1 steps of the schedule
);
  localparam int unsigned NS = L * K;

  // ------------------------------------------------ reference-point feeder
  logic            fd_run, fd_pend, fv;
  logic [QW:0]     fd_ptr, n_q;
  logic [QW-1:0]   fq;
  logic            flast;
  logic [2*PW-1:0] rp_rdata;
  logic            rp_re;
  logic            dq_in_ready;

  assign rp_re = fd_run && !fd_pend && (fd_ptr < n_q) && (!fv || dq_in_ready);

  sram_1r1w #(.DEPTH(NQ), .WIDTH(2 * PW)) u_ref_sram (
    .clk, .we(rp_we), .waddr(rp_waddr), .wdata(rp_wdata),
    .re(rp_re), .raddr(fd_ptr[QW-1:0]), .rdata(rp_rdata));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      fd_run <= 1'b0; fd_pend <= 1'b0; fv <= 1'b0;
      fd_ptr <= '0; n_q <= '0; fq <= '0; flast <= 1'b0;
    end else if (start) begin
      fd_run <= 1'b1; fd_pend <= 1'b0; fv <= 1'b0;
      fd_ptr <= '0; n_q <= n_queries;
    end else begin
      if (fv && dq_in_ready) fv <= 1'b0;
      if (rp_re) begin
        fd_pend <= 1'b1;
        fq      <= fd_ptr[QW-1:0];
        flast   <= (fd_ptr == n_q - 1'b1);
        fd_ptr  <= fd_ptr + 1'b1;
      end
      if (fd_pend) begin
        fd_pend <= 1'b0;
        fv      <= 1'b1;
      end
      if (fd_ptr == n_q && !fd_pend && !fv) fd_run <= 1'b0;
    end
  end

  // ------------------------------------------------------------ scheduler
  logic          s_valid, s_ready, s_done;
  logic [PW-1:0] s_x, s_y;
  logic [QW-1:0] s_qid;
  logic [PW:0]   s_dist;

  dooq_scheduler #(.WD(WD), .QW(QW)) u_dooq (
    .clk, .rst_n, .start,
    .in_valid(fv), .in_ready(dq_in_ready),
    .in_x(rp_rdata[PW-1:0]), .in_y(rp_rdata[2*PW-1:PW]), .in_qid(fq), .in_last(flast),
    .out_valid(s_valid), .out_ready(s_ready), .out_x(s_x), .out_y(s_y),
    .out_qid(s_qid), .out_dist(s_dist), .done(s_done));

  // rp_rdata must stay stable while fv is high and unaccepted
  assert property (@(posedge clk) disable iff (!rst_n) (fv && !dq_in_ready) |-> !rp_re);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) stat_dist <= '0;
    else if (start) stat_dist <= '0;
    else if (s_valid && s_ready) stat_dist <= stat_dist + 32'(s_dist);
  end

  // -------------------------------------------------------- feature cache
  logic          cur_valid, cur_done;
  logic [QW-1:0] cur_qid;
  logic [PW-1:0] cur_px, cur_py;
  logic [M*L*K*(2*OFFW+SCW)-1:0] cur_opnd;
  logic          rd_en, rd_hit;
  logic signed [CW-1:0] rd_x0 [NS];
  logic signed [CW-1:0] rd_y0 [NS];
  logic [$clog2(D/PD)-1:0] rd_ch;
  logic signed [7:0] rd_data [NS][4][PD];

  feature_cache #(.D(D), .M(M), .L(L), .K(K), .PD(PD), .R(R), .VD(VD), .QW(QW)) u_cache (
    .clk, .rst_n, .flush,
    .nq_valid(s_valid), .nq_ready(s_ready), .nq_qid(s_qid), .nq_px(s_x), .nq_py(s_y),
    .cur_valid, .cur_qid, .cur_px, .cur_py, .cur_opnd, .cur_done,
    .rd_en, .rd_x0, .rd_y0, .rd_ch, .rd_data, .rd_hit,
    .mem_req_valid(mem_rd_valid), .mem_req_ready(mem_rd_ready), .mem_req_addr(mem_rd_addr),
    .mem_rsp_valid, .mem_rsp_data,
    .stat_hit, .stat_miss, .stat_victim);

  // ----------------------------------------------------------- fused core
  logic                    w_re;
  logic [$clog2(D/PD)-1:0] w_raddr;
  logic [D*PD*8-1:0]       w_rdata;
  logic                    o_we, o_re;
  logic [QW-1:0]           o_waddr, o_raddr;
  logic [D*8-1:0]          o_wdata, o_rdata;

  msda_core #(.D(D), .M(M), .L(L), .K(K), .PD(PD), .QW(QW)) u_core (
    .clk, .rst_n,
    .cur_valid, .cur_qid, .cur_px, .cur_py, .cur_opnd, .cur_done,
    .rd_en, .rd_x0, .rd_y0, .rd_ch, .rd_data, .rd_hit,
    .w_re, .w_raddr, .w_rdata,
    .o_we, .o_waddr, .o_wdata,
    .stat_stall, .stat_query);

  sram_1r1w #(.DEPTH(D / PD), .WIDTH(D * PD * 8)) u_wm_sram (
    .clk, .we(wm_we), .waddr(wm_waddr), .wdata(wm_wdata),
    .re(w_re), .raddr(w_raddr), .rdata(w_rdata));

  sram_1r1w #(.DEPTH(NQ), .WIDTH(D * 8)) u_out_sram (
    .clk, .we(o_we), .waddr(o_waddr), .wdata(o_wdata),
    .re(o_re), .raddr(o_raddr), .rdata(o_rdata));

  // ------------------------------------------------------- gather-scatter
  logic        drain_start, drain_done, running;
  logic [31:0] q_base;
  assign drain_start = running && (stat_query - q_base == 32'(n_q)) && s_done;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      running <= 1'b0; q_base <= '0;
    end else if (start) begin
      running <= 1'b1; q_base <= stat_query;
    end else if (drain_start) running <= 1'b0;
  end

  gather_scatter #(.D(D), .NQ(NQ), .QW(QW)) u_gs (
    .clk, .rst_n,
    .idx_we, .idx_waddr, .idx_wdata,
    .start(drain_start), .n(n_q), .done(drain_done),
    .o_re, .o_raddr, .o_rdata,
    .wr_valid(mem_wr_valid), .wr_ready(mem_wr_ready), .wr_addr(mem_wr_addr), .wr_data(mem_wr_data));

  assign done = drain_done && !running;

  // ---------------------------------------------------------- GEMM engines
  systolic_gemm #(.SIZE(PRE_SIZE)) u_pre_gemm (
    .clk, .rst_n, .clear(pre_clear), .in_valid(pre_valid),
    .a_col(pre_a), .b_row(pre_b), .c_sel(pre_sel), .c_row(pre_c));

  systolic_gemm #(.SIZE(POST_SIZE)) u_post_gemm (
    .clk, .rst_n, .clear(post_clear), .in_valid(post_valid),
    .a_col(post_a), .b_row(post_b), .c_sel(post_sel), .c_row(post_c));
endmodule

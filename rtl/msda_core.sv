// msda_core: fused single-pass MSDeformAttn engine.
//
// Computes, for the query held in the feature cache's current buffer,
//     out = sum_m W''_m * ( sum_{l,k} A_mlk * bilinear(x_l, p + dp_mlk) )
// with W'' = W_m * W_m' folded offline, without writing any intermediate
// result out of the core.  Per query:
//   PREP   the index/weight generator fills a sample table, one of the M*L*K
//          sampling points per cycle (coordinates + bilinear weights), while
//          the Softmax unit turns each head's L*K scores into weights A; the
//          phase lasts max(M*L*K, M*(2*L*K+2)) cycles.
//   COMP   for each head m and channel slice c (D/M/PD slices per head), one
//          cycle reads the 4 corners x PD channels of all L*K samples from the
//          level buffers, interpolates and aggregates them (bilerp_agg), and
//          the next cycle the projector adds the (1,PD) x (PD,D) product with
//          the matching W'' row group; D/PD cycles per query when every
//          corner is in the cache.  A cycle whose read is not served (rd_hit
//          low) is a stall and is repeated.
//   WRITE  the D-byte output row goes to the output SRAM at the query id,
//          the accumulators are cleared and the buffer is released.
// The sample order inside a query is unchanged; only queries are reordered
// upstream.  The phases and iteration order (p_d per cycle, D_m/p_d per
// head, M heads per query) follow the paper's core and iteration-flow figure;
// running Softmax beside index generation instead of overlapping it with the
// previous query's COMP phase is this design's simplification.
module msda_core
  import quill_pkg::*;
#(
  parameter int unsigned D  = D_DEF,
  parameter int unsigned M  = M_DEF,
  parameter int unsigned L  = L_DEF,
  parameter int unsigned K  = K_DEF,
  parameter int unsigned PD = PD_DEF,
  parameter int unsigned QW = 15,
  parameter int unsigned OUT_SHIFT = 8
) (
  input  logic                clk,
  input  logic                rst_n,
  // current query from the feature cache
  input  logic                cur_valid,
  input  logic [QW-1:0]       cur_qid,
  input  logic [PW-1:0]       cur_px,
  input  logic [PW-1:0]       cur_py,
  input  logic [M*L*K*(2*OFFW+SCW)-1:0] cur_opnd,
  output logic                cur_done,
  // level-buffer read port
  output logic                rd_en,
  output logic signed [CW-1:0] rd_x0 [L*K],
  output logic signed [CW-1:0] rd_y0 [L*K],
  output logic [$clog2(D/PD)-1:0] rd_ch,
  input  logic signed [7:0]   rd_data [L*K][4][PD],
  input  logic                rd_hit,
  // W'' SRAM read port (synchronous, one row group of D*PD bytes)
  output logic                w_re,
  output logic [$clog2(D/PD)-1:0] w_raddr,
  input  logic [D*PD*8-1:0]   w_rdata,
  // output SRAM write port
  output logic                o_we,
  output logic [QW-1:0]       o_waddr,
  output logic [D*8-1:0]      o_wdata,
  // statistics
  output logic [31:0]         stat_stall,   // COMP cycles waiting on the cache
  output logic [31:0]         stat_query    // queries completed
);
  localparam int unsigned NS  = L * K;
  localparam int unsigned NT  = M * NS;
  localparam int unsigned DM  = D / M;
  localparam int unsigned NC  = D / PD;            // COMP cycles per query
  localparam int unsigned TW  = $clog2(NT) + 1;
  localparam int unsigned CCW = $clog2(NC);
  localparam int unsigned MW  = $clog2(M) + 1;

  typedef enum logic [2:0] {C_IDLE, C_PREP, C_COMP, C_LAST, C_WRITE} cstate_t;
  cstate_t state;

  sample_t        stab [NT];
  logic [AW-1:0]  atab [M][NS];
  logic [TW-1:0]  gi;                 // generator counter
  logic [MW-1:0]  sm;                 // Softmax head counter
  logic           sm_run;
  logic [CCW-1:0] cc;                 // COMP counter = m*(DM/PD) + c
  logic           proj_en;
  logic signed [7:0] agg8_q [PD];

  // ----------------------------------------------------------- generator
  sample_t gen_smp;
  logic [1:0] gen_lvl;
  assign gen_lvl = 2'((int'(gi) / K) % L);
  index_weight_gen u_gen (
    .px(cur_px), .py(cur_py),
    .dx(signed'(cur_opnd[int'(gi) * 2 * OFFW +: OFFW])),
    .dy(signed'(cur_opnd[int'(gi) * 2 * OFFW + OFFW +: OFFW])),
    .level(gen_lvl), .smp(gen_smp));

  // ------------------------------------------------------------- Softmax
  logic signed [SCW-1:0] sm_scores [NS];
  logic [AW-1:0]         sm_w [NS];
  logic                  sm_busy, sm_done, sm_start;
  always_comb
    for (int i = 0; i < NS; i++)
      sm_scores[i] = signed'(cur_opnd[NT * 2 * OFFW + (int'(sm) * NS + i) * SCW +: SCW]);
  assign sm_start = (state == C_PREP) && sm_run && !sm_busy && !sm_done;
  softmax_unit #(.NS(NS)) u_softmax (
    .clk, .rst_n, .start(sm_start), .scores(sm_scores),
    .busy(sm_busy), .done(sm_done), .weights(sm_w));

  // ------------------------------------------------- interpolation + sum
  logic [$clog2(M)-1:0] cm;
  assign cm = $clog2(M)'(int'(cc) / (DM / PD));
  logic [BWW-1:0]    bw   [NS][4];
  logic [AW-1:0]     attn [NS];
  logic signed [27:0] agg [PD];
  logic signed [7:0]  agg8 [PD];
  always_comb begin
    for (int s = 0; s < NS; s++) begin
      sample_t t;
      t = stab[int'(cm) * NS + s];
      rd_x0[s] = t.x0;
      rd_y0[s] = t.y0;
      bw[s][0] = t.w00; bw[s][1] = t.w01; bw[s][2] = t.w10; bw[s][3] = t.w11;
      attn[s]  = atab[cm][s];
    end
  end
  bilerp_agg #(.NS(NS), .PD(PD)) u_bilerp (
    .corner(rd_data), .bw(bw), .attn(attn), .agg(agg), .agg8(agg8));

  assign rd_en   = (state == C_COMP);
  assign rd_ch   = cc;
  assign w_re    = (state == C_COMP) && rd_hit;
  assign w_raddr = cc;

  // ------------------------------------------------------------ projector
  logic signed [23:0] acc [D];
  logic [D*8-1:0]     out8;
  linear_projector #(.D(D), .PD(PD), .OUT_SHIFT(OUT_SHIFT)) u_proj (
    .clk, .rst_n, .clear(state == C_WRITE), .en(proj_en), .x(agg8_q),
    .wrow(w_rdata), .acc(acc), .out8(out8));

  assign o_we     = (state == C_WRITE);
  assign o_waddr  = cur_qid;
  assign o_wdata  = out8;
  assign cur_done = (state == C_WRITE);

  always_ff @(posedge clk) begin
    if (state == C_PREP && gi < TW'(NT)) stab[$clog2(NT)'(gi)] <= gen_smp;
    if (sm_done) atab[sm[$clog2(M)-1:0]] <= sm_w;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= C_IDLE;
      gi <= '0; sm <= '0; sm_run <= 1'b0; cc <= '0;
      proj_en <= 1'b0;
      for (int c = 0; c < PD; c++) agg8_q[c] <= '0;
      stat_stall <= '0; stat_query <= '0;
    end else begin
      proj_en <= 1'b0;
      unique case (state)
        C_IDLE: if (cur_valid) begin
          gi <= '0; sm <= '0; sm_run <= 1'b1;
          state <= C_PREP;
        end
        C_PREP: begin
          if (gi < TW'(NT)) gi <= gi + 1'b1;
          if (sm_done) begin
            if (sm == MW'(M - 1)) sm_run <= 1'b0;
            else sm <= sm + 1'b1;
          end
          if (gi == TW'(NT) && !sm_run) begin
            cc <= '0;
            state <= C_COMP;
          end
        end
        C_COMP: begin
          if (rd_hit) begin
            agg8_q  <= agg8;
            proj_en <= 1'b1;
            if (cc == CCW'(NC - 1)) state <= C_LAST;
            else cc <= cc + 1'b1;
          end else stat_stall <= stat_stall + 1;
        end
        C_LAST: state <= C_WRITE;       // last projector step lands
        C_WRITE: begin
          stat_query <= stat_query + 1;
          state <= C_IDLE;
        end
        default: state <= C_IDLE;
      endcase
    end
  end

  // the buffer the core works on must stay valid until it is released
  assert property (@(posedge clk) disable iff (!rst_n) (state != C_IDLE) |-> cur_valid);
endmodule

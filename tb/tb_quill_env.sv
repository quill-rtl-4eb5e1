// tb_quill_env: end-to-end test environment for quill_top.
//
// Loads W'', the reference points and a scattered token-index table, starts
// one MSDeformAttn pass over N queries against the behavioural external
// memory, and checks every output row the accelerator scatters back against
// the reference MSDeformAttn of tb_quill_pkg (all D channels, exactly).  It
// also runs one small product through each GEMM engine.
//
// Mechanisms that must each be seen at least once (a failure if not):
//   reorder    the schedule (seen as the order of operand fetches) departs
//              from the stored order
//   lookahead  the operands of the next query are fetched before the
//              current query has finished (ping-pong overlap)
//   hit        region pixels reused on chip;   miss   pixels read from memory
//   victim     an off-region corner served through the victim path
//   stall      a core cycle that waited for the cache
//   scatter    an output row written to a token address different from its
//              compact query id
// With FULL set the top is instantiated with its default parameters.
module tb_quill_env #(
  parameter bit FULL = 1'b0,
  parameter int D = 32, M = 4, K = 2, WD = 16, NQ = 128,
  parameter int PRE = 4, POST = 8,
  parameter int N = 40,
  parameter int SPREAD = 3,
  parameter longint MAX_CYCLES = 200000
);
  import quill_pkg::*;
  import tb_quill_pkg::*;

  localparam int PD = 2, QW = 15, NS_TOT = M * 4 * K, R = 4, OUT_SHIFT = 8;
  localparam int OPB = (NS_TOT * 48 + D * 8 - 1) / (D * 8);
  localparam int OUT_BASE = 65536;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic rp_we = 0, wm_we = 0, idx_we = 0, flush = 0, start = 0, done;
  logic [QW-1:0] rp_waddr = '0, idx_waddr = '0, idx_wdata = '0;
  logic [2*PW-1:0] rp_wdata = '0;
  logic [$clog2(D/PD)-1:0] wm_waddr = '0;
  logic [D*PD*8-1:0] wm_wdata = '0;
  logic [QW:0] n_queries = QW'(N);
  logic mem_rd_valid, mem_rd_ready, mem_rsp_valid, mem_wr_valid, mem_wr_ready;
  logic [31:0] mem_rd_addr, mem_wr_addr;
  logic [D*8-1:0] mem_rsp_data, mem_wr_data;
  logic pre_clear = 0, pre_valid = 0, post_clear = 0, post_valid = 0;
  logic signed [7:0] pre_a [PRE], pre_b [PRE], post_a [POST], post_b [POST];
  logic [$clog2(PRE)-1:0] pre_sel = '0;
  logic [$clog2(POST)-1:0] post_sel = '0;
  logic signed [31:0] pre_c [PRE], post_c [POST];
  logic [31:0] stat_hit, stat_miss, stat_victim, stat_stall, stat_query, stat_dist;
  int nreq;

  if (FULL) begin : g_dut
    quill_top dut (.*);
  end else begin : g_dut
    quill_top #(.D(D), .M(M), .K(K), .WD(WD), .NQ(NQ), .PRE_SIZE(PRE), .POST_SIZE(POST)) dut (.*);
  end

  ext_mem_model #(.D(D), .NS_TOT(NS_TOT), .SPREAD(SPREAD), .LAT(20)) u_mem (
    .clk, .req_valid(mem_rd_valid), .req_ready(mem_rd_ready), .req_addr(mem_rd_addr),
    .rsp_valid(mem_rsp_valid), .rsp_data(mem_rsp_data), .nreq);

  int checks = 0, failures = 0;
  longint cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 10) $display("FAIL %s", what);
    end
  endtask

  // token index of compact query q (a permutation of 0..NQ-1, odd stride)
  function automatic int tok(input int q);
    return (q * 37 + 11) % NQ;
  endfunction

  // ---------------------------------------------------- monitors
  int sched [$];            // schedule order seen from operand fetches
  int n_reorder = 0, n_lookahead = 0, n_scatter = 0, n_written = 0;
  bit written [NQ];
  always @(posedge clk) if (rst_n) begin
    if (mem_rd_valid && mem_rd_ready && mem_rd_addr >= OPND_BASE && (mem_rd_addr - OPND_BASE) % OPB == 0) begin
      int q;
      q = int'(mem_rd_addr - OPND_BASE) / OPB;
      if (q != sched.size()) n_reorder++;
      if (int'(stat_query) < sched.size()) n_lookahead++;
      sched.push_back(q);
    end
    if (mem_wr_valid && mem_wr_ready) begin
      int t, q, ref_out[MAXD];
      bit ok;
      t = int'(mem_wr_addr) - OUT_BASE;
      q = -1;
      for (int i = 0; i < N; i++) if (tok(i) == t) q = i;
      check(q >= 0 && !written[q], $sformatf("write to unexpected token %0d", t));
      if (q >= 0) begin
        written[q] = 1'b1;
        n_written++;
        if (t != q) n_scatter++;
        ref_msda(q, refpt(q, 0), refpt(q, 1), D, M, K, SPREAD, OUT_SHIFT, ref_out);
        ok = 1'b1;
        for (int j = 0; j < D; j++)
          if (int'(signed'(mem_wr_data[j*8 +: 8])) != ref_out[j]) begin
            if (ok && failures < 10)
              $display("query %0d ch %0d: got %0d want %0d", q, j, signed'(mem_wr_data[j*8 +: 8]), ref_out[j]);
            ok = 1'b0;
          end
        check(ok, $sformatf("output row of query %0d", q));
      end
    end
    mem_wr_ready <= ($urandom % 3) != 0;
  end

  // ---------------------------------------------------- GEMM check
  task automatic gemm_test(input bit post);
    int sz, kd;
    int a [64][8], b [8][64];
    sz = post ? POST : PRE;
    kd = 6;
    for (int i = 0; i < sz; i++) for (int k = 0; k < kd; k++) a[i][k] = int'($urandom % 256) - 128;
    for (int k = 0; k < kd; k++) for (int j = 0; j < sz; j++) b[k][j] = int'($urandom % 256) - 128;
    @(negedge clk);
    if (post) post_clear = 1; else pre_clear = 1;
    @(negedge clk);
    post_clear = 0; pre_clear = 0;
    for (int k = 0; k < kd; k++) begin
      for (int i = 0; i < sz; i++) begin
        if (post) begin post_a[i] = 8'(a[i][k]); post_b[i] = 8'(b[k][i]); post_valid = 1; end
        else begin pre_a[i] = 8'(a[i][k]); pre_b[i] = 8'(b[k][i]); pre_valid = 1; end
      end
      @(negedge clk);
    end
    post_valid = 0; pre_valid = 0;
    repeat (2 * sz + 2) @(negedge clk);
    for (int i = 0; i < sz; i++) begin
      bit ok;
      ok = 1'b1;
      if (post) post_sel = $bits(post_sel)'(i); else pre_sel = $bits(pre_sel)'(i);
      #1;
      for (int j = 0; j < sz; j++) begin
        int e;
        e = 0;
        for (int k = 0; k < kd; k++) e += a[i][k] * b[k][j];
        if ((post ? post_c[j] : pre_c[j]) != e) ok = 1'b0;
      end
      check(ok, $sformatf("%s GEMM row %0d", post ? "post" : "pre", i));
    end
  endtask

  // ---------------------------------------------------- main sequence
  initial begin
    for (int i = 0; i < PRE; i++) begin pre_a[i] = 0; pre_b[i] = 0; end
    for (int i = 0; i < POST; i++) begin post_a[i] = 0; post_b[i] = 0; end
    mem_wr_ready = 1'b0;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    @(negedge clk);
    // W'' row groups: word r holds W''[r*PD+p][j] at (j*PD+p)*8
    for (int r = 0; r < D / PD; r++) begin
      wm_we = 1; wm_waddr = $bits(wm_waddr)'(r);
      for (int j = 0; j < D; j++)
        for (int p = 0; p < PD; p++) wm_wdata[(j*PD+p)*8 +: 8] = 8'(wmat(r*PD+p, j));
      @(negedge clk);
    end
    wm_we = 0;
    for (int q = 0; q < N; q++) begin
      rp_we = 1; rp_waddr = QW'(q);
      rp_wdata = {12'(refpt(q, 1)), 12'(refpt(q, 0))};
      idx_we = 1; idx_waddr = QW'(q); idx_wdata = QW'(tok(q));
      @(negedge clk);
    end
    rp_we = 0; idx_we = 0;
    flush = 1; @(negedge clk); flush = 0;
    start = 1; @(negedge clk); start = 0;
    gemm_test(1'b0);
    gemm_test(1'b1);
    wait (done);
    repeat (5) @(negedge clk);
    check(n_written == N, $sformatf("%0d of %0d rows written", n_written, N));
    check(int'(stat_query) == N, "query count");
    check(sched.size() == N, "one operand fetch per query");
    $display("cycles=%0d queries=%0d hit=%0d miss=%0d victim=%0d stall=%0d reorder=%0d lookahead=%0d scatter=%0d l1_sum=%0d mem_reads=%0d",
             cyc, stat_query, stat_hit, stat_miss, stat_victim, stat_stall, n_reorder, n_lookahead,
             n_scatter, stat_dist, nreq);
    check(n_reorder > 0,   "mechanism reorder never seen");
    check(n_lookahead > 0, "mechanism lookahead never seen");
    check(stat_hit > 0,    "mechanism hit never seen");
    check(stat_miss > 0,   "mechanism miss never seen");
    check(stat_victim > 0, "mechanism victim never seen");
    check(stat_stall > 0,  "mechanism stall never seen");
    check(n_scatter > 0,   "mechanism scatter never seen");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    while (cyc < MAX_CYCLES) @(posedge clk);
    failures++;
    $display("watchdog: timeout after %0d cycles", cyc);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

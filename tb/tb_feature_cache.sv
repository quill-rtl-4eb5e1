// tb_feature_cache: checks the ping-pong region cache against a model.
//
// Configuration D = 32, M = 4, L = 4, K = 2 (8 samples per head read), R = 4,
// with the behavioural external memory.  The testbench plays scheduler and
// core: it offers a walk of reference points (mostly small steps, with some
// jumps), and for each query that becomes current it
//   * compares the operand buffer with the generated operands of that query,
//   * issues random 2x2 reads, mostly inside the region and sometimes just
//     outside it (victim path) or off the map (zero padding), holding each
//     read until rd_hit and comparing all corners and channels with the
//     generated feature maps,
//   * releases the buffer.
// After the run, stat_hit and stat_miss must equal the model's counts of
// in-map region pixels shared with / new relative to the previous query's
// region (the incremental fetch), and every memory request must be an
// operand beat, a region miss or a victim fetch.  Timing: a read inside the
// region must hit in the same cycle, and while the core spends 1500 cycles
// per query the next query must be ready the cycle after cur_done (the
// prefetch is hidden behind computation).
module tb_feature_cache;
  import quill_pkg::*;
  import tb_quill_pkg::*;

  localparam int D = 32, M = 4, L = 4, K = 2, PD = 2, R = 4, QW = 15;
  localparam int NS = L * K, NS_TOT = M * L * K, S = 2 * R + 2, SPREAD = 3;
  localparam int OPB = (NS_TOT * 48 + D * 8 - 1) / (D * 8);
  localparam int N = 24;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic flush = 0, nq_valid = 0, nq_ready, cur_valid, cur_done = 0, rd_en = 0, rd_hit;
  logic [QW-1:0] nq_qid = '0, cur_qid;
  logic [PW-1:0] nq_px = '0, nq_py = '0, cur_px, cur_py;
  logic [NS_TOT*48-1:0] cur_opnd;
  logic signed [CW-1:0] rd_x0 [NS], rd_y0 [NS];
  logic [$clog2(D/PD)-1:0] rd_ch = '0;
  logic signed [7:0] rd_data [NS][4][PD];
  logic mem_req_valid, mem_req_ready, mem_rsp_valid;
  logic [31:0] mem_req_addr, stat_hit, stat_miss, stat_victim;
  logic [D*8-1:0] mem_rsp_data;
  int nreq;

  feature_cache #(.D(D), .M(M), .L(L), .K(K), .PD(PD), .R(R), .QW(QW)) dut (.*);

  ext_mem_model #(.D(D), .NS_TOT(NS_TOT), .SPREAD(SPREAD), .LAT(20)) u_mem (
    .clk, .req_valid(mem_req_valid), .req_ready(mem_req_ready), .req_addr(mem_req_addr),
    .rsp_valid(mem_rsp_valid), .rsp_data(mem_rsp_data), .nreq);

  int checks = 0, failures = 0;
  longint cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL %s", what); end
  endtask

  // reference point walk
  int wx [N], wy [N];
  function automatic int org(input int p, l, bit is_y);
    return ((p * int'(is_y ? LVL_H[l] : LVL_W[l])) >>> PFRAC) - R;
  endfunction
  function automatic bit inmap(input int l, x, y);
    return x >= 0 && y >= 0 && x < int'(LVL_W[l]) && y < int'(LVL_H[l]);
  endfunction

  // scheduler side: offer queries in order
  initial begin
    wait (rst_n);
    for (int q = 0; q < N; q++) begin
      @(negedge clk);
      nq_valid = 1; nq_qid = QW'(q); nq_px = PW'(wx[q]); nq_py = PW'(wy[q]);
      @(posedge clk);
      while (!nq_ready) @(posedge clk);
      #1 nq_valid = 0;
    end
  end

  int n_vic_reads = 0, n_slow = 0;
  initial begin
    int exp_hit, exp_miss;
    // walk: small steps with a jump every 8 queries; the first query sits in
    // a corner so that part of its region lies off the map
    wx[0] = 20; wy[0] = 30;
    for (int q = 1; q < N; q++) begin
      if (q % 8 == 0) begin wx[q] = int'($urandom % 4096); wy[q] = int'($urandom % 4096); end
      else begin
        wx[q] = (wx[q-1] + int'($urandom % 61)) % 4096;
        wy[q] = (wy[q-1] + int'($urandom % 61)) % 4096;
      end
    end
    // model of the incremental fetch
    exp_hit = 0; exp_miss = 0;
    for (int q = 0; q < N; q++)
      for (int l = 0; l < L; l++)
        for (int y = 0; y < S; y++)
          for (int x = 0; x < S; x++) begin
            int ax, ay;
            ax = org(wx[q], l, 0) + x; ay = org(wy[q], l, 1) + y;
            if (inmap(l, ax, ay)) begin
              if (q > 0 && ax - org(wx[q-1], l, 0) >= 0 && ax - org(wx[q-1], l, 0) < S &&
                  ay - org(wy[q-1], l, 1) >= 0 && ay - org(wy[q-1], l, 1) < S) exp_hit++;
              else exp_miss++;
            end
          end
    for (int s = 0; s < NS; s++) begin rd_x0[s] = '0; rd_y0[s] = '0; end
    repeat (3) @(negedge clk);
    rst_n = 1;
    flush = 1; @(negedge clk); flush = 0;
    for (int q = 0; q < N; q++) begin
      logic [MAXS*48-1:0] ov;
      bit slow;
      slow = q < N / 2;
      while (!cur_valid) @(negedge clk);
      check(int'(cur_qid) == q, $sformatf("current query %0d, expected %0d", cur_qid, q));
      check(int'(cur_px) == wx[q] && int'(cur_py) == wy[q], $sformatf("query %0d reference point", q));
      ov = opnd_vec(q, NS_TOT, SPREAD);
      check(cur_opnd == ov[NS_TOT*48-1:0], $sformatf("query %0d operands", q));
      for (int r = 0; r < 40; r++) begin
        int mode, waited;
        bit ok;
        mode = int'($urandom % 8);   // 0: near outside region, 1: anywhere, else inside
        for (int s = 0; s < NS; s++) begin
          int l, ox, oy, x, y;
          l = s / K;
          ox = org(wx[q], l, 0); oy = org(wy[q], l, 1);
          if (mode == 0 && s == 0) begin
            x = ox - 3 + int'($urandom % (S + 5)); y = oy + S - 1 + int'($urandom % 3);
          end else if (mode == 1 && s == 1) begin
            x = int'($urandom % (LVL_W[l] + 4)) - 2; y = int'($urandom % (LVL_H[l] + 4)) - 2;
          end else begin
            x = ox + int'($urandom % (S - 1)); y = oy + int'($urandom % (S - 1));
          end
          rd_x0[s] = CW'(x); rd_y0[s] = CW'(y);
        end
        rd_ch = $bits(rd_ch)'($urandom % (D / PD));
        rd_en = 1;
        #1;
        waited = 0;
        if (mode >= 2) check(rd_hit, "in-region read did not hit in the same cycle");
        while (!rd_hit && waited < 2000) begin @(negedge clk); #1; waited++; end
        if (waited > 0) n_vic_reads++;
        check(rd_hit, "read never completed");
        ok = 1'b1;
        for (int s = 0; s < NS; s++)
          for (int j = 0; j < 4; j++)
            for (int c = 0; c < PD; c++) begin
              int x, y, e;
              x = int'(rd_x0[s]) + (j & 1); y = int'(rd_y0[s]) + (j >> 1);
              e = inmap(s / K, x, y) ? feat(s / K, x, y, int'(rd_ch) * PD + c) : 0;
              if (int'(rd_data[s][j][c]) != e) begin
                if (ok && failures < 10)
                  $display("q %0d s %0d corner %0d (%0d,%0d) ch %0d: got %0d want %0d",
                           q, s, j, x, y, int'(rd_ch) * PD + c, rd_data[s][j][c], e);
                ok = 1'b0;
              end
            end
        check(ok, $sformatf("query %0d read %0d data", q, r));
        @(negedge clk);
      end
      rd_en = 0;
      if (slow) repeat (1500) @(negedge clk);
      cur_done = 1; @(negedge clk); cur_done = 0;
      if (slow && q < N - 1) begin
        if (!cur_valid) n_slow++;
      end
    end
    repeat (5) @(negedge clk);
    $display("hit=%0d (model %0d) miss=%0d (model %0d) victim=%0d victim_reads=%0d mem_reads=%0d",
             stat_hit, exp_hit, stat_miss, exp_miss, stat_victim, n_vic_reads, nreq);
    check(int'(stat_hit) == exp_hit, "hit count differs from the incremental-fetch model");
    check(int'(stat_miss) == exp_miss, "miss count differs from the incremental-fetch model");
    check(nreq == N * OPB + int'(stat_miss) + int'(stat_victim), "memory requests not accounted for");
    check(stat_victim > 0, "victim path never used");
    check(n_slow == 0, $sformatf("%0d prefetches not hidden behind a 1500-cycle query", n_slow));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    while (cyc < 400000) @(posedge clk);
    failures++;
    $display("watchdog: timeout");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

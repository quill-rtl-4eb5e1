// tb_msda_core: checks the fused MSDeformAttn core against the reference.
//
// Configuration D = 32, M = 4, L = 4, K = 2.  The testbench models the
// feature cache's read port (combinational; the level maps are the generated
// features, zero off the map) and the W'' SRAM (one-cycle read).  Twelve
// queries are presented one after another; every output row written to the
// output SRAM is compared exactly with tb_quill_pkg's reference
// MSDeformAttn.  The first six queries see a cache that always hits, the
// rest one that refuses about one read in four.
// Timing: each query must use exactly D/PD served read cycles (one
// (1,PD) x (PD,D) step per cycle); with an always-hitting cache these must
// be D/PD consecutive cycles, and stat_stall must equal the refused reads.
module tb_msda_core;
  import quill_pkg::*;
  import tb_quill_pkg::*;

  localparam int D = 32, M = 4, L = 4, K = 2, PD = 2, QW = 15, SPREAD = 3;
  localparam int NS = L * K, NT = M * NS, NC = D / PD, N = 12;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic cur_valid = 0, cur_done, rd_en, rd_hit, w_re, o_we;
  logic [QW-1:0] cur_qid = '0, o_waddr;
  logic [PW-1:0] cur_px = '0, cur_py = '0;
  logic [NT*48-1:0] cur_opnd = '0;
  logic signed [CW-1:0] rd_x0 [NS], rd_y0 [NS];
  logic [$clog2(D/PD)-1:0] rd_ch, w_raddr;
  logic signed [7:0] rd_data [NS][4][PD];
  logic [D*PD*8-1:0] w_rdata;
  logic [D*8-1:0] o_wdata;
  logic [31:0] stat_stall, stat_query;

  msda_core #(.D(D), .M(M), .L(L), .K(K), .PD(PD), .QW(QW)) dut (.*);

  // cache read-port model
  bit refuse = 1'b0;
  always_comb begin
    for (int s = 0; s < NS; s++)
      for (int j = 0; j < 4; j++)
        for (int c = 0; c < PD; c++) begin
          int x, y;
          x = int'(rd_x0[s]) + (j & 1); y = int'(rd_y0[s]) + (j >> 1);
          if (x >= 0 && y >= 0 && x < int'(LVL_W[s / K]) && y < int'(LVL_H[s / K]))
            rd_data[s][j][c] = 8'(feat(s / K, x, y, int'(rd_ch) * PD + c));
          else rd_data[s][j][c] = '0;
        end
  end
  assign rd_hit = !refuse;

  // W'' SRAM model
  always @(posedge clk)
    if (w_re)
      for (int j = 0; j < D; j++)
        for (int p = 0; p < PD; p++)
          w_rdata[(j*PD+p)*8 +: 8] <= 8'(wmat(int'(w_raddr) * PD + p, j));

  int checks = 0, failures = 0;
  longint cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL %s", what); end
  endtask

  // per-query monitors
  int served = 0, refused = 0, first_rd = -1, last_rd = -1, cur_q = 0, n_written = 0;
  bit stall_mode = 1'b0;
  always @(posedge clk) if (rst_n) begin
    if (rd_en && rd_hit) begin
      served++;
      if (first_rd < 0) first_rd = int'(cyc);
      last_rd = int'(cyc);
    end
    if (rd_en && !rd_hit) refused++;
    if (o_we) begin
      int ref_out[MAXD];
      bit ok;
      ref_msda(cur_q, refpt(cur_q, 0), refpt(cur_q, 1), D, M, K, SPREAD, 8, ref_out);
      check(int'(o_waddr) == cur_q, $sformatf("output address %0d for query %0d", o_waddr, cur_q));
      ok = 1'b1;
      for (int j = 0; j < D; j++)
        if (int'(signed'(o_wdata[j*8 +: 8])) != ref_out[j]) begin
          if (ok && failures < 10)
            $display("query %0d ch %0d: got %0d want %0d", cur_q, j, signed'(o_wdata[j*8 +: 8]), ref_out[j]);
          ok = 1'b0;
        end
      check(ok, $sformatf("output row of query %0d", cur_q));
      check(served == NC, $sformatf("query %0d used %0d read cycles, expected %0d", cur_q, served, NC));
      if (!stall_mode)
        check(last_rd - first_rd == NC - 1, $sformatf("query %0d reads spread over %0d cycles", cur_q, last_rd - first_rd + 1));
      served = 0; first_rd = -1; n_written++;
    end
    refuse <= stall_mode && (($urandom % 4) == 0);
  end

  initial begin
    logic [MAXS*48-1:0] ov;
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int q = 0; q < N; q++) begin
      stall_mode = q >= N / 2;
      cur_q = q;
      ov = opnd_vec(q, NT, SPREAD);
      cur_qid = QW'(q); cur_px = PW'(refpt(q, 0)); cur_py = PW'(refpt(q, 1));
      cur_opnd = ov[NT*48-1:0];
      cur_valid = 1;
      @(posedge clk);
      while (!cur_done) @(posedge clk);
      #1 cur_valid = 0;
      @(negedge clk);
    end
    repeat (3) @(negedge clk);
    check(n_written == N, $sformatf("%0d of %0d rows written", n_written, N));
    check(int'(stat_query) == N, "query count");
    check(int'(stat_stall) == refused, $sformatf("stall count %0d, refused reads %0d", stat_stall, refused));
    check(refused > 0, "stall never exercised");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    while (cyc < 100000) @(posedge clk);
    failures++;
    $display("watchdog: timeout");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

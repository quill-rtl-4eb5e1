// tb_gather_scatter: checks the output drain of the gather-scatter unit.
//
// A small configuration (D = 8 channels, 64-entry buffer) is loaded with a
// random permutation of token indices; a behavioural output SRAM (one-cycle
// read latency) holds a distinct pattern per row.  Two drains run, one with
// wr_ready always high and one with wr_ready random.  Every write must carry
// row q of the SRAM to OUT_BASE + idx[q], in order q = 0..n-1, once each.
// With wr_ready always high the drain must take n + 1 cycles from start until
// done is seen (one row per cycle plus the read latency).
module tb_gather_scatter;
  localparam int D = 8, NQ = 64, QW = 6, OUT_BASE = 65536;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic idx_we = 0, start = 0, done, o_re, wr_valid, wr_ready = 1'b1;
  logic [QW-1:0] idx_waddr = '0, idx_wdata = '0, o_raddr;
  logic [QW:0] n = '0;
  logic [D*8-1:0] o_rdata, wr_data;
  logic [31:0] wr_addr;

  gather_scatter #(.D(D), .NQ(NQ), .QW(QW), .OUT_BASE(OUT_BASE)) dut (.*);

  function automatic logic [D*8-1:0] row(input int q);
    logic [D*8-1:0] r;
    for (int c = 0; c < D; c++) r[c*8 +: 8] = 8'(q * 13 + c * 7 + 1);
    return r;
  endfunction

  // output SRAM model, one-cycle read
  always @(posedge clk) if (o_re) o_rdata <= row(int'(o_raddr));

  int checks = 0, failures = 0, perm [NQ], seen = 0;
  bit rand_ready = 1'b0;
  longint cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL %s", what); end
  endtask

  always @(posedge clk) if (rst_n) begin
    if (wr_valid && wr_ready) begin
      check(wr_addr == 32'(OUT_BASE + perm[seen]), $sformatf("row %0d address %0d", seen, wr_addr));
      check(wr_data == row(seen), $sformatf("row %0d data", seen));
      seen++;
    end
    wr_ready <= rand_ready ? (($urandom % 3) != 0) : 1'b1;
  end

  task automatic drain(input int nn);
    longint t0;
    seen = 0;
    n = (QW+1)'(nn);
    start = 1; @(negedge clk); start = 0;
    t0 = cyc;
    wait (done);
    @(negedge clk);
    check(seen == nn, $sformatf("%0d of %0d rows written", seen, nn));
    if (!rand_ready)
      check(cyc - t0 == longint'(nn + 1), $sformatf("drain took %0d cycles for %0d rows", cyc - t0, nn));
  endtask

  initial begin
    for (int i = 0; i < NQ; i++) perm[i] = i;
    for (int i = NQ - 1; i > 0; i--) begin
      int j, t;
      j = int'($urandom % (i + 1)); t = perm[i]; perm[i] = perm[j]; perm[j] = t;
    end
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int i = 0; i < NQ; i++) begin
      idx_we = 1; idx_waddr = QW'(i); idx_wdata = QW'(perm[i]);
      @(negedge clk);
    end
    idx_we = 0;
    drain(NQ);
    rand_ready = 1'b1;
    repeat (2) @(negedge clk);
    drain(37);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    while (cyc < 20000) @(posedge clk);
    failures++;
    $display("watchdog: timeout");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

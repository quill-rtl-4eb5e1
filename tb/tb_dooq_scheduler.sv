// tb_dooq_scheduler: checks the DOOQ scheduler against a software model of
// the greedy nearest-neighbour order (l1 distance, ties to the lower query
// id, window refilled in stored order), with random output back-pressure in
// a first pass and none in a second pass, where the emit interval of
// 1 + log2(WD)(log2(WD)+1)/2 + 1 cycles is checked.
module tb_dooq_scheduler;
  import quill_pkg::*;
  localparam int WD = 8, QW = 15, N = 40;
  localparam int STEP = 1 + 6 + 1;

  logic clk = 0, rst_n = 0, start = 0;
  always #5 clk = ~clk;
  logic in_valid, in_ready, in_last, out_valid, out_ready, done;
  logic [PW-1:0] in_x, in_y, out_x, out_y;
  logic [QW-1:0] in_qid, out_qid;
  logic [PW:0] out_dist;

  dooq_scheduler #(.WD(WD), .QW(QW)) dut (.*);

  int px [N], py [N];
  int ptr, checks = 0, failures = 0;
  longint cyc = 0;
  bit rand_ready;
  always @(posedge clk) cyc <= cyc + 1;

  assign in_valid = (ptr < N);
  assign in_x = PW'(px[ptr < N ? ptr : 0]);
  assign in_y = PW'(py[ptr < N ? ptr : 0]);
  assign in_qid = QW'(ptr);
  assign in_last = (ptr == N - 1);
  always @(posedge clk) begin
    if (in_valid && in_ready) ptr <= ptr + 1;
    out_ready <= rand_ready ? (($urandom % 3) != 0) : 1'b1;
  end

  // reference order
  int exp_q [N];
  task automatic model();
    int win [$], nxt, cur, best, bd, d;
    exp_q[0] = 0; cur = 0; nxt = 1;
    while (nxt < N && win.size() < WD) begin win.push_back(nxt); nxt++; end
    for (int e = 1; e < N; e++) begin
      best = -1; bd = 0;
      foreach (win[i]) begin
        d = (px[win[i]] > px[cur] ? px[win[i]] - px[cur] : px[cur] - px[win[i]])
          + (py[win[i]] > py[cur] ? py[win[i]] - py[cur] : py[cur] - py[win[i]]);
        if (best < 0 || d < bd || (d == bd && win[i] < win[best])) begin best = i; bd = d; end
      end
      exp_q[e] = win[best]; cur = win[best];
      win.delete(best);
      if (nxt < N) begin win.push_back(nxt); nxt++; end
    end
  endtask

  task automatic run_pass(input bit rr, input int seed);
    int got;
    longint last_t;
    for (int i = 0; i < N; i++) begin px[i] = int'($urandom % 4096); py[i] = int'($urandom % 4096); end
    if (seed == 1) begin px[5] = px[3]; py[5] = py[3]; end   // an exact tie
    model();
    rand_ready = rr;
    ptr = 0;
    @(negedge clk); start = 1; @(negedge clk); start = 0;
    got = 0; last_t = 0;
    while (got < N) begin
      @(posedge clk);
      if (out_valid && out_ready) begin
        checks++;
        if (int'(out_qid) != exp_q[got]) begin
          failures++;
          $display("pass %0d emit %0d: got q%0d want q%0d", seed, got, out_qid, exp_q[got]);
        end
        if (!rr && got > 2) begin
          checks++;
          if (cyc - last_t != STEP) begin failures++; $display("interval %0d", cyc - last_t); end
        end
        last_t = cyc;
        got++;
      end
    end
    repeat (3) @(posedge clk);
    checks++;
    if (!done) begin failures++; $display("done not raised"); end
  endtask

  initial begin
    ptr = 0; rand_ready = 0;
    repeat (2) @(negedge clk); rst_n = 1;
    run_pass(1'b1, 1);
    run_pass(1'b0, 2);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog timeout");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

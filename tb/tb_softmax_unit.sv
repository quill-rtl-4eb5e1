// tb_softmax_unit: random score vectors; the weights are compared with a
// real-valued Softmax (each weight within 1/256, sum within 1/128 of 1.0)
// and the latency from start to done must be 2*NS+2 cycles.
module tb_softmax_unit;
  import quill_pkg::*;
  localparam int NS = 16;
  logic clk = 0, rst_n = 0, start = 0, busy, done;
  always #5 clk = ~clk;
  logic signed [SCW-1:0] scores [NS];
  logic [AW-1:0] weights [NS];
  softmax_unit #(.NS(NS)) dut (.*);
  int checks = 0, failures = 0;
  initial begin
    repeat (2) @(negedge clk); rst_n = 1;
    for (int t = 0; t < 200; t++) begin
      real e[NS], s, w;
      int lat, sum;
      int range;
      range = (t % 4 == 0) ? 8192 : 2048;
      for (int i = 0; i < NS; i++) scores[i] = SCW'(int'($urandom % range) - range / 2);
      @(negedge clk); start = 1; @(negedge clk); start = 0;
      lat = 1;
      while (!done) begin @(negedge clk); lat++; end
      checks++;
      if (lat != 2 * NS + 2) begin failures++; $display("latency %0d", lat); end
      s = 0;
      for (int i = 0; i < NS; i++) begin e[i] = $exp(real'(scores[i]) / 256.0); s += e[i]; end
      sum = 0;
      for (int i = 0; i < NS; i++) begin
        w = e[i] / s * 65536.0;
        sum += weights[i];
        checks++;
        if (real'(weights[i]) - w > 256.0 || w - real'(weights[i]) > 256.0) begin
          failures++;
          if (failures < 5) $display("t%0d i%0d: got %0d want %f", t, i, weights[i], w);
        end
      end
      checks++;
      if (sum > 65536 + 512 || sum < 65536 - 512) begin failures++; $display("sum %0d", sum); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin #1000000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule

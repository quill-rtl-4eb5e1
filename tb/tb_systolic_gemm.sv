// tb_systolic_gemm: random 8x8 products with depths 1..12 (including
// back-to-back products separated by clear); each row of C is compared with
// a software product, read 2*(SIZE-1)+1 cycles after the last input, and the
// result must not yet be complete one cycle earlier.
module tb_systolic_gemm;
  localparam int SIZE = 8;
  logic clk = 0, rst_n = 0, clear = 0, in_valid = 0;
  always #5 clk = ~clk;
  logic signed [7:0] a_col [SIZE], b_row [SIZE];
  logic [$clog2(SIZE)-1:0] c_sel = '0;
  logic signed [31:0] c_row [SIZE];
  systolic_gemm #(.SIZE(SIZE)) dut (.*);
  int checks = 0, failures = 0;
  int a [SIZE][12], b [12][SIZE];
  int nbad, ev;
  initial begin
    for (int i = 0; i < SIZE; i++) begin a_col[i] = 0; b_row[i] = 0; end
    repeat (2) @(negedge clk); rst_n = 1;
    for (int t = 0; t < 12; t++) begin
      int kd;
      kd = t + 1;
      for (int i = 0; i < SIZE; i++) for (int k = 0; k < kd; k++) begin
        a[i][k] = int'($urandom % 256) - 128; b[k][i] = int'($urandom % 256) - 128;
      end
      @(negedge clk);   // realign after the #1 read delays
      clear = 1; @(negedge clk); clear = 0;
      for (int k = 0; k < kd; k++) begin
        in_valid = 1;
        for (int i = 0; i < SIZE; i++) begin a_col[i] = 8'(a[i][k]); b_row[i] = 8'(b[k][i]); end
        @(negedge clk);
      end
      in_valid = 0;
      repeat (2 * (SIZE - 1) - 1) @(negedge clk);
      // one cycle early: the far corner is not complete yet (unless zero)
      c_sel = $bits(c_sel)'(SIZE - 1); #1;
      begin
        int e;
        e = 0;
        for (int k = 0; k < kd; k++) e += a[SIZE-1][k] * b[k][SIZE-1];
        checks++;
        if (e != 0 && c_row[SIZE-1] == e) begin failures++; $display("result too early"); end
      end
      @(negedge clk);
      for (int i = 0; i < SIZE; i++) begin
        c_sel = $bits(c_sel)'(i); #1;
        nbad = 0;
        for (int j = 0; j < SIZE; j++) begin
          ev = 0;
          for (int k = 0; k < kd; k++) ev += a[i][k] * b[k][j];
          if (c_row[j] != ev) nbad++;
        end
        checks++;
        if (nbad != 0) begin failures++; if (failures < 5) $display("t%0d row %0d: %0d wrong", t, i, nbad); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin #1000000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule

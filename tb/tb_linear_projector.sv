// tb_linear_projector: a random 16x16 W'' (PD=2) and random aggregated
// inputs over all D/PD row groups of several queries; accumulators and
// saturated outputs are compared with a matrix-vector product, and one row
// group per cycle is applied (D/PD cycles per query).
module tb_linear_projector;
  localparam int D = 16, PD = 2, SH = 8;
  logic clk = 0, rst_n = 0, clear = 0, en = 0;
  always #5 clk = ~clk;
  logic signed [7:0] x [PD];
  logic [D*PD*8-1:0] wrow;
  logic signed [23:0] acc [D];
  logic [D*8-1:0] out8;
  linear_projector #(.D(D), .PD(PD), .OUT_SHIFT(SH)) dut (.*);
  int checks = 0, failures = 0;
  int w [D][D], v [D];
  initial begin
    repeat (2) @(negedge clk); rst_n = 1;
    for (int t = 0; t < 20; t++) begin
      for (int i = 0; i < D; i++) begin
        v[i] = int'($urandom % 256) - 128;
        for (int j = 0; j < D; j++) w[i][j] = int'($urandom % 256) - 128;
      end
      clear = 1; @(negedge clk); clear = 0;
      for (int r = 0; r < D / PD; r++) begin
        en = 1;
        for (int p = 0; p < PD; p++) begin
          x[p] = 8'(v[r*PD+p]);
          for (int j = 0; j < D; j++) wrow[(j*PD+p)*8 +: 8] = 8'(w[r*PD+p][j]);
        end
        @(negedge clk);
      end
      en = 0;
      for (int j = 0; j < D; j++) begin
        int e, e8;
        e = 0;
        for (int i = 0; i < D; i++) e += v[i] * w[i][j];
        e8 = (e >>> SH) > 127 ? 127 : (e >>> SH) < -128 ? -128 : (e >>> SH);
        checks++;
        if (int'(acc[j]) != e || int'(signed'(out8[j*8 +: 8])) != e8) begin
          failures++;
          if (failures < 5) $display("t%0d j%0d acc %0d/%0d", t, j, acc[j], e);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin #100000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule

// tb_bilerp_agg: random corners, bilinear weights (summing to 256) and
// attention weights; the interpolated, aggregated and saturated outputs are
// recomputed in integer arithmetic and compared.
module tb_bilerp_agg;
  import quill_pkg::*;
  localparam int NS = 16, PD = 2;
  logic signed [7:0] corner [NS][4][PD];
  logic [BWW-1:0] bw [NS][4];
  logic [AW-1:0] attn [NS];
  logic signed [27:0] agg [PD];
  logic signed [7:0] agg8 [PD];
  bilerp_agg #(.NS(NS), .PD(PD)) dut (.*);
  int checks = 0, failures = 0;
  initial begin
    for (int t = 0; t < 500; t++) begin
      for (int s = 0; s < NS; s++) begin
        int fx, fy;
        fx = int'($urandom % 16); fy = int'($urandom % 16);
        bw[s][0] = BWW'((16-fx)*(16-fy)); bw[s][1] = BWW'(fx*(16-fy));
        bw[s][2] = BWW'((16-fx)*fy);      bw[s][3] = BWW'(fx*fy);
        attn[s] = (t % 3 == 0) ? 16'hFFFF : AW'($urandom % 8192);
        for (int j = 0; j < 4; j++) for (int c = 0; c < PD; c++) corner[s][j][c] = 8'($urandom);
      end
      #1;
      for (int c = 0; c < PD; c++) begin
        longint g;
        int e8;
        g = 0;
        for (int s = 0; s < NS; s++) begin
          int b;
          b = 0;
          for (int j = 0; j < 4; j++) b += int'(bw[s][j]) * int'(corner[s][j][c]);
          g += longint'(attn[s]) * longint'(b >>> 8);
        end
        e8 = (g >>> 16) > 127 ? 127 : (g >>> 16) < -128 ? -128 : int'(g >>> 16);
        checks++;
        if (longint'(agg[c]) != g || int'(agg8[c]) != e8) begin
          failures++;
          if (failures < 5) $display("t%0d c%0d: agg %0d/%0d agg8 %0d/%0d", t, c, agg[c], g, agg8[c], e8);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin #100000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule

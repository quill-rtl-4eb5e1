// tb_index_weight_gen: random reference points, offsets and levels; the
// corner and weights are recomputed with real arithmetic (position truncated
// to 1/16 pixel) and compared.  Also checks that the weights sum to 256.
module tb_index_weight_gen;
  import quill_pkg::*;
  logic [PW-1:0] px, py;
  logic signed [OFFW-1:0] dx, dy;
  logic [1:0] level;
  sample_t smp;
  index_weight_gen dut (.*);
  int checks = 0, failures = 0;
  initial begin
    for (int t = 0; t < 2000; t++) begin
      real ux, uy;
      int x0, y0, fx, fy;
      px = PW'($urandom); py = PW'($urandom);
      dx = OFFW'(int'($urandom % 257) - 128); dy = OFFW'(int'($urandom % 257) - 128);
      level = 2'($urandom);
      #1;
      ux = $floor(real'(px) * real'(LVL_W[level]) / 256.0) / 16.0 - 0.5 + real'(dx) / 16.0;
      uy = $floor(real'(py) * real'(LVL_H[level]) / 256.0) / 16.0 - 0.5 + real'(dy) / 16.0;
      x0 = int'($floor(ux)); y0 = int'($floor(uy));
      fx = int'((ux - x0) * 16.0); fy = int'((uy - y0) * 16.0);
      checks++;
      if (int'(smp.x0) != x0 || int'(smp.y0) != y0 || int'(smp.w00) != (16-fx)*(16-fy) ||
          int'(smp.w01) != fx*(16-fy) || int'(smp.w10) != (16-fx)*fy || int'(smp.w11) != fx*fy ||
          smp.w00 + smp.w01 + smp.w10 + smp.w11 != 256) begin
        failures++;
        if (failures < 5) $display("px=%0d dx=%0d l=%0d: x0 %0d/%0d y0 %0d/%0d w00 %0d", px, dx, level, smp.x0, x0, smp.y0, y0, smp.w00);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin #100000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule

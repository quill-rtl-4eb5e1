// tb_quill_top: end-to-end test of the accelerator at a reduced size
// (D=32 channels, M=4 heads, K=2 points, window 16, 40 queries); see
// tb_quill_env for what is checked.
module tb_quill_top;
  tb_quill_env #(.FULL(1'b0), .D(32), .M(4), .K(2), .WD(16), .NQ(128),
                 .PRE(4), .POST(8), .N(40), .SPREAD(3), .MAX_CYCLES(400000)) env ();
endmodule

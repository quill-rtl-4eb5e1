// tb_quill_full: end-to-end test with the accelerator at its default size
// (D=256, M=8, L=4, K=4, window 512, 20097-entry SRAMs, 32x32 and 64x64
// GEMMs), running one decoder-sized pass of 300 queries; see tb_quill_env
// for what is checked.
module tb_quill_full;
  tb_quill_env #(.FULL(1'b1), .D(256), .M(8), .K(4), .WD(512), .NQ(20097),
                 .PRE(32), .POST(64), .N(300), .SPREAD(3), .MAX_CYCLES(2000000)) env ();
endmodule

// bilerp_agg: bilinear interpolation and attention-weighted aggregation.
//
// One cycle of the fused core's vector datapath for one head and PD channels.
// For each of the NS = L*K sampling points it receives the four corner
// features (signed 8-bit, PD channels each) and the four bilinear weights
// (sum 256), and forms, per channel, with four multipliers and three adders,
//     b = w00*x00 + w01*x01 + w10*x10 + w11*x11      (18-bit, "A18")
//     v = b >>> 8                                      (back to 8 bits)
// The NS interpolated values are weighted by the Softmax outputs A (Q0.16)
// and summed in an adder tree,
//     g = sum_i A_i * v_i                              (28-bit, "A28")
// and g >>> 16, saturated to 8 bits, goes to the projector.  Purely
// combinational.  The structure (per-sample BiLerp trees feeding one
// aggregation tree, the same weights broadcast across channels) follows the
// paper; the rounding (floor) and saturation are this design's choices.
module bilerp_agg
  import quill_pkg::*;
#(
  parameter int unsigned NS = L_DEF * K_DEF,
  parameter int unsigned PD = PD_DEF
) (
  input  logic signed [7:0]     corner [NS][4][PD],  // [sample][00,01,10,11][channel]
  input  logic [BWW-1:0]        bw     [NS][4],      // bilinear weights
  input  logic [AW-1:0]         attn   [NS],         // Softmax weights
  output logic signed [27:0]    agg    [PD],         // full-precision sum
  output logic signed [7:0]     agg8   [PD]          // to the projector
);
  always_comb begin
    for (int c = 0; c < PD; c++) begin
      logic signed [27:0] acc;
      acc = '0;
      for (int s = 0; s < NS; s++) begin
        logic signed [17:0] b;
        logic signed [7:0]  v;
        b = '0;
        for (int j = 0; j < 4; j++)
          b = b + 18'(signed'({1'b0, bw[s][j]}) * 18'(corner[s][j][c]));
        v = 8'(b >>> 8);
        acc = acc + 28'(signed'({1'b0, attn[s]}) * 28'(v));
      end
      agg[c] = acc;
      if ((acc >>> 16) > 28'sd127)       agg8[c] = 8'sd127;
      else if ((acc >>> 16) < -28'sd128) agg8[c] = -8'sd128;
      else                               agg8[c] = 8'(acc >>> 16);
    end
  end
endmodule

// linear_projector: output projection by the folded matrix W'' = W_m * W_m'.
//
// Each enabled cycle multiplies the PD aggregated values of the current
// head/channel slice (signed 8-bit) by one row group of W'' (D outputs x PD
// inputs, signed 8-bit) and adds the D products into D accumulators:
//     acc[j] += sum_p x[p] * W''[i0 + p][j]        (a (1,PD) x (PD,D) step)
// After all D/PD row groups of a query, out8[j] = sat8(acc[j] >>> OUT_SHIFT)
// is the query's output row.  clear zeroes the accumulators (takes priority
// over en).  The row word packs W''[i0+p][j] at bits [(j*PD+p)*8 +: 8].
// Accumulators are 24 bits, enough for D=256 products of two 8-bit values.
// The (1,p_d)x(p_d,D) per-cycle step and the (D/p_d, D, p_d) weight layout
// follow the paper; the output shift and saturation are this design's choices.
module linear_projector
  import quill_pkg::*;
#(
  parameter int unsigned D         = D_DEF,
  parameter int unsigned PD        = PD_DEF,
  parameter int unsigned OUT_SHIFT = 8
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 clear,
  input  logic                 en,
  input  logic signed [7:0]    x    [PD],
  input  logic [D*PD*8-1:0]    wrow,
  output logic signed [23:0]   acc  [D],
  output logic [D*8-1:0]       out8
);
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int j = 0; j < D; j++) acc[j] <= '0;
    end else if (clear) begin
      for (int j = 0; j < D; j++) acc[j] <= '0;
    end else if (en) begin
      for (int j = 0; j < D; j++) begin
        logic signed [23:0] s;
        s = acc[j];
        for (int p = 0; p < PD; p++)
          s = s + 24'(x[p]) * 24'(signed'(wrow[(j*PD+p)*8 +: 8]));
        acc[j] <= s;
      end
    end
  end

  always_comb begin
    for (int j = 0; j < D; j++) begin
      logic signed [23:0] r;
      r = acc[j] >>> OUT_SHIFT;
      if (r > 24'sd127)       out8[j*8 +: 8] = 8'h7F;
      else if (r < -24'sd128) out8[j*8 +: 8] = 8'h80;
      else                    out8[j*8 +: 8] = r[7:0];
    end
  end
endmodule

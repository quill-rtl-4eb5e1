// index_weight_gen: index and weight generator of the fused core.
//
// For one sampling point it turns the query's reference point p (normalised,
// Q0.12) and the point's offset dp (pixels of level l, Q11.4) into the
// top-left corner (x0,y0) of the 2x2 neighbourhood and the four bilinear
// weights.  The sampling position in level pixels is
//     u = p * W_l - 0.5 + dp          (grid-sample convention, corners at
//                                     pixel centres)
// kept with SFRAC=4 fraction bits; x0 = floor(u), fx = frac(u), and
//     w00 = (16-fx)(16-fy)  w01 = fx(16-fy)  w10 = (16-fx)fy  w11 = fx*fy
// so the four weights always sum to 256.  The unit is combinational; the core
// shares one instance over the M*L*K samples of a query, one per cycle.
// That the generators produce 2x2 coordinates and weights follows the paper;
// the fixed-point formats and the -0.5 convention are this design's choices.
module index_weight_gen
  import quill_pkg::*;
(
  input  logic [PW-1:0]          px,     // reference point x, Q0.12
  input  logic [PW-1:0]          py,     // reference point y, Q0.12
  input  logic signed [OFFW-1:0] dx,     // offset x, Q11.4 level pixels
  input  logic signed [OFFW-1:0] dy,     // offset y, Q11.4 level pixels
  input  logic [1:0]             level,  // feature level 0..3
  output sample_t                smp
);
  localparam int unsigned UW = 20;

  logic [7:0]            wl, hl;
  logic [PW+7:0]         sx, sy;
  logic signed [UW-1:0]  ux, uy;
  logic [SFRAC-1:0]      fx, fy;
  logic [SFRAC:0]        gx, gy;

  always_comb begin
    wl = 8'(LVL_W[level]);
    hl = 8'(LVL_H[level]);
    sx = px * wl;
    sy = py * hl;
    ux = UW'(signed'({1'b0, sx[PW+7:PFRAC-SFRAC]})) - UW'(1 << (SFRAC-1)) + UW'(dx);
    uy = UW'(signed'({1'b0, sy[PW+7:PFRAC-SFRAC]})) - UW'(1 << (SFRAC-1)) + UW'(dy);
    fx = ux[SFRAC-1:0];
    fy = uy[SFRAC-1:0];
    gx = (SFRAC+1)'(1 << SFRAC) - (SFRAC+1)'(fx);
    gy = (SFRAC+1)'(1 << SFRAC) - (SFRAC+1)'(fy);
    smp.x0  = CW'(ux >>> SFRAC);
    smp.y0  = CW'(uy >>> SFRAC);
    smp.w00 = BWW'(gx * gy);
    smp.w01 = BWW'(fx * gy);
    smp.w10 = BWW'(gx * fy);
    smp.w11 = BWW'(fx * fy);
  end
endmodule

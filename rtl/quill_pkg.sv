// quill_pkg: constants and fixed-point formats shared by the deformable-
// attention accelerator.
//
// Model shape (D, M, L, K) and the DOOQ window follow the evaluated
// configuration: D=256 channels, M=8 heads, L=4 feature levels, K=4 sampling
// points per level and head, lookup window w_d=512.  The per-level map sizes
// are the usual Deformable-DETR COCO sizes whose token count is 20097
// (100x151 + 50x76 + 25x38 + 13x19); the per-level sizes themselves are this
// design's choice, only their sum appears as the encoder query count.
//
// Number formats (this design's choice where the evaluation only names the
// precision classes W8A8->A18 and W16A8->A28):
//   reference point p   : unsigned Q0.12 per coordinate, normalised to [0,1)
//   sampling offset dp  : signed 16-bit Q11.4, in pixels of its level
//   feature value x     : signed 8-bit
//   bilinear weight wij : unsigned 9-bit, the four weights sum to 256
//   attention score A'  : signed 16-bit Q7.8
//   attention weight A  : unsigned 16-bit Q0.16 (Softmax output)
//   W_m'' entry         : signed 8-bit
package quill_pkg;

  localparam int unsigned D_DEF   = 256;
  localparam int unsigned M_DEF   = 8;
  localparam int unsigned L_DEF   = 4;
  localparam int unsigned K_DEF   = 4;
  localparam int unsigned PD_DEF  = 2;
  localparam int unsigned WD_DEF  = 512;
  localparam int unsigned NQ_DEF  = 20097;

  localparam int unsigned PFRAC   = 12;   // fraction bits of a reference point
  localparam int unsigned PW      = 12;   // width of a reference-point coordinate
  localparam int unsigned OFFW    = 16;   // width of a sampling offset
  localparam int unsigned SFRAC   = 4;    // fraction bits of a sampling position
  localparam int unsigned CW      = 12;   // signed integer pixel coordinate width
  localparam int unsigned BWW     = 9;    // bilinear weight width
  localparam int unsigned SCW     = 16;   // attention score width
  localparam int unsigned AW      = 16;   // attention weight width

  // Level sizes, level 0 is the finest map.
  localparam int unsigned LVL_W [4] = '{151, 76, 38, 19};
  localparam int unsigned LVL_H [4] = '{100, 50, 25, 13};

  // Word-addressed external memory; one beat carries one pixel (D bytes).
  // Feature maps are stored row-major, level after level.
  function automatic int unsigned lvl_base(input int unsigned l);
    return (l > 0 ? LVL_W[0] * LVL_H[0] : 0) + (l > 1 ? LVL_W[1] * LVL_H[1] : 0)
         + (l > 2 ? LVL_W[2] * LVL_H[2] : 0);
  endfunction

  // Memory map (in beats): feature maps at 0, per-query operands after them.
  localparam int unsigned FEAT_WORDS = 20097;
  localparam int unsigned OPND_BASE  = 32768;

  typedef struct packed {
    logic signed [CW-1:0] x0;   // top-left corner column
    logic signed [CW-1:0] y0;   // top-left corner row
    logic [BWW-1:0]       w00;  // weight of (x0,  y0)
    logic [BWW-1:0]       w01;  // weight of (x0+1,y0)
    logic [BWW-1:0]       w10;  // weight of (x0,  y0+1)
    logic [BWW-1:0]       w11;  // weight of (x0+1,y0+1)
  } sample_t;

endpackage

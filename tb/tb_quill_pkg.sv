// tb_quill_pkg: stimulus generators and a reference model for the
// deformable-attention accelerator testbenches.
//
// All test data is computed from hash functions of its coordinates, so no
// data files are needed and every testbench can regenerate any value:
//   feature  x_l(x, y)[c]      = hash8(l, x, y, c)                (int8)
//   offset   dp(q, s) x/y      uniform in +-spread pixels, Q11.4
//   score    A'(q, s)          uniform in [-4, 4), Q7.8
//   weight   W''[i][j]         hash8 of (i, j), small range
// The reference MSDeformAttn below is written from the mathematical
// definition (real-valued sampling position, floor, bilinear weights, a
// Softmax with the same fixed-point Pade exponential, int8 requantisation);
// it shares no code with the RTL.
package tb_quill_pkg;
  import quill_pkg::*;

  localparam int MAXD = 256;
  localparam int MAXS = 8 * 4 * 4;   // M*L*K at most

  function automatic int unsigned hash32(input int unsigned a);
    int unsigned v;
    v = a ^ 32'h9E3779B9;
    v = v ^ (v >> 16); v = v * 32'h7FEB352D;
    v = v ^ (v >> 15); v = v * 32'h846CA68B;
    v = v ^ (v >> 16);
    return v;
  endfunction

  function automatic int feat(input int l, x, y, c);
    return int'(signed'(8'(hash32(32'(l * 1000003 + y * 40009 + x * 211 + c * 7 + 12345)))));
  endfunction

  function automatic int wmat(input int i, j);
    return int'(signed'(8'(hash32(32'(i * 7919 + j * 104729 + 99)) % 64))) - 32;
  endfunction

  function automatic int off(input int q, s, xy, spread);
    int unsigned h;
    h = hash32(32'(q * 65537 + s * 2 + xy + 777));
    // about one offset in 64 is an outlier reaching 4 pixels further
    if (((h >> 20) % 64) == 0) return int'(h % (2 * (spread + 4) * 16 + 1)) - (spread + 4) * 16;
    return int'(h % (2 * spread * 16 + 1)) - spread * 16;
  endfunction

  function automatic int score(input int q, s);
    return int'(hash32(32'(q * 31337 + s * 3 + 5)) % 2048) - 1024;
  endfunction

  // reference point of query q in Q0.12 (x when xy = 0)
  function automatic int refpt(input int q, xy);
    return int'(hash32(32'(q * 92821 + xy + 3)) % 4096);
  endfunction

  // flat operand vector of query q: dp then scores
  function automatic logic [MAXS*48-1:0] opnd_vec(input int q, ns_tot, spread);
    logic [MAXS*48-1:0] v;
    v = '0;
    for (int s = 0; s < ns_tot; s++) begin
      v[s*32 +: 16]      = 16'(off(q, s, 0, spread));
      v[s*32 + 16 +: 16] = 16'(off(q, s, 1, spread));
      v[ns_tot*32 + s*16 +: 16] = 16'(score(q, s));
    end
    return v;
  endfunction

  // external memory word at address a for a D-channel configuration
  function automatic logic [MAXD*8-1:0] mem_word(input int unsigned a, input int d, ns_tot, spread);
    logic [MAXD*8-1:0] w;
    int opb;
    w = '0;
    opb = (ns_tot * 48 + d * 8 - 1) / (d * 8);
    if (a < FEAT_WORDS) begin
      int l, r, x, y;
      l = 0; r = int'(a);
      while (r >= int'(LVL_W[l] * LVL_H[l])) begin r -= int'(LVL_W[l] * LVL_H[l]); l++; end
      y = r / int'(LVL_W[l]); x = r % int'(LVL_W[l]);
      for (int c = 0; c < d; c++) w[c*8 +: 8] = 8'(feat(l, x, y, c));
    end else if (a >= OPND_BASE) begin
      int q, b;
      logic [MAXS*48-1:0] v;
      q = int'(a - OPND_BASE) / opb; b = int'(a - OPND_BASE) % opb;
      v = opnd_vec(q, ns_tot, spread);
      for (int i = 0; i < d * 8; i++)
        if (b * d * 8 + i < MAXS * 48) w[i] = v[b * d * 8 + i];
    end
    return w;
  endfunction

  // Softmax of one head, fixed point as specified for the hardware:
  // e = 2^-k * Pade(-f ln2) in Q.16, A = e * 2^16 / sum, capped at 0xFFFF
  function automatic void ref_softmax(input int sc[16], input int ns, output int a[16]);
    longint e[16], sum, mx;
    mx = sc[0];
    for (int i = 1; i < ns; i++) if (sc[i] > mx) mx = sc[i];
    sum = 0;
    for (int i = 0; i < ns; i++) begin
      longint nd, zq, k, fr, yq, y2, pn, pdn, ef;
      nd = mx - sc[i];
      zq = (nd * 47274) >> 7;
      k  = zq >> 16; fr = zq & 65535;
      yq = (fr * 45426) >> 16;
      y2 = (yq * yq) >> 16;
      pn = 786432 - 6 * yq + y2; pdn = 786432 + 6 * yq + y2;
      ef = (pn << 16) / pdn;
      e[i] = (k > 16) ? 0 : (ef >> k);
      sum += e[i];
    end
    for (int i = 0; i < ns; i++) begin
      longint v;
      v = (e[i] << 16) / sum;
      a[i] = (v > 65535) ? 65535 : int'(v);
    end
  endfunction

  // one bilinear sample (level l, sampling position from p and dp), channel c
  function automatic int ref_bilerp(input int l, px, py, dx, dy, c);
    real ux, uy;
    int x0, y0, fx, fy, v, acc;
    int wx[2], wy[2];
    // sampling position in level pixels, truncated to 1/16 pixel
    ux = $floor(real'(px) * real'(LVL_W[l]) / 256.0) / 16.0 - 0.5 + real'(dx) / 16.0;
    uy = $floor(real'(py) * real'(LVL_H[l]) / 256.0) / 16.0 - 0.5 + real'(dy) / 16.0;
    x0 = int'($floor(ux)); y0 = int'($floor(uy));
    fx = int'((ux - real'(x0)) * 16.0 + 0.25);
    fy = int'((uy - real'(y0)) * 16.0 + 0.25);
    wx[0] = 16 - fx; wx[1] = fx; wy[0] = 16 - fy; wy[1] = fy;
    acc = 0;
    for (int j = 0; j < 2; j++)
      for (int i = 0; i < 2; i++) begin
        int x, y;
        x = x0 + i; y = y0 + j;
        if (x >= 0 && y >= 0 && x < int'(LVL_W[l]) && y < int'(LVL_H[l])) v = feat(l, x, y, c);
        else v = 0;
        acc += wx[i] * wy[j] * v;
      end
    return acc >>> 8;
  endfunction

  function automatic int sat8(input longint v);
    return (v > 127) ? 127 : (v < -128) ? -128 : int'(v);
  endfunction

  // full MSDeformAttn output of query q: D int8 values
  function automatic void ref_msda(input int q, px, py, d, m, k, spread, out_shift,
                                   output int out[MAXD]);
    int ns, dm, a[16], sc[16];
    longint acc[MAXD];
    int agg8[MAXD];
    ns = 4 * k; dm = d / m;
    for (int j = 0; j < d; j++) acc[j] = 0;
    for (int h = 0; h < m; h++) begin
      for (int i = 0; i < ns; i++) sc[i] = score(q, h * ns + i);
      ref_softmax(sc, ns, a);
      for (int cc = 0; cc < dm; cc++) begin
        longint g;
        int c;
        c = h * dm + cc;
        g = 0;
        for (int i = 0; i < ns; i++) begin
          int s;
          s = h * ns + i;
          g += longint'(a[i]) * ref_bilerp(i / k, px, py, off(q, s, 0, spread), off(q, s, 1, spread), c);
        end
        agg8[c] = sat8(g >>> 16);
      end
    end
    for (int j = 0; j < d; j++) begin
      for (int i = 0; i < d; i++) acc[j] += longint'(agg8[i]) * wmat(i, j);
      out[j] = sat8(acc[j] >>> out_shift);
    end
  endfunction
endpackage

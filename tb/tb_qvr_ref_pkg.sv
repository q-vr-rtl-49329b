// tb_qvr_ref_pkg: reference models shared by the UCA testbenches.
//  * texel(): the behavioural frame-buffer content. Each (frame, layer, x, y)
//    has a distinct RGBA value from a fixed hash, so a wrong address, layer
//    or frame shows up as a wrong colour.
//  * ref_lens(): radial lens distortion f = 1 + k1 r^2 + k2 r^4 in the same
//    Q.15 fixed point the hardware uses (needed bit-exactly, since the
//    corner coordinates choose texels).
//  * ref_pixel(): the expected output pixel: corner blend, layer choice,
//    clamped 2x2 taps, bilinear weights, one or two layers averaged.
package tb_qvr_ref_pkg;

  function automatic logic [31:0] texel(bit prev, bit layer, int x, int y);
    logic [31:0] h;
    h = 32'(x) * 32'h9E3779B1 ^ 32'(y) * 32'h85EBCA77 ^ (prev ? 32'hC2B2AE3D : 0) ^ (layer ? 32'h27D4EB2F : 0);
    h = h ^ (h >> 15);
    h = h * 32'h2C1B3C6D;
    h = h ^ (h >> 12);
    return h;
  endfunction

  function automatic void ref_lens(input longint k1, input longint k2, input longint x, input longint y,
                                   output longint xo, output longint yo);
    longint r2, r4, f;
    r2 = (x * x + y * y) >>> 15;
    r4 = (r2 * r2) >>> 15;
    f  = 32768 + ((k1 * r2) >>> 15) + ((k2 * r4) >>> 15);
    xo = (x * f) >>> 15;
    yo = (y * f) >>> 15;
  endfunction

  // mode: 0 fovea, 1 periphery, 2 border
  function automatic logic [31:0] ref_pixel(int mode, bit prev, longint cx[4], longint cy[4],
                                            int i, int j, int fw, int fh, int ps);
    longint u, v, acc [4];
    logic [31:0] res;
    u = (cx[0]*(32-i)*(32-j) + cx[1]*i*(32-j) + cx[2]*(32-i)*j + cx[3]*i*j) >>> 10;
    v = (cy[0]*(32-i)*(32-j) + cy[1]*i*(32-j) + cy[2]*(32-i)*j + cy[3]*i*j) >>> 10;
    for (int c = 0; c < 4; c++) acc[c] = 0;
    for (int L = 0; L < 2; L++) begin
      longint lu, lv, fxq, fyq;
      int lw, lh;
      if (mode == 0 && L == 1) continue;
      if (mode == 1 && L == 0) continue;
      lu = L ? (u >>> ps) : u;
      lv = L ? (v >>> ps) : v;
      lw = L ? (fw >> ps) : fw;
      lh = L ? (fh >> ps) : fh;
      fxq = lu & 255; fyq = lv & 255;
      for (int t = 0; t < 4; t++) begin
        longint ix, iy, w;
        logic [31:0] tx;
        ix = (lu >>> 8) + (t & 1);
        iy = (lv >>> 8) + (t >> 1);
        if (ix < 0) ix = 0; if (ix > lw - 1) ix = lw - 1;
        if (iy < 0) iy = 0; if (iy > lh - 1) iy = lh - 1;
        w = ((t & 1) ? fxq : 256 - fxq) * ((t >> 1) ? fyq : 256 - fyq);
        tx = texel(prev, L[0], int'(ix), int'(iy));
        for (int c = 0; c < 4; c++) acc[c] += w * longint'(tx[8*c +: 8]);
      end
    end
    for (int c = 0; c < 4; c++) res[8*c +: 8] = 8'(acc[c] >> ((mode == 2) ? 17 : 16));
    return res;
  endfunction

endpackage

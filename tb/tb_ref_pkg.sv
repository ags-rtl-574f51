// tb_ref_pkg: reference models used by the testbenches, written in real
// arithmetic and independent of the RTL's fixed-point datapath.
//   ref_alpha   : alpha = min(0.99, o * exp(-(a/2 dx^2 + b dx dy + c/2 dy^2))),
//                 0 when the quadratic form is negative
//   rand_feat   : a random 2D Gaussian centred near a 4x4 tile
//   ref_render  : front-to-back alpha blending of a list for one pixel, with the
//                 1/255 skip and the 1e-4 early termination of 3DGS
package tb_ref_pkg;
  import ags_pkg::*;

  function automatic real q2r(input logic signed [15:0] v, input int frac);
    return real'(v) / real'(1 << frac);
  endfunction

  function automatic real ref_alpha(input gfeat_t f, input real px, input real py);
    real dx, dy, p, a;
    dx = q2r(f.mx, 4) - px;
    dy = q2r(f.my, 4) - py;
    p  = 0.5 * q2r(f.ca, 12) * dx * dx + q2r(f.cb, 12) * dx * dy + 0.5 * q2r(f.cc, 12) * dy * dy;
    if (p < 0.0) return 0.0;
    a = (real'(f.opac) / 65536.0) * $exp(-p);
    if (a > 0.99) a = 0.99;
    return a;
  endfunction

  function automatic gfeat_t rand_feat(input int tx, input int ty, input int spread);
    gfeat_t f;
    real sx, sy;
    f.mx   = 16'(((tx * 16) + int'($urandom_range(0, 16 * spread)) - 8 * spread + 24));
    f.my   = 16'(((ty * 16) + int'($urandom_range(0, 16 * spread)) - 8 * spread + 24));
    // positive definite conic: a, c in [0.05, 1.0], |b| small
    f.ca   = 16'($urandom_range(200, 4096));
    f.cc   = 16'($urandom_range(200, 4096));
    f.cb   = 16'(int'($urandom_range(0, 200)) - 100);
    f.opac = 16'($urandom_range(20000, 65000));
    f.col.r = 16'($urandom_range(0, 65535));
    f.col.g = 16'($urandom_range(0, 65535));
    f.col.b = 16'($urandom_range(0, 65535));
    f.rsvd = '0;
    return f;
  endfunction

  // renders one pixel; returns colour per channel in [0,1], final T, and the
  // non-contributory flag per Gaussian (alpha < 1/255, only if reached)
  function automatic void ref_render(input gfeat_t fl[], input int n, input real px, input real py,
                                     output real cr, output real cg, output real cb,
                                     output real t_out, output bit nc[]);
    real t, a, tt;
    t = 1.0; cr = 0.0; cg = 0.0; cb = 0.0;
    nc = new[n];
    for (int i = 0; i < n; i++) nc[i] = 0;
    for (int i = 0; i < n; i++) begin
      a = ref_alpha(fl[i], px, py);
      if (a < 1.0 / 255.0) begin nc[i] = 1; continue; end
      tt = t * (1.0 - a);
      if (tt < 1.0e-4) break;
      cr += real'(fl[i].col.r) / 65536.0 * a * t;
      cg += real'(fl[i].col.g) / 65536.0 * a * t;
      cb += real'(fl[i].col.b) / 65536.0 * a * t;
      t = tt;
    end
    t_out = t;
  endfunction

endpackage

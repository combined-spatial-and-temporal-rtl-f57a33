// stencil_ref_pkg: scalar references of the Diffusion 2D and Hotspot 2D
// stencils for the testbenches.  One time step over the whole dim_x x dim_y grid (row-major,
// no blocking), out-of-grid neighbours replaced by the cell itself, each
// operation rounded to single precision in the order
// cc*C + cw*W + ce*E + cs*S + cn*N.
package stencil_ref_pkg;
  import stencil_pkg::*;
  import fp_ref_pkg::*;

  function automatic void diff2d_step(input fp32_t g[], output fp32_t o[],
                                      input int dx, input int dy,
                                      input diff2d_coef_t k);
    o = new[dx * dy];
    for (int y = 0; y < dy; y++)
      for (int x = 0; x < dx; x++) begin
        fp32_t c, w, e, s, n, acc;
        c = g[y * dx + x];
        w = (x == 0)      ? c : g[y * dx + x - 1];
        e = (x == dx - 1) ? c : g[y * dx + x + 1];
        n = (y == 0)      ? c : g[(y - 1) * dx + x];
        s = (y == dy - 1) ? c : g[(y + 1) * dx + x];
        acc = fadd(fmul(k.cc, c), fmul(k.cw, w));
        acc = fadd(acc, fmul(k.ce, e));
        acc = fadd(acc, fmul(k.cs, s));
        acc = fadd(acc, fmul(k.cn, n));
        o[y * dx + x] = acc;
      end
  endfunction

  // One Hotspot 2D time step: temperatures g, power pw, ambient temperature
  // ta; same boundary rule; evaluation order of
  //   C + sdc*(P + (N+S-2C)*ry1 + (E+W-2C)*rx1 + (ta-C)*rz1).
  function automatic void hotspot2d_step(input fp32_t g[], input fp32_t pw[],
                                         output fp32_t o[], input int dx, input int dy,
                                         input hs_coef_t k, input fp32_t ta);
    o = new[dx * dy];
    for (int y = 0; y < dy; y++)
      for (int x = 0; x < dx; x++) begin
        fp32_t c, w, e, s, n, c2, a, b, z, t;
        c = g[y * dx + x];
        w = (x == 0)      ? c : g[y * dx + x - 1];
        e = (x == dx - 1) ? c : g[y * dx + x + 1];
        n = (y == 0)      ? c : g[(y - 1) * dx + x];
        s = (y == dy - 1) ? c : g[(y + 1) * dx + x];
        c2 = fmul(32'h4000_0000, c);
        a  = fadd(fadd(n, s), c2 ^ 32'h8000_0000);
        b  = fadd(fadd(e, w), c2 ^ 32'h8000_0000);
        z  = fmul(fadd(ta, c ^ 32'h8000_0000), k.rz1);
        t  = fadd(pw[y * dx + x], fmul(a, k.ry1));
        t  = fadd(t, fmul(b, k.rx1));
        t  = fadd(t, z);
        o[y * dx + x] = fadd(c, fmul(k.sdc, t));
      end
  endfunction

  function automatic hs_coef_t hotspot2d_coef();
    return '{sdc: 32'h3D4C_CCCD,   // 0.05
             rx1: 32'h3F00_0000,   // 0.5
             ry1: 32'h3E80_0000,   // 0.25
             rz1: 32'h3C23_D70A};  // 0.01
  endfunction

  // Coefficients of a stable diffusion step: the five weights sum to about one.
  function automatic diff2d_coef_t diff2d_coef();
    return '{cc: 32'h3F19_999A,   // 0.6
             cw: 32'h3DCC_CCCD,   // 0.1
             ce: 32'h3DCC_CCCD,
             cs: 32'h3DCC_CCCD,
             cn: 32'h3DCC_CCCD};
  endfunction

  // Host-side trip count of one pass: bnum_x * (bsize_x/par_vec) * dim_y.
  function automatic int num_vecs(input int bx, input int pv, input int pt,
                                  input int dx, input int dy);
    int cs;
    cs = bx - 2 * pt;
    return ((dx + cs - 1) / cs) * (bx / pv) * dy;
  endfunction
endpackage

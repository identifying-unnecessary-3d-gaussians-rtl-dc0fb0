// tb_ref_pkg: floating-point reference models used by the testbenches.
//
// Independent re-implementations, in real arithmetic, of what the RTL
// computes in fixed point: the step-1 Gaussian preprocessing, the
// spherical-harmonics colour, the per-pixel blend and the cluster keep rule.
// Testbenches compare RTL outputs with these within a tolerance.
package tb_ref_pkg;
  import gs_pkg::*;

  function automatic fx_t r2fx(real r);
    return fx_t'($rtoi(r * 65536.0));
  endfunction

  function automatic real fx2r(fx_t x);
    return real'(x) / 65536.0;
  endfunction

  function automatic real absr(real a);
    return (a < 0.0) ? -a : a;
  endfunction

  function automatic bit close(real a, real b, real rel, real abs_tol);
    return absr(a - b) <= abs_tol + rel * absr(b);
  endfunction

  // identity-rotation view looking down +z, camera at (0,0,-dist)
  function automatic view_t make_view(real cam_dist, real tan_half, int w, int h, real znear);
    view_t v;
    v = '0;
    v.m[0][0] = FX_ONE; v.m[1][1] = FX_ONE; v.m[2][2] = FX_ONE; v.m[3][3] = FX_ONE;
    v.m[2][3] = r2fx(cam_dist);
    v.tan_half_fov = r2fx(tan_half);
    v.img_w = 16'(w);
    v.img_h = 16'(h);
    v.campos.x = 0; v.campos.y = 0; v.campos.z = r2fx(-cam_dist);
    v.znear = r2fx(znear);
    return v;
  endfunction

  // camera-space transform with rows 0..2 of the view matrix
  function automatic void ref_xform(view_t vw, real x, real y, real z, output real t[3]);
    for (int i = 0; i < 3; i++)
      t[i] = fx2r(vw.m[i][0]) * x + fx2r(vw.m[i][1]) * y + fx2r(vw.m[i][2]) * z + fx2r(vw.m[i][3]);
  endfunction

  // cluster keep rule
  function automatic bit ref_keep(view_t vw, real cx, real cy, real cz, real R);
    real t[3], f, u, v, r, wv, hv;
    ref_xform(vw, cx, cy, cz, t);
    wv = real'(vw.img_w); hv = real'(vw.img_h);
    if (t[2] + R <= fx2r(vw.znear)) return 0;
    if (t[2] - R <= fx2r(vw.znear)) return 1;
    f = wv / (2.0 * fx2r(vw.tan_half_fov));
    r = R * f / t[2];
    u = f * t[0] / t[2] + wv / 2.0;
    v = f * t[1] / t[2] + hv / 2.0;
    return (u + r >= 0) && (u - r < wv) && (v + r >= 0) && (v - r < hv);
  endfunction

  typedef struct {
    real u, v, depth, ca, cb, cc;
    int  radius;
    bit  vis;
  } ref_splat_t;

  function automatic ref_splat_t ref_step1(view_t vw, geom_t g);
    ref_splat_t o;
    real t[3], f, wv, hv, qw, qx, qy, qz, rm[3][3], s2[3], sig[3][3];
    real limx, limy, txc, tyc, jm[2][3], tm[2][3], ts[2][3], a, b, c, det, mid, lam;
    ref_xform(vw, fx2r(g.mean.x), fx2r(g.mean.y), fx2r(g.mean.z), t);
    wv = real'(vw.img_w); hv = real'(vw.img_h);
    f  = wv / (2.0 * fx2r(vw.tan_half_fov));
    qw = fx2r(g.qw); qx = fx2r(g.qx); qy = fx2r(g.qy); qz = fx2r(g.qz);
    rm[0][0] = 1 - 2*(qy*qy + qz*qz); rm[0][1] = 2*(qx*qy - qw*qz); rm[0][2] = 2*(qx*qz + qw*qy);
    rm[1][0] = 2*(qx*qy + qw*qz); rm[1][1] = 1 - 2*(qx*qx + qz*qz); rm[1][2] = 2*(qy*qz - qw*qx);
    rm[2][0] = 2*(qx*qz - qw*qy); rm[2][1] = 2*(qy*qz + qw*qx); rm[2][2] = 1 - 2*(qx*qx + qy*qy);
    s2[0] = fx2r(g.scale.x)**2; s2[1] = fx2r(g.scale.y)**2; s2[2] = fx2r(g.scale.z)**2;
    for (int i = 0; i < 3; i++)
      for (int j = 0; j < 3; j++) begin
        sig[i][j] = 0;
        for (int k = 0; k < 3; k++) sig[i][j] += rm[i][k] * s2[k] * rm[j][k];
      end
    limx = 1.3 * fx2r(vw.tan_half_fov);
    limy = limx * hv / wv;
    txc = t[0] / t[2]; tyc = t[1] / t[2];
    if (txc > limx) txc = limx;
    if (txc < -limx) txc = -limx;
    if (tyc > limy) tyc = limy;
    if (tyc < -limy) tyc = -limy;
    txc = txc * t[2]; tyc = tyc * t[2];
    jm[0][0] = f / t[2]; jm[0][1] = 0; jm[0][2] = -f * txc / (t[2]*t[2]);
    jm[1][0] = 0; jm[1][1] = f / t[2]; jm[1][2] = -f * tyc / (t[2]*t[2]);
    for (int i = 0; i < 2; i++)
      for (int j = 0; j < 3; j++) begin
        tm[i][j] = 0;
        for (int k = 0; k < 3; k++) tm[i][j] += jm[i][k] * fx2r(vw.m[k][j]);
      end
    for (int i = 0; i < 2; i++)
      for (int j = 0; j < 3; j++) begin
        ts[i][j] = 0;
        for (int k = 0; k < 3; k++) ts[i][j] += tm[i][k] * sig[k][j];
      end
    a = 0.3; b = 0; c = 0.3;
    for (int k = 0; k < 3; k++) begin
      a += ts[0][k] * tm[0][k];
      b += ts[0][k] * tm[1][k];
      c += ts[1][k] * tm[1][k];
    end
    det = a*c - b*b;
    mid = 0.5 * (a + c);
    lam = mid + $sqrt((mid*mid - det > 0.1) ? mid*mid - det : 0.1);
    o.radius = int'($ceil(3.0 * $sqrt(lam)));
    o.u = f * t[0] / t[2] + wv / 2.0;
    o.v = f * t[1] / t[2] + hv / 2.0;
    o.depth = t[2];
    o.ca = c / det; o.cb = -b / det; o.cc = a / det;
    o.vis = (t[2] > fx2r(vw.znear)) && (det > 0) &&
            (o.u + o.radius > 0) && (o.u - o.radius < wv) &&
            (o.v + o.radius > 0) && (o.v - o.radius < hv);
    return o;
  endfunction

  function automatic void ref_sh(vec3_t mean, vec3_t campos, fx_t [3*SH_COEFS-1:0] sh, output real rgb[3]);
    real x, y, z, n, b[16], xx, yy, zz;
    x = fx2r(mean.x) - fx2r(campos.x);
    y = fx2r(mean.y) - fx2r(campos.y);
    z = fx2r(mean.z) - fx2r(campos.z);
    n = $sqrt(x*x + y*y + z*z);
    x /= n; y /= n; z /= n;
    xx = x*x; yy = y*y; zz = z*z;
    b[0] = 0.28209479177387814;
    b[1] = -0.4886025119029199 * y; b[2] = 0.4886025119029199 * z; b[3] = -0.4886025119029199 * x;
    b[4] = 1.0925484305920792 * x*y; b[5] = -1.0925484305920792 * y*z;
    b[6] = 0.31539156525252005 * (2*zz - xx - yy); b[7] = -1.0925484305920792 * x*z;
    b[8] = 0.5462742152960396 * (xx - yy);
    b[9] = -0.5900435899266435 * y * (3*xx - yy); b[10] = 2.890611442640554 * x*y*z;
    b[11] = -0.4570457994644658 * y * (4*zz - xx - yy);
    b[12] = 0.3731763325901154 * z * (2*zz - 3*xx - 3*yy);
    b[13] = -0.4570457994644658 * x * (4*zz - xx - yy);
    b[14] = 1.445305721320277 * z * (xx - yy); b[15] = -0.5900435899266435 * x * (xx - 3*yy);
    for (int ch = 0; ch < 3; ch++) begin
      rgb[ch] = 0.5;
      for (int k = 0; k < 16; k++) rgb[ch] += b[k] * fx2r(sh[3*k+ch]);
      if (rgb[ch] < 0) rgb[ch] = 0;
    end
  endfunction

  // one blend step; returns hit
  function automatic bit ref_blend(real px, real py, real u, real v, real ca, real cb, real cc,
                                   real op, real col[3], inout real t, inout real c[3]);
    real dx, dy, power, alpha, tn;
    dx = u - px; dy = v - py;
    power = -0.5 * (ca*dx*dx + cc*dy*dy) - cb*dx*dy;
    if (power > 0) return 0;
    alpha = op * $exp(power);
    if (alpha > 0.99) alpha = 0.99;
    if (alpha < 1.0/255.0) return 0;
    tn = t * (1 - alpha);
    if (tn < 0.0001) return 0;
    for (int k = 0; k < 3; k++) c[k] += col[k] * alpha * t;
    t = tn;
    return 1;
  endfunction
endpackage

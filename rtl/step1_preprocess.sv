// step1_preprocess: the per-Gaussian datapath of the step-1 engine
// (projection, preprocessing, covariance calculation and identification of
// Gaussians that do not touch the image).
//
// For one Gaussian (mean, scale s, unit quaternion q) and the current view:
//   t      = V * (mean, 1)                 camera coordinates, depth tz
//   (u, v) = (f tx/tz + W/2, f ty/tz + H/2)   with f = W / (2 tan(fov/2))
//   Sigma  = R(q) diag(s^2) R(q)^T          3D covariance
//   J      = [f/tz 0 -f tx/tz^2; 0 f/tz -f ty/tz^2]   (tx, ty clamped to
//            1.3x the view frustum as in 3D-GS)
//   Sigma2 = (J Vr) Sigma (J Vr)^T + 0.3 I   2D covariance (Vr: rotation part)
//   conic  = Sigma2^-1,  radius = ceil(3 sqrt(lambda_max(Sigma2)))
// The Gaussian is identified as necessary (out_visible) when tz > znear,
// det(Sigma2) > 0 and its 3-sigma square overlaps the image.
// These steps are those of the 3D Gaussian splatting renderer that the
// accelerator runs; their arithmetic details (the 0.3 low-pass term, the
// frustum clamp) come from that renderer, and the fixed-point format is this
// design's: inputs and outputs are Q16.16, the covariance path is computed
// with 64-bit Q48.16 intermediates so that large footprints do not overflow.
// Timing: combinational datapath with a registered output, latency 1, one
// Gaussian per cycle, stalled by en.
module step1_preprocess
  import gs_pkg::*;
(
  input  logic             clk,
  input  logic             rst_n,
  input  logic             en,
  input  view_t            view,
  input  logic             in_valid,
  input  logic [GID_W-1:0] in_gid,
  input  geom_t            in_geom,
  output logic             out_valid,
  output logic             out_visible,
  output splat_t           out_splat
);
  typedef logic signed [63:0] w_t;

  function automatic w_t m64(w_t a, w_t b);
    logic signed [127:0] p;
    p = 128'(a) * 128'(b);
    return w_t'(p >>> FRAC);
  endfunction

  function automatic w_t d64(w_t a, w_t b);
    if (b == 0) return 64'sh7FFF_FFFF_FFFF;
    return (a <<< FRAC) / b;
  endfunction

  // square root of a non-negative Q48.16 value, result Q48.16
  function automatic w_t sqrt64(w_t a);
    logic [79:0] x, rem;
    logic [39:0] root;
    logic [41:0] trial;
    if (a <= 0) return 0;
    x = {a[63:0], 16'b0};
    rem = '0;
    root = '0;
    for (int i = 39; i >= 0; i--) begin
      rem   = {rem[77:0], x[2*i+1], x[2*i]};
      trial = {root, 2'b01};
      if (rem >= 80'(trial)) begin
        rem  = rem - 80'(trial);
        root = {root[38:0], 1'b1};
      end else begin
        root = {root[38:0], 1'b0};
      end
    end
    return w_t'({24'b0, root});
  endfunction

  function automatic fx_t sat32(w_t a);
    if (a > 64'(FX_MAX))  return FX_MAX;
    if (a < -64'(FX_MAX)) return -FX_MAX;
    return fx_t'(a);
  endfunction

  localparam w_t ONE = 64'sd65536;

  w_t tx, ty, tz, f, wf, hf, limx, limy, txc, tyc;
  w_t qw, qx, qy, qz;
  w_t rm [3][3];
  w_t s2 [3];
  w_t sig [3][3];
  w_t jm [2][3];
  w_t tm [2][3];
  w_t ts [2][3];
  w_t ca, cb, cc, det, mid, disc, lam, rad;
  logic vis;
  splat_t sp;

  always_comb begin
    wf = w_t'(view.img_w) <<< FRAC;
    hf = w_t'(view.img_h) <<< FRAC;
    tx = m64(w_t'(view.m[0][0]), w_t'(in_geom.mean.x)) + m64(w_t'(view.m[0][1]), w_t'(in_geom.mean.y))
       + m64(w_t'(view.m[0][2]), w_t'(in_geom.mean.z)) + w_t'(view.m[0][3]);
    ty = m64(w_t'(view.m[1][0]), w_t'(in_geom.mean.x)) + m64(w_t'(view.m[1][1]), w_t'(in_geom.mean.y))
       + m64(w_t'(view.m[1][2]), w_t'(in_geom.mean.z)) + w_t'(view.m[1][3]);
    tz = m64(w_t'(view.m[2][0]), w_t'(in_geom.mean.x)) + m64(w_t'(view.m[2][1]), w_t'(in_geom.mean.y))
       + m64(w_t'(view.m[2][2]), w_t'(in_geom.mean.z)) + w_t'(view.m[2][3]);
    f  = d64(wf, w_t'(view.tan_half_fov) <<< 1);

    // rotation matrix of the quaternion and squared scales
    qw = w_t'(in_geom.qw); qx = w_t'(in_geom.qx); qy = w_t'(in_geom.qy); qz = w_t'(in_geom.qz);
    rm[0][0] = ONE - 2*(m64(qy,qy) + m64(qz,qz));
    rm[0][1] = 2*(m64(qx,qy) - m64(qw,qz));
    rm[0][2] = 2*(m64(qx,qz) + m64(qw,qy));
    rm[1][0] = 2*(m64(qx,qy) + m64(qw,qz));
    rm[1][1] = ONE - 2*(m64(qx,qx) + m64(qz,qz));
    rm[1][2] = 2*(m64(qy,qz) - m64(qw,qx));
    rm[2][0] = 2*(m64(qx,qz) - m64(qw,qy));
    rm[2][1] = 2*(m64(qy,qz) + m64(qw,qx));
    rm[2][2] = ONE - 2*(m64(qx,qx) + m64(qy,qy));
    s2[0] = m64(w_t'(in_geom.scale.x), w_t'(in_geom.scale.x));
    s2[1] = m64(w_t'(in_geom.scale.y), w_t'(in_geom.scale.y));
    s2[2] = m64(w_t'(in_geom.scale.z), w_t'(in_geom.scale.z));
    for (int i = 0; i < 3; i++)
      for (int j = 0; j < 3; j++)
        sig[i][j] = m64(m64(rm[i][0], s2[0]), rm[j][0]) + m64(m64(rm[i][1], s2[1]), rm[j][1])
                  + m64(m64(rm[i][2], s2[2]), rm[j][2]);

    // Jacobian of the perspective projection, frustum-clamped
    limx = m64(64'sd85197, w_t'(view.tan_half_fov));                 // 1.3 tan(fov/2)
    limy = d64(m64(limx, hf), wf);
    txc  = d64(tx, tz);
    tyc  = d64(ty, tz);
    if (txc > limx) txc = limx;
    if (txc < -limx) txc = -limx;
    if (tyc > limy) tyc = limy;
    if (tyc < -limy) tyc = -limy;
    txc = m64(txc, tz);
    tyc = m64(tyc, tz);
    jm[0][0] = d64(f, tz);  jm[0][1] = 0;           jm[0][2] = -d64(m64(f, txc), m64(tz, tz));
    jm[1][0] = 0;           jm[1][1] = d64(f, tz);  jm[1][2] = -d64(m64(f, tyc), m64(tz, tz));
    for (int i = 0; i < 2; i++)
      for (int j = 0; j < 3; j++)
        tm[i][j] = m64(jm[i][0], w_t'(view.m[0][j])) + m64(jm[i][1], w_t'(view.m[1][j]))
                 + m64(jm[i][2], w_t'(view.m[2][j]));
    for (int i = 0; i < 2; i++)
      for (int j = 0; j < 3; j++)
        ts[i][j] = m64(tm[i][0], sig[0][j]) + m64(tm[i][1], sig[1][j]) + m64(tm[i][2], sig[2][j]);
    ca = m64(ts[0][0], tm[0][0]) + m64(ts[0][1], tm[0][1]) + m64(ts[0][2], tm[0][2]) + 64'sd19661;
    cb = m64(ts[0][0], tm[1][0]) + m64(ts[0][1], tm[1][1]) + m64(ts[0][2], tm[1][2]);
    cc = m64(ts[1][0], tm[1][0]) + m64(ts[1][1], tm[1][1]) + m64(ts[1][2], tm[1][2]) + 64'sd19661;

    det  = m64(ca, cc) - m64(cb, cb);
    mid  = (ca + cc) >>> 1;
    disc = m64(mid, mid) - det;
    if (disc < 64'sd6554) disc = 64'sd6554;                           // 0.1
    lam  = mid + sqrt64(disc);
    rad  = 3 * sqrt64(lam);
    rad  = (rad + 64'sd65535) >>> FRAC;                              // ceil, integer pixels
    if (rad > 64'sd65535) rad = 64'sd65535;

    sp.gid    = in_gid;
    sp.mean   = in_geom.mean;
    sp.u      = sat32(m64(f, d64(tx, tz)) + (wf >>> 1));
    sp.v      = sat32(m64(f, d64(ty, tz)) + (hf >>> 1));
    sp.depth  = sat32(tz);
    sp.ca     = sat32(d64(cc, det));
    sp.cb     = sat32(-d64(cb, det));
    sp.cc     = sat32(d64(ca, det));
    sp.radius = rad[15:0];

    vis = (tz > w_t'(view.znear)) && (det > 0) && (rad > 0) &&
          (w_t'(sp.u) + (rad <<< FRAC) > 0) && (w_t'(sp.u) - (rad <<< FRAC) < wf) &&
          (w_t'(sp.v) + (rad <<< FRAC) > 0) && (w_t'(sp.v) - (rad <<< FRAC) < hf);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid   <= 1'b0;
      out_visible <= 1'b0;
      out_splat   <= '0;
    end else if (en) begin
      out_valid   <= in_valid;
      out_visible <= in_valid && vis;
      out_splat   <= sp;
    end
  end
endmodule

// tb_scene_pkg: synthetic scenes and a whole-frame reference for the
// accelerator testbenches.
//
// gen_scene builds clusters the way the offline step does: Gaussians are
// scattered around a cluster centre; each Gaussian's size is
// SG = 3 sqrt(lambda_max) = 3 max(scale) (eq. 1, the eigenvalues of
// R diag(s^2) R^T being s^2), and the cluster radius is
// RC = max(dist(centre, mean) + SG) (eq. 2). About 70% of the clusters lie in
// front of the camera, the rest beside it or behind it. Clusters whose keep
// decision lies within 2% of the boundary are re-drawn so that the
// reference and the fixed-point hardware agree on them.
// ref_frame runs the reference pipeline: clusters in the given order, the
// keep rule, the real-valued step 1, then tb_render_pkg::render.
package tb_scene_pkg;
  import gs_pkg::*;
  import tb_ref_pkg::*;
  import tb_render_pkg::*;

  cluster_t cl[$];
  geom_t    ge[$];
  attr_t    at[$];

  function automatic real rnd(real lo, real hi);
    return lo + (hi - lo) * real'($urandom_range(0, 100000)) / 100000.0;
  endfunction

  function automatic void gen_scene(view_t vw, int n_cl, int max_g);
    cl.delete(); ge.delete(); at.delete();
    for (int c = 0; c < n_cl; c++) begin
      cluster_t k;
      real cx, cy, cz, rc;
      int cnt, kind;
      bit k0, k1, k2;
      do begin
        kind = $urandom_range(0, 9);
        cx = rnd(-4.5, 4.5); cy = rnd(-3.5, 3.5); cz = rnd(-1.5, 4);
        if (kind == 7 || kind == 8) cx = (kind == 7 ? -1.0 : 1.0) * rnd(14, 22);
        if (kind == 9) cz = rnd(-22, -16);
        cnt = $urandom_range(2, max_g);
        rc = 0;
        for (int g = 0; g < cnt; g++) begin
          geom_t gm;
          attr_t a;
          real mx, my, mz, q[4], qn, s[3], smax, d;
          mx = cx + rnd(-0.7, 0.7); my = cy + rnd(-0.7, 0.7); mz = cz + rnd(-0.7, 0.7);
          for (int i = 0; i < 3; i++) s[i] = rnd(0.04, 0.22);
          for (int i = 0; i < 4; i++) q[i] = rnd(-1, 1);
          qn = $sqrt(q[0]*q[0] + q[1]*q[1] + q[2]*q[2] + q[3]*q[3]);
          gm.mean.x = r2fx(mx); gm.mean.y = r2fx(my); gm.mean.z = r2fx(mz);
          gm.scale.x = r2fx(s[0]); gm.scale.y = r2fx(s[1]); gm.scale.z = r2fx(s[2]);
          gm.qw = r2fx(q[0]/qn); gm.qx = r2fx(q[1]/qn); gm.qy = r2fx(q[2]/qn); gm.qz = r2fx(q[3]/qn);
          smax = s[0];
          if (s[1] > smax) smax = s[1];
          if (s[2] > smax) smax = s[2];
          d = $sqrt((mx-cx)**2 + (my-cy)**2 + (mz-cz)**2) + 3.0 * smax;     // eq. (2) with eq. (1)
          if (d > rc) rc = d;
          a.opacity = r2fx(rnd(0.4, 0.9));
          for (int i = 0; i < 3*SH_COEFS; i++) a.shc[i] = r2fx((i < 3) ? rnd(-1, 1) : rnd(-0.1, 0.1));
          ge.push_back(gm);
          at.push_back(a);
        end
        k0 = ref_keep(vw, cx, cy, cz, rc);
        k1 = ref_keep(vw, cx, cy, cz, rc * 1.02);
        k2 = ref_keep(vw, cx, cy, cz, rc * 0.98);
        if (k0 != k1 || k0 != k2) for (int g = 0; g < cnt; g++) begin
          void'(ge.pop_back());
          void'(at.pop_back());
        end
      end while (k0 != k1 || k0 != k2);
      k = '0;
      k.id = CID_W'(c);
      k.c.x = r2fx(cx); k.c.y = r2fx(cy); k.c.z = r2fx(cz);
      k.r = r2fx(rc);
      k.first = GID_W'(ge.size() - cnt);
      k.count = GID_W'(cnt);
      cl.push_back(k);
    end
  endfunction

  // reference frame; returns the kept cluster and visible Gaussian counts
  function automatic void ref_frame(view_t vw, int order[], int ppd, int w, int h, int tile,
                                    ref int img[], output int kept, output int visible,
                                    output int loaded);
    rs_t rs[$];
    kept = 0; visible = 0; loaded = 0;
    foreach (order[i]) begin
      cluster_t k;
      k = cl[order[i]];
      if (ref_keep(vw, fx2r(k.c.x), fx2r(k.c.y), fx2r(k.c.z), fx2r(k.r))) begin
        kept++;
        for (int g = int'(k.first); g < int'(k.first) + int'(k.count); g++) begin
          ref_splat_t e;
          loaded++;
          e = ref_step1(vw, ge[g]);
          if (e.vis) begin
            rs_t r;
            r.u = e.u; r.v = e.v; r.depth = e.depth; r.ca = e.ca; r.cb = e.cb; r.cc = e.cc;
            r.radius = e.radius; r.op = fx2r(at[g].opacity);
            ref_sh(ge[g].mean, vw.campos, at[g].shc, r.col);
            rs.push_back(r);
            visible++;
          end
        end
      end
    end
    render(rs, ppd, w, h, tile, img);
  endfunction
endpackage

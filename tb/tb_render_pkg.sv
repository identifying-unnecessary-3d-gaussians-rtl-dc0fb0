// tb_render_pkg: real-valued reference of the step-2 rendering as the
// accelerator orders it. Gaussians arrive as a sequence; every PPD of them
// form a batch; within a batch each TILE x TILE tile blends, front to back,
// the batch Gaussians whose 3-sigma square overlaps it, sorted by depth
// (ties by arrival); pixel state carries across batches.
package tb_render_pkg;
  import tb_ref_pkg::*;

  typedef struct {
    real u, v, depth, ca, cb, cc, op;
    int  radius;
    real col[3];
  } rs_t;

  function automatic bit overlaps(rs_t s, int tx, int ty, int tile);
    int uf, vf;
    uf = int'($floor(s.u));
    vf = int'($floor(s.v));
    return (uf + s.radius >= tx*tile) && (uf - s.radius < (tx+1)*tile) &&
           (vf + s.radius >= ty*tile) && (vf - s.radius < (ty+1)*tile);
  endfunction

  function automatic int to8(real c);
    if (c <= 0.0) return 0;
    if (c >= 1.0) return 255;
    return int'($floor(c * 255.0));
  endfunction

  // img: 3 entries per pixel, raster order, 8-bit values
  function automatic void render(rs_t s[$], int ppd, int w, int h, int tile, ref int img[]);
    real t[], c[];
    int  lst[$];
    t = new[w*h];
    c = new[3*w*h];
    foreach (t[i]) t[i] = 1.0;
    foreach (c[i]) c[i] = 0.0;
    for (int b = 0; b < s.size(); b += ppd) begin
      int e;
      e = (b + ppd < s.size()) ? b + ppd : s.size();
      for (int ty = 0; ty < h / tile; ty++)
        for (int tx = 0; tx < w / tile; tx++) begin
          lst.delete();
          for (int i = b; i < e; i++) if (overlaps(s[i], tx, ty, tile)) begin
            int p;
            p = 0;
            while (p < lst.size() && s[lst[p]].depth <= s[i].depth) p++;
            lst.insert(p, i);
          end
          for (int py = ty*tile; py < (ty+1)*tile; py++)
            for (int px = tx*tile; px < (tx+1)*tile; px++) begin
              real tt, cc[3];
              tt = t[py*w+px];
              for (int k = 0; k < 3; k++) cc[k] = c[3*(py*w+px)+k];
              foreach (lst[j])
                void'(ref_blend(real'(px), real'(py), s[lst[j]].u, s[lst[j]].v, s[lst[j]].ca,
                                s[lst[j]].cb, s[lst[j]].cc, s[lst[j]].op, s[lst[j]].col, tt, cc));
              t[py*w+px] = tt;
              for (int k = 0; k < 3; k++) c[3*(py*w+px)+k] = cc[k];
            end
        end
    end
    img = new[3*w*h];
    foreach (c[i]) img[i] = to8(c[i]);
  endfunction
endpackage

// tb_step2_engine: 21 random step-1 results (footprints inside, across and
// outside a 32x32 image of four 16x16 tiles) go through the engine with a
// ping-pong depth of 8. The streamed image must match the real-valued
// reference renderer (tb_render_pkg) within 3 levels per channel; the
// engine must process ceil(21/8) = 3 batches (the last one flushed), stream
// one pixel per cycle in raster order, and raise frame_done.
module tb_step2_engine;
  import gs_pkg::*;
  import tb_ref_pkg::*;
  import tb_render_pkg::*;
  localparam int PPD = 8, GBD = 64, W = 32, H = 32, T = 16, NG = 21;
  logic clk = 0, rst_n = 0, frame_start = 0, upstream_done = 0, in_valid = 0, in_ready;
  splat_t in_splat;
  logic gb_re, pix_valid, frame_done;
  logic [5:0] gb_raddr;
  attr_t gb_rdata;
  logic [15:0] pix_x, pix_y;
  logic [23:0] pix_rgb;
  logic [31:0] cnt_loaded, cnt_pairs, cnt_blends, cnt_swaps, cnt_batches, cnt_stalls;
  logic tb_we = 0;
  logic [5:0] tb_waddr;
  attr_t tb_wdata;
  view_t view;
  splat_t sp [NG];
  rs_t rs[$];
  int img[];
  int checks = 0, failures = 0, npix = 0, bad = 0, first_cyc = -1, last_cyc = 0, cyc = 0;
  always #5 clk = ~clk;
  always @(posedge clk) cyc++;

  global_buffer #(.WIDTH($bits(attr_t)), .DEPTH(GBD)) u_gb (
    .clk, .we(tb_we), .waddr(tb_waddr), .wdata(tb_wdata),
    .re(gb_re), .raddr(gb_raddr), .rdata(gb_rdata)
  );
  step2_engine #(.PP_DEPTH(PPD), .GB_DEPTH(GBD), .IMG_W(W), .IMG_H(H), .TILE(T)) dut (.*);

  initial begin
    #20000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic real rnd(real lo, real hi);
    return lo + (hi - lo) * real'($urandom_range(0, 100000)) / 100000.0;
  endfunction

  always @(posedge clk) if (rst_n && pix_valid) begin
    int p, d;
    p = int'(pix_y) * W + int'(pix_x);
    if (first_cyc < 0) first_cyc = cyc;
    last_cyc = cyc;
    if (p != npix) failures++;
    for (int k = 0; k < 3; k++) begin
      d = int'(pix_rgb[23 - 8*k -: 8]) - img[3*p+k];
      if (d > 3 || d < -3) bad++;
    end
    npix++;
  end

  initial begin
    view = make_view(5.0, 0.5, W, H, 0.2);
    in_splat = '0; tb_waddr = 0; tb_wdata = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int i = 0; i < NG; i++) begin
      real sa, sc, rho, a, b, c, det, mid, lam;
      rs_t r;
      attr_t at;
      sa = rnd(1, 6); sc = rnd(1, 6); rho = rnd(-0.6, 0.6);
      a = sa*sa + 0.3; c = sc*sc + 0.3; b = rho*sa*sc;
      det = a*c - b*b; mid = 0.5*(a+c);
      lam = mid + $sqrt(mid*mid - det);
      sp[i] = '0;
      sp[i].gid = GID_W'(i);
      sp[i].mean.x = r2fx(rnd(-2, 2)); sp[i].mean.y = r2fx(rnd(-2, 2)); sp[i].mean.z = r2fx(rnd(0, 3));
      sp[i].u = r2fx(rnd(-6, W + 6)); sp[i].v = r2fx(rnd(-6, H + 6));
      sp[i].depth = r2fx(rnd(1, 10));
      sp[i].ca = r2fx(c / det); sp[i].cb = r2fx(-b / det); sp[i].cc = r2fx(a / det);
      sp[i].radius = 16'(int'($ceil(3.0 * $sqrt(lam))));
      at.opacity = r2fx(rnd(0.3, 0.95));
      for (int k = 0; k < 3*SH_COEFS; k++) at.shc[k] = r2fx(rnd(-0.3, 0.3) * ((k < 3) ? 3.0 : 0.3));
      @(negedge clk);
      tb_we = 1; tb_waddr = 6'(i); tb_wdata = at;
      r.u = fx2r(sp[i].u); r.v = fx2r(sp[i].v); r.depth = fx2r(sp[i].depth);
      r.ca = fx2r(sp[i].ca); r.cb = fx2r(sp[i].cb); r.cc = fx2r(sp[i].cc);
      r.op = fx2r(at.opacity); r.radius = int'(sp[i].radius);
      ref_sh(sp[i].mean, view.campos, at.shc, r.col);
      rs.push_back(r);
    end
    render(rs, PPD, W, H, T, img);
    @(negedge clk);
    tb_we = 0;
    frame_start = 1;
    @(negedge clk);
    frame_start = 0;
    for (int i = 0; i < NG; i++) begin
      in_splat = sp[i];
      in_valid = 1;
      #1;
      while (!in_ready) begin @(negedge clk); #1; end
      @(negedge clk);
      in_valid = 0;
      repeat ($urandom_range(0, 2)) @(negedge clk);
    end
    upstream_done = 1;
    while (!frame_done) @(negedge clk);
    checks += 6 + W*H;
    if (npix != W*H) failures++;
    if (last_cyc - first_cyc != W*H - 1) failures++;
    if (cnt_batches != (NG + PPD - 1) / PPD) failures++;
    if (cnt_swaps != (NG + PPD - 1) / PPD) failures++;
    if (int'(cnt_loaded) != NG) failures++;
    if (cnt_blends == 0) failures++;
    failures += (bad > 0) ? bad : 0;
    $display("pairs=%0d blends=%0d bad=%0d", cnt_pairs, cnt_blends, bad);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

// tb_step1_preprocess: random Gaussians in front of, beside and behind a
// rotated camera; projected centre, depth, conic, radius and the visibility
// decision are compared with a real-valued step-1 model.
module tb_step1_preprocess;
  import gs_pkg::*;
  import tb_ref_pkg::*;
  logic clk = 0, rst_n = 0, en = 1, in_valid = 0, out_valid, out_visible;
  logic [GID_W-1:0] in_gid;
  geom_t in_geom;
  splat_t out_splat;
  view_t view;
  ref_splat_t e;
  int checks = 0, failures = 0, nvis = 0, ninv = 0;
  always #5 clk = ~clk;
  step1_preprocess dut (.*);

  initial begin
    #2000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic real rnd(real lo, real hi);
    return lo + (hi - lo) * real'($urandom_range(0, 100000)) / 100000.0;
  endfunction

  initial begin
    real a, qn, q[4];
    view = make_view(5.0, 0.5, 128, 96, 0.2);
    // rotate the camera by angle a about y
    a = 0.3;
    view.m[0][0] = r2fx($cos(a));  view.m[0][2] = r2fx($sin(a));
    view.m[2][0] = r2fx(-$sin(a)); view.m[2][2] = r2fx($cos(a));
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int n = 0; n < 600; n++) begin
      in_gid = GID_W'(n);
      in_geom.mean.x = r2fx(rnd(-6, 6));
      in_geom.mean.y = r2fx(rnd(-5, 5));
      in_geom.mean.z = r2fx(rnd(-8, 8));
      in_geom.scale.x = r2fx(rnd(0.02, 0.5));
      in_geom.scale.y = r2fx(rnd(0.02, 0.5));
      in_geom.scale.z = r2fx(rnd(0.02, 0.5));
      for (int i = 0; i < 4; i++) q[i] = rnd(-1, 1);
      qn = $sqrt(q[0]*q[0] + q[1]*q[1] + q[2]*q[2] + q[3]*q[3]);
      in_geom.qw = r2fx(q[0]/qn); in_geom.qx = r2fx(q[1]/qn);
      in_geom.qy = r2fx(q[2]/qn); in_geom.qz = r2fx(q[3]/qn);
      in_valid = 1;
      @(posedge clk); #1;
      in_valid = 0;
      e = ref_step1(view, in_geom);
      checks += 2;
      if (!out_valid || out_splat.gid != in_gid) failures++;
      if (e.depth > 0.5) begin
        // away from the near plane the decision must agree exactly
        if (out_visible != e.vis) begin
          failures++;
          $display("vis %0d exp %0d u=%f v=%f r=%0d", out_visible, e.vis, e.u, e.v, e.radius);
        end
      end
      if (e.vis && e.depth > 0.5) begin
        nvis++;
        checks += 6;
        if (!close(fx2r(out_splat.u), e.u, 0.001, 0.05)) failures++;
        if (!close(fx2r(out_splat.v), e.v, 0.001, 0.05)) failures++;
        if (!close(fx2r(out_splat.depth), e.depth, 0.0, 0.001)) failures++;
        if (int'(out_splat.radius) < e.radius - 1 || int'(out_splat.radius) > e.radius + 1) begin
          failures++;
          $display("radius %0d exp %0d", out_splat.radius, e.radius);
        end
        if (!close(fx2r(out_splat.ca), e.ca, 0.06, 0.002)) begin failures++; $display("ca %f %f", fx2r(out_splat.ca), e.ca); end
        if (!close(fx2r(out_splat.cc), e.cc, 0.06, 0.002)) failures++;
      end else if (!e.vis) ninv++;
    end
    checks += 2;
    if (nvis < 50) failures++;
    if (ninv < 50) failures++;
    $display("visible=%0d invisible=%0d", nvis, ninv);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

// tb_radii_calc: checks r = R*W/(2 tan(theta/2) D) and the projected centre
// against real arithmetic for random spheres and fields of view.
module tb_radii_calc;
  import gs_pkg::*;
  import tb_ref_pkg::*;
  logic clk = 0, rst_n = 0, en = 1, in_valid = 0, out_valid;
  fx_t R, xc, yc, D, tan_half_fov, r, u, v;
  logic [15:0] img_w, img_h;
  int checks = 0, failures = 0;
  real er, eu, ev, d;
  always #5 clk = ~clk;
  radii_calc dut (.*);

  initial begin
    #200000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int n = 0; n < 300; n++) begin
      R  = r2fx(real'($urandom_range(10, 5000)) / 1000.0);
      xc = r2fx((real'($urandom_range(0, 20000)) - 10000.0) / 1000.0);
      yc = r2fx((real'($urandom_range(0, 20000)) - 10000.0) / 1000.0);
      D  = r2fx(real'($urandom_range(500, 50000)) / 1000.0);
      tan_half_fov = r2fx(real'($urandom_range(300, 1500)) / 1000.0);
      img_w = 16'($urandom_range(64, 1920));
      img_h = 16'($urandom_range(64, 1080));
      d  = real'(img_w) / (2.0 * fx2r(tan_half_fov));
      er = fx2r(R) * real'(img_w) / (2.0 * fx2r(tan_half_fov) * fx2r(D));
      eu = d * fx2r(xc) / fx2r(D) + real'(img_w) / 2.0;
      ev = d * fx2r(yc) / fx2r(D) + real'(img_h) / 2.0;
      in_valid = 1;
      @(posedge clk); #1;
      in_valid = 0;
      checks += 4;
      if (!out_valid) failures++;
      if (!close(fx2r(r), er, 0.002, 0.01)) begin failures++; $display("r %f exp %f", fx2r(r), er); end
      if (!close(fx2r(u), eu, 0.002, 0.05)) begin failures++; $display("u %f exp %f", fx2r(u), eu); end
      if (!close(fx2r(v), ev, 0.002, 0.05)) begin failures++; $display("v %f exp %f", fx2r(v), ev); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

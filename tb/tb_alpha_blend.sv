// tb_alpha_blend: random pixels near random Gaussians; the hit decision,
// transmittance and colour must match the real-valued blend.
module tb_alpha_blend;
  import gs_pkg::*;
  import tb_ref_pkg::*;
  logic [15:0] px, py;
  fx_t u, v, ca, cb, cc, opacity, t_in, t_out;
  rgb_t color, c_in, c_out;
  logic hit;
  real t, c[3], col[3];
  bit eh;
  int checks = 0, failures = 0, hits = 0;
  alpha_blend dut (.*);

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int n = 0; n < 2000; n++) begin
      real sa, sc;
      px = 16'($urandom_range(0, 100)); py = 16'($urandom_range(0, 100));
      u = r2fx(real'(px) + (real'($urandom_range(0, 20000)) - 10000.0) / 1000.0);
      v = r2fx(real'(py) + (real'($urandom_range(0, 20000)) - 10000.0) / 1000.0);
      sa = real'($urandom_range(1, 50));
      sc = real'($urandom_range(1, 50));
      ca = r2fx(1.0 / sa); cc = r2fx(1.0 / sc);
      cb = r2fx((real'($urandom_range(0, 100)) - 50.0) / 100.0 / $sqrt(sa * sc));
      opacity = r2fx(real'($urandom_range(0, 1000)) / 1000.0);
      color.r = r2fx(real'($urandom_range(0, 1000)) / 1000.0);
      color.g = r2fx(real'($urandom_range(0, 1000)) / 1000.0);
      color.b = r2fx(real'($urandom_range(0, 1000)) / 1000.0);
      t_in = r2fx(real'($urandom_range(1, 1000)) / 1000.0);
      c_in.r = r2fx(0.1); c_in.g = r2fx(0.2); c_in.b = r2fx(0.3);
      #1;
      t = fx2r(t_in); c[0] = 0.1; c[1] = 0.2; c[2] = 0.3;
      col[0] = fx2r(color.r); col[1] = fx2r(color.g); col[2] = fx2r(color.b);
      eh = ref_blend(real'(px), real'(py), fx2r(u), fx2r(v), fx2r(ca), fx2r(cb), fx2r(cc),
                     fx2r(opacity), col, t, c);
      // decisions near the thresholds may differ by rounding: compare values only
      if (hit == eh) begin
        checks += 3;
        hits += hit;
        if (!close(fx2r(t_out), t, 0.0, 0.003)) begin failures++; $display("t %f %f", fx2r(t_out), t); end
        if (!close(fx2r(c_out.r), c[0], 0.0, 0.003)) failures++;
        if (!close(fx2r(c_out.b), c[2], 0.0, 0.003)) failures++;
      end else begin
        checks++;
        if (!(close(fx2r(t_out), t, 0.0, 0.01))) failures++;
      end
    end
    checks++;
    if (hits < 100) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

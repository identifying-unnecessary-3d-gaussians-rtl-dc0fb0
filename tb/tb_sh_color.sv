// tb_sh_color: random means, camera positions and SH coefficients; the
// colour must match the real-valued degree-3 SH evaluation.
module tb_sh_color;
  import gs_pkg::*;
  import tb_ref_pkg::*;
  vec3_t mean, campos;
  fx_t [3*SH_COEFS-1:0] sh;
  rgb_t rgb;
  real ex[3];
  int checks = 0, failures = 0;
  sh_color dut (.*);

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int n = 0; n < 500; n++) begin
      mean.x = r2fx((real'($urandom_range(0, 40000)) - 20000.0) / 1000.0);
      mean.y = r2fx((real'($urandom_range(0, 40000)) - 20000.0) / 1000.0);
      mean.z = r2fx((real'($urandom_range(0, 40000)) - 20000.0) / 1000.0);
      campos.x = r2fx((real'($urandom_range(0, 4000)) - 2000.0) / 1000.0);
      campos.y = r2fx((real'($urandom_range(0, 4000)) - 2000.0) / 1000.0);
      campos.z = r2fx((real'($urandom_range(0, 4000)) - 2000.0) / 1000.0);
      for (int k = 0; k < 3*SH_COEFS; k++)
        sh[k] = r2fx((real'($urandom_range(0, 2000)) - 1000.0) / ((k < 3) ? 500.0 : 4000.0));
      #1;
      ref_sh(mean, campos, sh, ex);
      checks += 3;
      if (!close(fx2r(rgb.r), ex[0], 0.0, 0.003)) begin failures++; $display("r %f %f", fx2r(rgb.r), ex[0]); end
      if (!close(fx2r(rgb.g), ex[1], 0.0, 0.003)) failures++;
      if (!close(fx2r(rgb.b), ex[2], 0.0, 0.003)) failures++;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

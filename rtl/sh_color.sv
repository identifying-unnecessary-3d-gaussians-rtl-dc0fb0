// sh_color: 3D colour computation of the step-2 engine.
//
// Evaluates the view-dependent colour of a Gaussian from its degree-3
// spherical-harmonics coefficients: with the unit view direction
// d = (mean - campos)/|mean - campos| and the 16 real SH basis functions
// Y_k(d) of 3D Gaussian splatting,
//     colour_c = max(0, sum_k Y_k(d) * sh[3k+c] + 0.5).
// The direction is first divided by its largest component so that the
// squared length stays small in Q16.16. Purely combinational.
// SH colour evaluation is named by the paper; the basis constants and the
// +0.5 offset are those of the 3D Gaussian splatting reference renderer.
module sh_color
  import gs_pkg::*;
(
  input  vec3_t                mean,
  input  vec3_t                campos,
  input  fx_t [3*SH_COEFS-1:0] sh,
  output rgb_t                 rgb
);
  localparam fx_t C0 = 32'sd18487;
  localparam fx_t C1 = 32'sd32021;
  localparam fx_t C2_0 = 32'sd71601, C2_1 = -32'sd71601, C2_2 = 32'sd20670,
                  C2_3 = -32'sd71601, C2_4 = 32'sd35801;
  localparam fx_t C3_0 = -32'sd38669, C3_1 = 32'sd189440, C3_2 = -32'sd29953,
                  C3_3 = 32'sd24457,  C3_4 = -32'sd29953, C3_5 = 32'sd94720,
                  C3_6 = -32'sd38669;

  fx_t dx, dy, dz, ax, ay, az, mx, len, x, y, z;
  fx_t xx, yy, zz, xy, yz, xz;
  fx_t [SH_COEFS-1:0] b;
  fx_t acc [3];

  always_comb begin
    dx = mean.x - campos.x;
    dy = mean.y - campos.y;
    dz = mean.z - campos.z;
    ax = (dx < 0) ? -dx : dx;
    ay = (dy < 0) ? -dy : dy;
    az = (dz < 0) ? -dz : dz;
    mx = ax;
    if (ay > mx) mx = ay;
    if (az > mx) mx = az;
    if (mx == 0) begin
      x = 0; y = 0; z = 0; len = FX_ONE;
    end else begin
      x = fx_div(dx, mx);
      y = fx_div(dy, mx);
      z = fx_div(dz, mx);
      len = fx_sqrt(fx_mul(x, x) + fx_mul(y, y) + fx_mul(z, z));
      x = fx_div(x, len);
      y = fx_div(y, len);
      z = fx_div(z, len);
    end
    xx = fx_mul(x, x); yy = fx_mul(y, y); zz = fx_mul(z, z);
    xy = fx_mul(x, y); yz = fx_mul(y, z); xz = fx_mul(x, z);
    b[0]  = C0;
    b[1]  = -fx_mul(C1, y);
    b[2]  = fx_mul(C1, z);
    b[3]  = -fx_mul(C1, x);
    b[4]  = fx_mul(C2_0, xy);
    b[5]  = fx_mul(C2_1, yz);
    b[6]  = fx_mul(C2_2, 2*zz - xx - yy);
    b[7]  = fx_mul(C2_3, xz);
    b[8]  = fx_mul(C2_4, xx - yy);
    b[9]  = fx_mul(fx_mul(C3_0, y), 3*xx - yy);
    b[10] = fx_mul(fx_mul(C3_1, xy), z);
    b[11] = fx_mul(fx_mul(C3_2, y), 4*zz - xx - yy);
    b[12] = fx_mul(fx_mul(C3_3, z), 2*zz - 3*xx - 3*yy);
    b[13] = fx_mul(fx_mul(C3_4, x), 4*zz - xx - yy);
    b[14] = fx_mul(fx_mul(C3_5, z), xx - yy);
    b[15] = fx_mul(fx_mul(C3_6, x), xx - 3*yy);
    for (int c = 0; c < 3; c++) begin
      acc[c] = FX_HALF;
      for (int k = 0; k < SH_COEFS; k++) acc[c] = acc[c] + fx_mul(b[k], sh[3*k+c]);
      if (acc[c] < 0) acc[c] = 0;
    end
    rgb.r = acc[0];
    rgb.g = acc[1];
    rgb.b = acc[2];
  end
endmodule

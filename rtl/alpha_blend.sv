// alpha_blend: 2D colour computation for one pixel and one Gaussian.
//
// With d = (u - px, v - py) and the conic (a, b, c) of the Gaussian,
//     power = -0.5 (a dx^2 + c dy^2) - b dx dy
//     alpha = min(0.99, opacity * exp(power))
// and the pixel state (transmittance T, accumulated colour C) is updated
// front to back: C += colour * alpha * T, T *= (1 - alpha). The Gaussian is
// skipped (hit = 0, state unchanged) when power > 0, alpha < 1/255, or the
// new T would fall below 1e-4. The quadratic form is evaluated with 64-bit
// intermediates; everything else is Q16.16. Purely combinational.
// The front-to-back blending rule and thresholds follow the 3D Gaussian
// splatting renderer; the exp approximation (gs_pkg::fx_exp_neg) is this
// design's.
module alpha_blend
  import gs_pkg::*;
(
  input  logic [15:0] px,
  input  logic [15:0] py,
  input  fx_t         u,
  input  fx_t         v,
  input  fx_t         ca,
  input  fx_t         cb,
  input  fx_t         cc,
  input  fx_t         opacity,
  input  rgb_t        color,
  input  fx_t         t_in,
  input  rgb_t        c_in,
  output fx_t         t_out,
  output rgb_t        c_out,
  output logic        hit
);
  typedef logic signed [63:0] w_t;
  w_t   dx, dy, q;
  fx_t  alpha, wgt, t_new;

  function automatic w_t m64(w_t a, w_t b);
    logic signed [127:0] p;
    p = 128'(a) * 128'(b);
    return w_t'(p >>> FRAC);
  endfunction

  always_comb begin
    dx = w_t'(u) - (w_t'({16'b0, px}) <<< FRAC);
    dy = w_t'(v) - (w_t'({16'b0, py}) <<< FRAC);
    // q = -power = 0.5 (a dx^2 + c dy^2) + b dx dy
    q  = ((m64(w_t'(ca), m64(dx, dx)) + m64(w_t'(cc), m64(dy, dy))) >>> 1)
       + m64(w_t'(cb), m64(dx, dy));
    alpha = 0;
    if (q >= 0 && q < (w_t'(32) <<< FRAC))
      alpha = fx_mul(opacity, fx_exp_neg(fx_t'(q)));
    if (alpha > 32'sd64881) alpha = 32'sd64881;            // 0.99
    t_new = fx_mul(t_in, FX_ONE - alpha);
    hit   = (alpha >= 32'sd257) && (t_new >= 32'sd7);     // 1/255, 1e-4
    wgt   = fx_mul(alpha, t_in);
    if (hit) begin
      t_out   = t_new;
      c_out.r = c_in.r + fx_mul(color.r, wgt);
      c_out.g = c_in.g + fx_mul(color.g, wgt);
      c_out.b = c_in.b + fx_mul(color.b, wgt);
    end else begin
      t_out = t_in;
      c_out = c_in;
    end
  end
endmodule

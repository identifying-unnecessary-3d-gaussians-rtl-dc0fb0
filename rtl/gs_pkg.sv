// gs_pkg: types, sizes and fixed-point arithmetic shared by the Gaussian
// splatting accelerator.
//
// Every real quantity (positions, radii, covariances, colours, SH
// coefficients) is a Q16.16 two's-complement number (fx_t). The record
// types describe what moves between the engines:
//   cluster_t  - one cluster of the offline clustering: centroid, sphere
//                radius, and the contiguous range of its Gaussians in the
//                global buffer;
//   geom_t     - the step-1 parameters of a Gaussian (mean, scale, rotation);
//   attr_t     - the step-2 parameters (opacity, 48 SH coefficients);
//   splat_t    - the result of step 1 for a Gaussian that touches the image;
//   view_t     - the per-frame camera (4x4 view matrix, FOV, image size).
// The fixed-point format and the record layouts are this design's choice;
// the parameter sets (means, scales, rotations, SH, opacity) follow the
// 3D Gaussian splatting model.
package gs_pkg;

  localparam int FRAC = 16;
  typedef logic signed [31:0] fx_t;
  localparam fx_t FX_ONE  = 32'sh0001_0000;
  localparam fx_t FX_HALF = 32'sh0000_8000;
  localparam fx_t FX_MAX  = 32'sh7FFF_FFFF;

  localparam int GID_W    = 16;   // Gaussian index in the global buffer
  localparam int CID_W    = 16;   // cluster index
  localparam int SH_COEFS = 16;   // degree-3 spherical harmonics per channel

  typedef struct packed {
    fx_t x;
    fx_t y;
    fx_t z;
  } vec3_t;

  typedef struct packed {
    logic [CID_W-1:0] id;
    vec3_t            c;       // centroid (world)
    fx_t              r;       // sphere radius RC_j
    logic [GID_W-1:0] first;   // first Gaussian of the cluster
    logic [GID_W-1:0] count;   // number of Gaussians
  } cluster_t;

  typedef struct packed {
    vec3_t mean;
    vec3_t scale;              // linear scales (activation done offline)
    fx_t   qw, qx, qy, qz;     // unit quaternion
  } geom_t;

  typedef struct packed {
    fx_t                  opacity;   // in [0,1]
    fx_t [3*SH_COEFS-1:0] shc;       // index 3*k + channel
  } attr_t;

  typedef struct packed {
    logic [GID_W-1:0] gid;
    vec3_t            mean;    // world mean, for the view direction of SH
    fx_t              u, v;    // projected centre (pixels)
    fx_t              depth;   // camera-space z
    fx_t              ca, cb, cc;  // conic (inverse 2D covariance)
    logic [15:0]      radius;  // 3-sigma radius (pixels)
  } splat_t;

  typedef struct packed {
    fx_t [3:0][3:0] m;         // world -> camera, row major, m[row][col]
    fx_t            tan_half_fov;
    logic [15:0]    img_w;
    logic [15:0]    img_h;
    vec3_t          campos;    // camera centre (world)
    fx_t            znear;
  } view_t;

  typedef struct packed {
    fx_t r, g, b;
  } rgb_t;

  function automatic fx_t fx_mul(fx_t a, fx_t b);
    logic signed [63:0] p;
    p = 64'(a) * 64'(b);
    return fx_t'(p >>> FRAC);
  endfunction

  // a / b, saturating; b == 0 gives the largest value of a's sign
  function automatic fx_t fx_div(fx_t a, fx_t b);
    logic signed [63:0] n, q;
    if (b == 0) return (a < 0) ? -FX_MAX : FX_MAX;
    n = 64'(a) <<< FRAC;
    q = n / 64'(b);
    if (q > 64'(FX_MAX)) return FX_MAX;
    if (q < -64'(FX_MAX)) return -FX_MAX;
    return fx_t'(q);
  endfunction

  // square root of a non-negative value (negative inputs give 0)
  function automatic fx_t fx_sqrt(fx_t a);
    logic [47:0] rem, x;
    logic [23:0] root;
    logic [25:0] trial;
    if (a <= 0) return 0;
    x = {a[31:0], 16'b0};
    rem  = '0;
    root = '0;
    for (int i = 23; i >= 0; i--) begin
      rem   = {rem[45:0], x[2*i+1], x[2*i]};
      trial = {root, 2'b01};
      if (rem >= 48'(trial)) begin
        rem  = rem - 48'(trial);
        root = {root[22:0], 1'b1};
      end else begin
        root = {root[22:0], 1'b0};
      end
    end
    return fx_t'({8'b0, root});
  endfunction

  // exp(-x) for x >= 0: 2^-(x*log2 e), the integer part as a shift and the
  // fraction f by the cubic 1 - 0.6903 f + 0.2248 f^2 - 0.0345 f^3 (error below 0.1%)
  function automatic fx_t fx_exp_neg(fx_t x);
    fx_t y, f, p;
    int  n;
    if (x <= 0) return FX_ONE;
    y = fx_mul(x, 32'sd94548);          // log2(e) = 1.442695
    n = int'(y >>> FRAC);
    if (n >= 31) return 0;
    f = y & 32'sh0000_FFFF;
    p = FX_ONE - fx_mul(f, 32'sd45239) + fx_mul(fx_mul(f, f), 32'sd14733)
        - fx_mul(fx_mul(fx_mul(f, f), f), 32'sd2261);
    return p >>> n;
  endfunction

  function automatic fx_t fx_from_int(int i);
    return fx_t'(i <<< FRAC);
  endfunction

endpackage

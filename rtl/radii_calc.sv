// radii_calc: the 2D Radii Calculator of the Cluster Identification Engine.
//
// Projects a cluster sphere onto the image plane. With the image width W and
// the field of view theta, the distance from the viewpoint to the image plane
// is d = W / (2 tan(theta/2)); by similar triangles the sphere of radius R at
// depth D projects to a circle of radius
//     r = R * W / (2 * tan(theta/2) * D) = R * d / D          (paper eq. 3)
// whose centre is (d*xc/D + W/2, d*yc/D + H/2). The radius formula is the
// paper's; the centre, used for the image-boundary test, and the use of the
// same d on both axes are this design's. Inputs and outputs are Q16.16.
// One cluster per cycle; outputs are registered (latency 1) and hold while
// en is low. D <= 0 gives saturated results; the caller treats such
// clusters separately.
module radii_calc
  import gs_pkg::*;
(
  input  logic        clk,
  input  logic        rst_n,
  input  logic        en,
  input  logic        in_valid,
  input  fx_t         R,
  input  fx_t         xc,
  input  fx_t         yc,
  input  fx_t         D,
  input  logic [15:0] img_w,
  input  logic [15:0] img_h,
  input  fx_t         tan_half_fov,
  output logic        out_valid,
  output fx_t         r,
  output fx_t         u,
  output fx_t         v
);
  fx_t w_fx, h_fx, d_plane, r_c, u_c, v_c;

  always_comb begin
    w_fx    = fx_from_int(int'(img_w));
    h_fx    = fx_from_int(int'(img_h));
    d_plane = fx_div(w_fx, tan_half_fov <<< 1);
    r_c     = fx_div(fx_mul(R, d_plane), D);
    u_c     = fx_div(fx_mul(xc, d_plane), D) + (w_fx >>> 1);
    v_c     = fx_div(fx_mul(yc, d_plane), D) + (h_fx >>> 1);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      r <= '0; u <= '0; v <= '0;
    end else if (en) begin
      out_valid <= in_valid;
      r <= r_c;
      u <= u_c;
      v <= v_c;
    end
  end
endmodule

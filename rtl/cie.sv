// cie: Cluster Identification Engine.
//
// Decides for every cluster, before any of its Gaussians is touched, whether
// the cluster can influence the image of the current view. Cluster records
// (centroid C, sphere radius R, Gaussian range) enter a FIFO; the 4x4 PE
// array transforms the centroid into camera coordinates (xc, yc, D); the
// 2D radii calculator projects the sphere to a circle (u, v, r). A cluster is
// kept when its sphere is not entirely behind the near plane (D + R > znear)
// and either it reaches the camera plane (D - R <= znear, where the
// projection is not valid and the cluster is kept to be safe) or the circle
// overlaps the image rectangle [0,W) x [0,H). Kept clusters leave on
// out_*, in arrival order; culled clusters are dropped.
//
// Timing: three pipeline stages (PE array, radii calculator, decision
// register), one cluster per cycle. All stages stall together while
// out_valid is high and out_ready low. hit_valid pulses with the cluster id
// of every kept cluster (used for cluster ordering). idle is high when the
// FIFO and the pipeline are empty.
// The FIFO, PE array and radii calculator are the paper's; the exact keep
// rule, the pipeline and the handshake are this design's choice.
module cie
  import gs_pkg::*;
#(
  parameter int FIFO_DEPTH = 16
) (
  input  logic     clk,
  input  logic     rst_n,
  input  view_t    view,
  input  logic     in_valid,
  output logic     in_ready,
  input  cluster_t in_cluster,
  output logic     out_valid,
  input  logic     out_ready,
  output cluster_t out_cluster,
  output logic     hit_valid,
  output logic [CID_W-1:0] hit_id,
  output logic     idle,
  output logic [31:0] cnt_in,
  output logic [31:0] cnt_kept
);
  logic     en;
  logic     f_valid;
  cluster_t f_data;
  logic [$clog2(FIFO_DEPTH):0] f_level;

  assign en = !out_valid || out_ready;

  cluster_fifo #(.DEPTH(FIFO_DEPTH)) u_fifo (
    .clk, .rst_n,
    .push_valid(in_valid), .push_ready(in_ready), .push_data(in_cluster),
    .pop_valid(f_valid), .pop_ready(en), .pop_data(f_data),
    .level(f_level)
  );

  // stage A: PE array
  logic     a_valid;
  fx_t [3:0] a_res;
  cluster_t a_cl;
  pe_array_4x4 u_pe (
    .clk, .rst_n, .en,
    .in_valid(f_valid),
    .mat(view.m),
    .vec({FX_ONE, f_data.c.z, f_data.c.y, f_data.c.x}),
    .out_valid(a_valid),
    .res(a_res)
  );

  // stage B: radii calculator
  logic     b_valid;
  fx_t      b_r, b_u, b_v, b_D;
  cluster_t b_cl;
  radii_calc u_rc (
    .clk, .rst_n, .en,
    .in_valid(a_valid),
    .R(a_cl.r), .xc(a_res[0]), .yc(a_res[1]), .D(a_res[2]),
    .img_w(view.img_w), .img_h(view.img_h), .tan_half_fov(view.tan_half_fov),
    .out_valid(b_valid), .r(b_r), .u(b_u), .v(b_v)
  );

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      a_cl <= '0;
      b_cl <= '0;
      b_D  <= '0;
    end else if (en) begin
      a_cl <= f_data;
      b_cl <= a_cl;
      b_D  <= a_res[2];
    end
  end

  // stage C: decision
  logic keep;
  fx_t  w_fx, h_fx;
  always_comb begin
    w_fx = fx_from_int(int'(view.img_w));
    h_fx = fx_from_int(int'(view.img_h));
    if (b_D + b_cl.r <= view.znear)       keep = 1'b0;   // behind the camera
    else if (b_D - b_cl.r <= view.znear)  keep = 1'b1;   // reaches the camera plane
    else keep = (b_u + b_r >= 0) && (b_u - b_r < w_fx) &&
                (b_v + b_r >= 0) && (b_v - b_r < h_fx);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid   <= 1'b0;
      out_cluster <= '0;
      hit_valid   <= 1'b0;
      hit_id      <= '0;
      cnt_in      <= '0;
      cnt_kept    <= '0;
    end else begin
      hit_valid <= 1'b0;
      if (en) begin
        out_valid   <= b_valid && keep;
        out_cluster <= b_cl;
        if (b_valid) begin
          cnt_in <= cnt_in + 1;
          if (keep) begin
            cnt_kept  <= cnt_kept + 1;
            hit_valid <= 1'b1;
            hit_id    <= b_cl.id;
          end
        end
      end
    end
  end

  assign idle = (f_level == '0) && !a_valid && !b_valid && !out_valid;

  a_hold: assert property (@(posedge clk) disable iff (!rst_n)
    out_valid && !out_ready |=> out_valid && $stable(out_cluster));
endmodule

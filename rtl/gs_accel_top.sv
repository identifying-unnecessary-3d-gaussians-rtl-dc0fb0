// gs_accel_top: 3D Gaussian splatting accelerator with cluster-based
// pre-identification of unnecessary Gaussians.
//
// Dataflow (one frame):
//   cluster_order  issues the scene's clusters, most used first
//   cie            projects each cluster sphere and keeps those whose
//                  circle can touch the image (step 0)
//   step1_engine   loads the kept clusters' Gaussians from the geometry
//                  global buffer into its ping-pong buffer and runs step 1
//                  (projection, covariance, 3-sigma radius, culling)
//   step2_engine   loads the step-1 survivors' opacity and SH coefficients
//                  from the appearance global buffer into its ping-pong
//                  buffer, distributes them to tiles, sorts, blends, and
//                  streams out the image
// All stages run concurrently: step 1 starts as soon as its first bank is
// full, long before the CIE has seen every cluster, and step 2 likewise.
//
// Interface: the DRAM side is outside this module; the cluster table and
// the two global buffers are written through ctbl_*, geom_* and attr_*.
// Per frame: hold view stable, pulse frame_start (cluster_ready high), wait
// for frame_done while reading the image from pix_*, one pixel per cycle in
// raster order. view.img_w/img_h must equal IMG_W/IMG_H. The counters report
// what each stage kept, dropped and how often buffers swapped or stalled.
// The engine partitioning and the ping-pong buffering are the paper's
// (its Fig. 7); sizes, formats and handshakes are this design's choice.
module gs_accel_top
  import gs_pkg::*;
#(
  parameter int N_CLUSTERS  = 4096,
  parameter int GB_DEPTH    = 2048,
  parameter int CFIFO_DEPTH = 16,
  parameter int PP1_DEPTH   = 64,
  parameter int PP2_DEPTH   = 64,
  parameter int IMG_W       = 128,
  parameter int IMG_H       = 128,
  parameter int TILE        = 16
) (
  input  logic        clk,
  input  logic        rst_n,
  input  view_t       view,
  input  logic [15:0] n_clusters,
  input  logic        frame_start,
  output logic        cluster_ready,
  // fill ports (DRAM side)
  input  logic        ctbl_we,
  input  logic [$clog2(N_CLUSTERS)-1:0] ctbl_addr,
  input  cluster_t    ctbl_data,
  input  logic        geom_we,
  input  logic [$clog2(GB_DEPTH)-1:0] geom_addr,
  input  geom_t       geom_data,
  input  logic        attr_we,
  input  logic [$clog2(GB_DEPTH)-1:0] attr_addr,
  input  attr_t       attr_data,
  // image
  output logic        pix_valid,
  output logic [15:0] pix_x,
  output logic [15:0] pix_y,
  output logic [23:0] pix_rgb,
  output logic        frame_done,
  // statistics
  output logic [31:0] st_clusters_in,
  output logic [31:0] st_clusters_kept,
  output logic [31:0] st_gauss_loaded,
  output logic [31:0] st_gauss_culled,
  output logic [31:0] st_gauss_step2,
  output logic [31:0] st_tile_pairs,
  output logic [31:0] st_blends,
  output logic [31:0] st_s1_swaps,
  output logic [31:0] st_s2_swaps,
  output logic [31:0] st_s1_stalls,
  output logic [31:0] st_s2_stalls,
  output logic [31:0] st_batches,
  output logic [31:0] st_reorder_moves
);
  // cluster ordering -> CIE
  logic     co_valid, co_ready, issue_done;
  cluster_t co_cluster;
  logic     hit_valid;
  logic [CID_W-1:0] hit_id;
  logic     frame_done_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) frame_done_q <= 1'b0;
    else        frame_done_q <= frame_done;
  end

  cluster_order #(.N_CLUSTERS(N_CLUSTERS)) u_order (
    .clk, .rst_n,
    .tbl_we(ctbl_we), .tbl_addr(ctbl_addr), .tbl_data(ctbl_data),
    .n_clusters, .frame_start,
    .frame_end(frame_done && !frame_done_q),
    .ready(cluster_ready), .issue_done,
    .out_valid(co_valid), .out_ready(co_ready), .out_cluster(co_cluster),
    .hit_valid, .hit_id,
    .cnt_reorder_moves(st_reorder_moves)
  );

  // CIE -> step 1
  logic     k_valid, k_ready, cie_idle;
  cluster_t k_cluster;

  cie #(.FIFO_DEPTH(CFIFO_DEPTH)) u_cie (
    .clk, .rst_n, .view,
    .in_valid(co_valid), .in_ready(co_ready), .in_cluster(co_cluster),
    .out_valid(k_valid), .out_ready(k_ready), .out_cluster(k_cluster),
    .hit_valid, .hit_id, .idle(cie_idle),
    .cnt_in(st_clusters_in), .cnt_kept(st_clusters_kept)
  );

  // geometry global buffer
  logic                        g_re;
  logic [$clog2(GB_DEPTH)-1:0] g_raddr;
  geom_t                       g_rdata;

  global_buffer #(.WIDTH($bits(geom_t)), .DEPTH(GB_DEPTH)) u_gb_geom (
    .clk, .we(geom_we), .waddr(geom_addr), .wdata(geom_data),
    .re(g_re), .raddr(g_raddr), .rdata(g_rdata)
  );

  // step 1 -> step 2
  logic   s_valid, s_ready, s1_done;
  splat_t s_splat;

  step1_engine #(.PP_DEPTH(PP1_DEPTH), .GB_DEPTH(GB_DEPTH)) u_s1 (
    .clk, .rst_n, .view, .frame_start,
    .upstream_done(issue_done && cie_idle),
    .cl_valid(k_valid), .cl_ready(k_ready), .cl_cluster(k_cluster),
    .gb_re(g_re), .gb_raddr(g_raddr), .gb_rdata(g_rdata),
    .out_valid(s_valid), .out_ready(s_ready), .out_splat(s_splat),
    .done(s1_done),
    .cnt_loaded(st_gauss_loaded), .cnt_culled(st_gauss_culled),
    .cnt_swaps(st_s1_swaps), .cnt_stalls(st_s1_stalls)
  );

  // appearance global buffer
  logic                        a_re;
  logic [$clog2(GB_DEPTH)-1:0] a_raddr;
  attr_t                       a_rdata;

  global_buffer #(.WIDTH($bits(attr_t)), .DEPTH(GB_DEPTH)) u_gb_attr (
    .clk, .we(attr_we), .waddr(attr_addr), .wdata(attr_data),
    .re(a_re), .raddr(a_raddr), .rdata(a_rdata)
  );

  step2_engine #(.PP_DEPTH(PP2_DEPTH), .GB_DEPTH(GB_DEPTH), .IMG_W(IMG_W), .IMG_H(IMG_H),
                 .TILE(TILE)) u_s2 (
    .clk, .rst_n, .view, .frame_start,
    .upstream_done(s1_done),
    .in_valid(s_valid), .in_ready(s_ready), .in_splat(s_splat),
    .gb_re(a_re), .gb_raddr(a_raddr), .gb_rdata(a_rdata),
    .pix_valid, .pix_x, .pix_y, .pix_rgb, .frame_done,
    .cnt_loaded(st_gauss_step2), .cnt_pairs(st_tile_pairs), .cnt_blends(st_blends),
    .cnt_swaps(st_s2_swaps), .cnt_batches(st_batches), .cnt_stalls(st_s2_stalls)
  );
endmodule

// tb_gs_accel_full: one complete frame through the accelerator with every
// parameter at its default (4096-entry cluster table, 2048-Gaussian global
// buffers, ping-pong depth 64, 128x128 image of 16x16 tiles). A synthetic
// scene of 160 clusters (up to 12 Gaussians each) is loaded through the fill ports and rendered; the
// image must match the real-valued reference pipeline within 4 levels per
// channel (2% of channel values may differ by rounding at footprint edges) and the
// per-stage counters must match the reference. It also checks that clusters
// and Gaussians were culled, that both engines swapped banks several times,
// that the last partly filled bank was flushed, that both engines stalled
// on a full ping-pong buffer and that the cluster order was updated.
module tb_gs_accel_full;
  import gs_pkg::*;
  import tb_ref_pkg::*;
  import tb_scene_pkg::*;
  localparam int NCL = 160, GBD = 2048, PP1 = 64, PP2 = 64, W = 128, H = 128, T = 16, NF = 1, MAXG = 12;
  localparam int TBL = 4096;
  logic clk = 0, rst_n = 0, frame_start = 0, cluster_ready;
  view_t view;
  logic [15:0] n_clusters;
  logic ctbl_we = 0, geom_we = 0, attr_we = 0;
  logic [$clog2(TBL)-1:0] ctbl_addr;
  cluster_t ctbl_data;
  logic [$clog2(GBD)-1:0] geom_addr, attr_addr;
  geom_t geom_data;
  attr_t attr_data;
  logic pix_valid, frame_done;
  logic [15:0] pix_x, pix_y;
  logic [23:0] pix_rgb;
  logic [31:0] st_clusters_in, st_clusters_kept, st_gauss_loaded, st_gauss_culled, st_gauss_step2,
               st_tile_pairs, st_blends, st_s1_swaps, st_s2_swaps, st_s1_stalls, st_s2_stalls,
               st_batches, st_reorder_moves;
  int checks = 0, failures = 0, npix = 0, bad = 0;
  int img[];
  int order[], usage[];
  always #5 clk = ~clk;

  gs_accel_top dut (.*);

  initial begin
    #200000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) if (rst_n && pix_valid) begin
    int p, d;
    p = int'(pix_y) * W + int'(pix_x);
    if (p != npix) failures++;
    for (int k = 0; k < 3; k++) begin
      d = int'(pix_rgb[23 - 8*k -: 8]) - img[3*p+k];
      if (d > 4 || d < -4) bad++;
    end
    npix++;
  end

  function automatic void model_pass(int n);
    int cur;
    cur = order[n-1];
    for (int i = n - 2; i >= 0; i--) begin
      if (usage[cur] > usage[order[i]]) order[i+1] = order[i];
      else begin order[i+1] = cur; cur = order[i]; end
    end
    order[0] = cur;
  endfunction

  initial begin
    int ev_cull_cl = 0, ev_cull_g = 0, ev_swap1 = 0, ev_swap2 = 0, ev_flush = 0, ev_stall1 = 0,
        ev_stall2 = 0, ev_reorder = 0;
    view = make_view(6.0, 0.5, W, H, 0.2);
    gen_scene(view, NCL, MAXG);
    n_clusters = 16'(NCL);
    ctbl_addr = 0; ctbl_data = '0; geom_addr = 0; geom_data = '0; attr_addr = 0; attr_data = '0;
    order = new[NCL]; usage = new[NCL];
    foreach (order[i]) begin order[i] = i; usage[i] = 0; end
    repeat (2) @(posedge clk);
    rst_n = 1;
    foreach (cl[i]) begin
      @(negedge clk); ctbl_we = 1; ctbl_addr = ($clog2(TBL))'(i); ctbl_data = cl[i];
    end
    @(negedge clk); ctbl_we = 0;
    foreach (ge[i]) begin
      @(negedge clk);
      geom_we = 1; geom_addr = ($clog2(GBD))'(i); geom_data = ge[i];
      attr_we = 1; attr_addr = ($clog2(GBD))'(i); attr_data = at[i];
    end
    @(negedge clk); geom_we = 0; attr_we = 0;
    for (int f = 0; f < NF; f++) begin
      int kept, visible, loaded;
      logic [31:0] c_in, c_kept, c_load, c_cull, c_s2, c_sw1, c_sw2, c_st1, c_st2;
      while (!cluster_ready) @(negedge clk);
      ref_frame(view, order, PP2, W, H, T, img, kept, visible, loaded);
      c_in = st_clusters_in; c_kept = st_clusters_kept; c_load = st_gauss_loaded;
      c_cull = st_gauss_culled; c_s2 = st_gauss_step2; c_sw1 = st_s1_swaps; c_sw2 = st_s2_swaps;
      c_st1 = st_s1_stalls; c_st2 = st_s2_stalls;
      npix = 0; bad = 0;
      frame_start = 1;
      @(negedge clk);
      frame_start = 0;
      while (!frame_done) @(negedge clk);
      checks += 6;
      if (npix != W*H) failures++;
      if (bad > (3*W*H) / 50) failures++;
      if (int'(st_clusters_in - c_in) != NCL) failures++;
      if (int'(st_clusters_kept - c_kept) != kept) failures++;
      if (int'(st_gauss_loaded - c_load) != loaded) failures++;
      if (int'(st_gauss_step2 - c_s2) < visible - 2 || int'(st_gauss_step2 - c_s2) > visible + 2) failures++;
      $display("frame %0d: clusters %0d/%0d kept, gaussians loaded %0d, step-2 %0d (ref %0d), bad %0d",
               f, st_clusters_kept - c_kept, NCL, st_gauss_loaded - c_load, st_gauss_step2 - c_s2,
               visible, bad);
      if (kept < NCL) ev_cull_cl++;
      if (st_gauss_culled != c_cull) ev_cull_g++;
      if (st_s1_swaps - c_sw1 >= 2) ev_swap1++;
      if (st_s2_swaps - c_sw2 >= 2) ev_swap2++;
      if ((loaded % PP1) != 0 || (visible % PP2) != 0) ev_flush++;
      if (st_s1_stalls != c_st1) ev_stall1++;
      if (st_s2_stalls != c_st2) ev_stall2++;
      // usage hits of this frame, then the pass at frame end
      foreach (order[i]) begin
        cluster_t k;
        k = cl[order[i]];
        if (ref_keep(view, fx2r(k.c.x), fx2r(k.c.y), fx2r(k.c.z), fx2r(k.r))) usage[order[i]]++;
      end
      model_pass(NCL);
      // a second view for the next frame: camera moved sideways
      view.m[0][3] = r2fx(1.5);
      view.campos.x = r2fx(-1.5);
    end
    while (!cluster_ready) @(negedge clk);
    if (st_reorder_moves != 0) ev_reorder++;
    $display("events: cluster-cull %0d gauss-cull %0d swap1 %0d swap2 %0d flush %0d stall1 %0d stall2 %0d reorder %0d",
             ev_cull_cl, ev_cull_g, ev_swap1, ev_swap2, ev_flush, ev_stall1, ev_stall2, ev_reorder);
    checks += 8;
    if (ev_stall1 == 0) failures++;
    if (ev_stall2 == 0) failures++;
    if (ev_reorder == 0) failures++;
    if (ev_cull_cl == 0) failures++;
    if (ev_cull_g == 0) failures++;
    if (ev_swap1 == 0) failures++;
    if (ev_swap2 == 0) failures++;
    if (ev_flush == 0) failures++;

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

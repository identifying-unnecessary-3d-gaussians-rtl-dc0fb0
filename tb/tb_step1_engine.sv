// tb_step1_engine: 30 clusters of up to 12 Gaussians (some of them off
// screen) go through the engine with a ping-pong depth of 8 and a slow
// consumer. Checks: the Gaussians that leave are exactly the visible ones
// of the real-valued step-1 model, in cluster order, with matching centres;
// processing starts only once the first bank is full; the number of bank
// swaps is ceil(total/8) (the last bank flushed); the loader stalls when
// both banks are full; done rises at the end.
module tb_step1_engine;
  import gs_pkg::*;
  import tb_ref_pkg::*;
  localparam int PPD = 8, GBD = 256;
  logic clk = 0, rst_n = 0, frame_start = 0, upstream_done = 0;
  logic cl_valid = 0, cl_ready, gb_re, out_valid, out_ready = 0, done;
  cluster_t cl_cluster;
  logic [7:0] gb_raddr;
  geom_t gb_rdata;
  splat_t out_splat;
  logic [31:0] cnt_loaded, cnt_culled, cnt_swaps, cnt_stalls;
  logic tb_we = 0;
  logic [7:0] tb_waddr;
  geom_t tb_wdata;
  geom_t geoms [GBD];
  view_t view;
  int checks = 0, failures = 0, total = 0, first_out_loaded = -1;
  int expq[$];
  real expu[$];
  always #5 clk = ~clk;

  global_buffer #(.WIDTH($bits(geom_t)), .DEPTH(GBD)) u_gb (
    .clk, .we(tb_we), .waddr(tb_waddr), .wdata(tb_wdata),
    .re(gb_re), .raddr(gb_raddr), .rdata(gb_rdata)
  );
  step1_engine #(.PP_DEPTH(PPD), .GB_DEPTH(GBD)) dut (.*);

  initial begin
    #5000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic real rnd(real lo, real hi);
    return lo + (hi - lo) * real'($urandom_range(0, 100000)) / 100000.0;
  endfunction

  always @(posedge clk) if (rst_n && out_valid && out_ready) begin
    if (first_out_loaded < 0) first_out_loaded = int'(cnt_loaded);
    checks++;
    if (expq.size() == 0 || int'(out_splat.gid) != expq[0]) begin
      failures++;
      $display("got gid %0d exp %0d", out_splat.gid, expq.size() ? expq[0] : -1);
    end else begin
      checks++;
      if (!close(fx2r(out_splat.u), expu[0], 0.001, 0.05)) failures++;
      void'(expq.pop_front());
      void'(expu.pop_front());
    end
  end

  always @(negedge clk) out_ready <= ($urandom_range(0, 3) == 0);

  initial begin
    ref_splat_t e;
    view = make_view(5.0, 0.5, 64, 48, 0.2);
    cl_cluster = '0; tb_waddr = 0; tb_wdata = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int i = 0; i < GBD; i++) begin
      real q[4], qn;
      geoms[i].mean.x = r2fx(rnd(-8, 8));
      geoms[i].mean.y = r2fx(rnd(-6, 6));
      geoms[i].mean.z = r2fx(rnd(0, 6));
      geoms[i].scale.x = r2fx(rnd(0.03, 0.3));
      geoms[i].scale.y = r2fx(rnd(0.03, 0.3));
      geoms[i].scale.z = r2fx(rnd(0.03, 0.3));
      for (int k = 0; k < 4; k++) q[k] = rnd(-1, 1);
      qn = $sqrt(q[0]*q[0] + q[1]*q[1] + q[2]*q[2] + q[3]*q[3]);
      geoms[i].qw = r2fx(q[0]/qn); geoms[i].qx = r2fx(q[1]/qn);
      geoms[i].qy = r2fx(q[2]/qn); geoms[i].qz = r2fx(q[3]/qn);
      @(negedge clk);
      tb_we = 1; tb_waddr = 8'(i); tb_wdata = geoms[i];
    end
    @(negedge clk);
    tb_we = 0;
    frame_start = 1;
    @(negedge clk);
    frame_start = 0;
    for (int c = 0; c < 30; c++) begin
      int first, cnt;
      cnt = $urandom_range(0, 12);
      first = $urandom_range(0, GBD - 1 - cnt);
      for (int g = first; g < first + cnt; g++) begin
        e = ref_step1(view, geoms[g]);
        if (e.vis) begin expq.push_back(g); expu.push_back(e.u); end
      end
      total += cnt;
      cl_cluster.id = CID_W'(c);
      cl_cluster.first = GID_W'(first);
      cl_cluster.count = GID_W'(cnt);
      cl_valid = 1;
      #1;
      while (!cl_ready) begin @(negedge clk); #1; end
      @(negedge clk);
      cl_valid = 0;
    end
    upstream_done = 1;
    while (!done) @(negedge clk);
    repeat (3) @(negedge clk);
    checks += 6;
    if (expq.size() != 0) begin failures++; $display("%0d missing", expq.size()); end
    if (int'(cnt_loaded) != total) failures++;
    if (int'(cnt_swaps) != (total + PPD - 1) / PPD) failures++;
    if (cnt_stalls == 0) failures++;
    if (first_out_loaded < PPD) failures++;
    if (int'(cnt_culled) == 0) failures++;
    $display("total=%0d culled=%0d swaps=%0d stalls=%0d", total, cnt_culled, cnt_swaps, cnt_stalls);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

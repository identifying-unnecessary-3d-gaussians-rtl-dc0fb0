// tb_cie: random cluster spheres around a rotated camera, with random
// input gaps and output back-pressure. The ids that leave must be exactly
// the clusters the real-valued keep rule keeps (spheres within 2% of the
// decision boundary may go either way), in input order. A second phase
// checks the rate: one cluster per cycle, 4 cycles from input to output (FIFO write plus
// three stages), seen by the consumer one edge later.
module tb_cie;
  import gs_pkg::*;
  import tb_ref_pkg::*;
  logic clk = 0, rst_n = 0, in_valid = 0, in_ready, out_valid, out_ready = 1, hit_valid, idle;
  cluster_t in_cluster, out_cluster;
  logic [CID_W-1:0] hit_id;
  logic [31:0] cnt_in, cnt_kept;
  view_t view;
  int checks = 0, failures = 0, nout = 0, nkept_ref = 0, nculled_ref = 0;
  typedef struct { int id; bit keep; bit amb; } exp_t;
  exp_t q[$];
  always #5 clk = ~clk;
  cie #(.FIFO_DEPTH(8)) dut (.*);

  initial begin
    #5000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic real rnd(real lo, real hi);
    return lo + (hi - lo) * real'($urandom_range(0, 100000)) / 100000.0;
  endfunction

  // consume outputs
  always @(posedge clk) begin
    if (rst_n && out_valid && out_ready) begin
      int id;
      id = int'(out_cluster.id);
      nout++;
      while (q.size() > 0 && q[0].id != id) begin
        checks++;
        if (q[0].keep && !q[0].amb) begin failures++; $display("missing %0d", q[0].id); end
        void'(q.pop_front());
      end
      checks++;
      if (q.size() == 0) failures++;
      else begin
        if (!q[0].keep && !q[0].amb) begin failures++; $display("extra %0d", id); end
        void'(q.pop_front());
      end
    end
  end

  initial begin
    real a;
    int n_in;
    view = make_view(0.0, 0.6, 160, 120, 0.2);
    a = 0.5;
    view.m[0][0] = r2fx($cos(a));  view.m[0][2] = r2fx($sin(a));
    view.m[2][0] = r2fx(-$sin(a)); view.m[2][2] = r2fx($cos(a));
    in_cluster = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    n_in = 0;
    for (int n = 0; n < 1500; n++) begin
      @(negedge clk);
      out_ready = ($urandom_range(0, 3) != 0);
      if (!in_valid || in_ready) begin
        // the previous one (if any) was accepted at the last edge
        in_valid = ($urandom_range(0, 4) != 0);
        if (in_valid) begin
          real x, y, z, r;
          bit k, k1, k2;
          x = rnd(-20, 20); y = rnd(-15, 15); z = rnd(-20, 20); r = rnd(0.1, 4);
          in_cluster.id = CID_W'(n_in);
          in_cluster.c.x = r2fx(x); in_cluster.c.y = r2fx(y); in_cluster.c.z = r2fx(z);
          in_cluster.r = r2fx(r);
          in_cluster.first = GID_W'(n_in * 3);
          in_cluster.count = GID_W'(n_in % 7);
          k  = ref_keep(view, x, y, z, r);
          k1 = ref_keep(view, x, y, z, r * 1.02);
          k2 = ref_keep(view, x, y, z, r * 0.98);
          q.push_back('{n_in, k, (k1 != k2) || (k1 != k)});
          if (k) nkept_ref++; else nculled_ref++;
          n_in++;
        end
      end
      #1;
      // hold in_valid/in_cluster until accepted
      while (in_valid && !in_ready) begin
        @(negedge clk);
        out_ready = ($urandom_range(0, 3) != 0);
        #1;
      end
    end
    @(negedge clk);
    in_valid = 0;
    out_ready = 1;
    repeat (20) @(negedge clk);
    checks += 4;
    if (!idle) failures++;
    if (int'(cnt_in) != n_in) failures++;
    if (int'(cnt_kept) != nout) failures++;
    if (nkept_ref < 50 || nculled_ref < 50) failures++;
    while (q.size() > 0) begin
      checks++;
      if (q[0].keep && !q[0].amb) failures++;
      void'(q.pop_front());
    end
    // rate: 64 always-kept clusters back to back
    begin
      int t0, t_last;
      nout = 0;
      t0 = 0; t_last = 0;
      for (int n = 0; n < 64; n++) begin
        in_valid = 1;
        in_cluster.id = CID_W'(5000 + n);
        in_cluster.c.x = 0; in_cluster.c.y = 0; in_cluster.c.z = r2fx(10.0);
        in_cluster.r = r2fx(1.0);
        q.push_back('{5000 + n, 1, 0});
        @(negedge clk);
        t0++;
        if (nout == 1 && t_last == 0) t_last = t0;
      end
      in_valid = 0;
      while (nout < 64 && t0 < 200) begin @(negedge clk); t0++; end
      checks += 2;
      if (t_last != 5) begin failures++; $display("latency %0d", t_last); end
      if (t0 != 64 + 4) begin failures++; $display("64 clusters took %0d cycles", t0); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

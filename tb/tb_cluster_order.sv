// tb_cluster_order: fills a 16-entry cluster table, runs three frames with
// back-pressure, and feeds usage hits between frames. Frame 1 must issue the
// identity order with the table contents; each later frame must follow the
// order produced by a model of the reverse bubble pass over usage counts, so
// the most used cluster moves to the front.
module tb_cluster_order;
  import gs_pkg::*;
  localparam int N = 16;
  logic clk = 0, rst_n = 0, tbl_we = 0, frame_start = 0, frame_end = 0;
  logic ready, issue_done, out_valid, out_ready = 0, hit_valid = 0;
  logic [3:0] tbl_addr;
  cluster_t tbl_data, out_cluster;
  cluster_t tbl [N];
  logic [15:0] n_clusters;
  logic [CID_W-1:0] hit_id;
  logic [31:0] cnt_reorder_moves;
  int checks = 0, failures = 0;
  int order[N], usage[N], got[$];
  always #5 clk = ~clk;
  cluster_order #(.N_CLUSTERS(N)) dut (.*);

  initial begin
    #2000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) if (rst_n && out_valid && out_ready) got.push_back(int'(out_cluster.id));

  task automatic run_frame(int n);
    got.delete();
    @(negedge clk);
    while (!ready) @(negedge clk);
    n_clusters = 16'(n);
    frame_start = 1;
    @(negedge clk);
    frame_start = 0;
    while (!issue_done) begin
      out_ready = ($urandom_range(0, 2) != 0);
      if (out_valid && out_ready) begin
        checks++;
        if (out_cluster.c != tbl[order[got.size()]].c || out_cluster.r != tbl[order[got.size()]].r)
          failures++;
      end
      @(negedge clk);
    end
    out_ready = 0;
    checks++;
    if (got.size() != n) failures++;
    for (int i = 0; i < n && i < got.size(); i++) begin
      checks++;
      if (got[i] != order[i]) begin failures++; $display("pos %0d got %0d exp %0d", i, got[i], order[i]); end
    end
  endtask

  task automatic hits(int n);
    for (int h = 0; h < n; h++) begin
      int id;
      id = (h % 3 == 0) ? 11 : ((h % 3 == 1) ? 5 : $urandom_range(0, N-1));
      @(negedge clk);
      hit_valid = 1; hit_id = CID_W'(id);
      usage[id]++;
    end
    @(negedge clk);
    hit_valid = 0;
  endtask

  // model of the pass: from the back, carry the most used id forward
  task automatic model_pass(int n);
    int cur;
    cur = order[n-1];
    for (int i = n - 2; i >= 0; i--) begin
      if (usage[cur] > usage[order[i]]) order[i+1] = order[i];
      else begin order[i+1] = cur; cur = order[i]; end
    end
    order[0] = cur;
  endtask

  task automatic end_frame(int n);
    @(negedge clk);
    frame_end = 1;
    @(negedge clk);
    frame_end = 0;
    model_pass(n);
  endtask

  initial begin
    hit_id = 0; n_clusters = 0; tbl_addr = 0; tbl_data = '0;
    for (int i = 0; i < N; i++) begin order[i] = i; usage[i] = 0; end
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int i = 0; i < N; i++) begin
      @(negedge clk);
      tbl_we = 1; tbl_addr = 4'(i);
      tbl_data = '0;
      tbl_data.c.x = fx_t'($urandom()); tbl_data.c.z = fx_t'($urandom());
      tbl_data.r = fx_t'($urandom()); tbl_data.first = GID_W'(i * 10); tbl_data.count = 10;
      tbl[i] = tbl_data;
    end
    @(negedge clk); tbl_we = 0;
    run_frame(N);
    hits(30);
    end_frame(N);
    run_frame(N);
    checks++;
    if (got[0] != 11) failures++;    // most used cluster first
    hits(20);
    end_frame(N);
    run_frame(N);
    checks++;
    if (cnt_reorder_moves == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

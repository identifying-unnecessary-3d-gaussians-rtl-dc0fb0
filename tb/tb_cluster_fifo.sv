// tb_cluster_fifo: random push/pop traffic against a queue model; checks
// order, data, full and empty flags.
module tb_cluster_fifo;
  import gs_pkg::*;
  localparam int DEPTH = 16;
  logic clk = 0, rst_n = 0, push_valid = 0, push_ready, pop_valid, pop_ready = 0;
  cluster_t push_data, pop_data;
  logic [$clog2(DEPTH):0] level;
  cluster_t q[$];
  int checks = 0, failures = 0, seen_full = 0;
  always #5 clk = ~clk;
  cluster_fifo #(.DEPTH(DEPTH)) dut (.*);

  initial begin
    #400000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    push_data = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int n = 0; n < 3000; n++) begin
      @(negedge clk);
      push_valid = ($urandom_range(0, 99) < ((n / 500) % 2 ? 30 : 70));
      pop_ready  = ($urandom_range(0, 99) < ((n / 500) % 2 ? 70 : 30));
      push_data.id = CID_W'($urandom());
      push_data.c.x = fx_t'($urandom());
      push_data.r = fx_t'($urandom());
      push_data.count = GID_W'($urandom());
      checks++;
      if (pop_valid != (q.size() != 0) || push_ready != (q.size() < DEPTH)) failures++;
      if (q.size() == DEPTH) seen_full++;
      if (pop_valid && pop_ready) begin
        checks++;
        if (pop_data != q[0]) failures++;
      end
      @(posedge clk);
      if (pop_valid && pop_ready) void'(q.pop_front());
      if (push_valid && push_ready) q.push_back(push_data);
    end
    checks++;
    if (seen_full == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

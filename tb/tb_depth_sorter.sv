// tb_depth_sorter: inserts random keys (with duplicates) and checks that the
// array reads back in ascending, stable order against a sorted model.
module tb_depth_sorter;
  import gs_pkg::*;
  localparam int N = 16;
  logic clk = 0, rst_n = 0, clear = 0, in_valid = 0;
  fx_t in_key, rd_key;
  logic [5:0] in_val, rd_val;
  logic [$clog2(N)-1:0] rd_idx = '0;
  logic [$clog2(N):0] count;
  int checks = 0, failures = 0;
  int keys[$], vals[$];
  always #5 clk = ~clk;
  depth_sorter #(.N(N), .VW(6)) dut (.*);

  initial begin
    #500000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    in_key = 0; in_val = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < 100; t++) begin
      int n;
      n = $urandom_range(1, N);
      @(negedge clk); clear = 1;
      @(negedge clk); clear = 0;
      keys.delete(); vals.delete();
      for (int i = 0; i < n; i++) begin
        int k, pos;
        k = $urandom_range(0, 20) * 1000 - 5000;
        in_valid = 1; in_key = fx_t'(k); in_val = 6'(i);
        pos = 0;
        while (pos < keys.size() && keys[pos] <= k) pos++;
        keys.insert(pos, k); vals.insert(pos, i);
        @(negedge clk);
      end
      in_valid = 0;
      checks++;
      if (int'(count) != n) failures++;
      for (int i = 0; i < n; i++) begin
        rd_idx = i[$clog2(N)-1:0];
        #1;
        checks++;
        if (rd_key != fx_t'(keys[i]) || int'(rd_val) != vals[i]) failures++;
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

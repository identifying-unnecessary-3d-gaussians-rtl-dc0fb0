// tb_gaussian_distribute: random footprints, including ones partly or
// wholly off screen; the set of emitted (tile, index) pairs must equal the
// tiles overlapped by the clipped square, one pair per cycle.
module tb_gaussian_distribute;
  import gs_pkg::*;
  import tb_ref_pkg::*;
  localparam int IW = 64, IH = 48, T = 16, TX = IW / T, TY = IH / T;
  logic clk = 0, rst_n = 0, in_valid = 0, in_ready, out_valid, idle;
  logic [5:0] in_idx, out_idx;
  fx_t in_u, in_v;
  logic [15:0] in_radius;
  logic [$clog2(TX*TY)-1:0] out_tile;
  int checks = 0, failures = 0;
  bit got [TX*TY];
  int npairs, cycles;
  always #5 clk = ~clk;
  gaussian_distribute #(.IMG_W(IW), .IMG_H(IH), .TILE(T), .IDX_W(6)) dut (.*);

  initial begin
    #2000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) if (rst_n && out_valid) begin
    checks++;
    if (got[out_tile] || out_idx != in_idx) failures++;   // each tile once, right Gaussian
    got[out_tile] = 1;
    npairs++;
  end

  initial begin
    in_idx = 0; in_u = 0; in_v = 0; in_radius = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int n = 0; n < 300; n++) begin
      int u, v, r, expn;
      u = $urandom_range(0, IW + 40) - 20;
      v = $urandom_range(0, IH + 40) - 20;
      r = $urandom_range(0, 30);
      foreach (got[i]) got[i] = 0;
      npairs = 0;
      @(negedge clk);
      in_valid = 1; in_idx = 6'(n); in_u = fx_t'(u <<< 16) + 32'sd12345; in_v = fx_t'(v <<< 16);
      in_radius = 16'(r);
      @(negedge clk);
      in_valid = 0;
      cycles = 0;
      while (!idle) begin @(negedge clk); cycles++; end
      expn = 0;
      for (int ty = 0; ty < TY; ty++)
        for (int tx = 0; tx < TX; tx++) begin
          bit ov;
          ov = (u + r >= tx*T) && (u - r < (tx+1)*T) && (v + r >= ty*T) && (v - r < (ty+1)*T);
          checks++;
          if (ov != got[ty*TX+tx]) begin failures++; $display("tile %0d %0d u=%0d v=%0d r=%0d", tx, ty, u, v, r); end
          expn += ov;
        end
      checks++;
      if (cycles != expn) begin failures++; $display("cycles %0d exp %0d u=%0d v=%0d r=%0d", cycles, expn, u, v, r); end   // one pair per cycle
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

// tb_pe_array_4x4: random 4x4 matrix-vector products against a real-valued
// reference; checks the one-cycle latency and that en holds the result.
module tb_pe_array_4x4;
  import gs_pkg::*;
  import tb_ref_pkg::*;
  logic clk = 0, rst_n = 0, en = 1, in_valid = 0, out_valid;
  fx_t [3:0][3:0] mat;
  fx_t [3:0] vec, res;
  int checks = 0, failures = 0;
  real exp_r[4];
  always #5 clk = ~clk;
  pe_array_4x4 dut (.*);

  initial begin
    #200000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int n = 0; n < 200; n++) begin
      for (int i = 0; i < 4; i++) begin
        for (int j = 0; j < 4; j++) mat[i][j] = r2fx((real'($urandom_range(0, 4000)) - 2000.0) / 1000.0);
        vec[i] = r2fx((real'($urandom_range(0, 20000)) - 10000.0) / 1000.0);
      end
      for (int i = 0; i < 4; i++) begin
        exp_r[i] = 0;
        for (int j = 0; j < 4; j++) exp_r[i] += fx2r(mat[i][j]) * fx2r(vec[j]);
      end
      in_valid = 1;
      @(posedge clk); #1;
      in_valid = 0;
      checks++;
      if (!out_valid) failures++;
      for (int i = 0; i < 4; i++) begin
        checks++;
        if (!close(fx2r(res[i]), exp_r[i], 0.0, 0.001)) begin
          failures++;
          $display("row %0d: got %f exp %f", i, fx2r(res[i]), exp_r[i]);
        end
      end
      // stall: with en low the result must hold
      en = 0;
      mat = '0;
      @(posedge clk); #1;
      checks++;
      if (!close(fx2r(res[0]), exp_r[0], 0.0, 0.001)) failures++;
      en = 1;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

// tb_global_buffer: writes random words, reads them back; checks the
// one-cycle read latency and that rdata holds between reads.
module tb_global_buffer;
  localparam int W = 64, D = 256;
  logic clk = 0, we = 0, re = 0;
  logic [7:0] waddr, raddr;
  logic [W-1:0] wdata, rdata;
  logic [W-1:0] model [D];
  int checks = 0, failures = 0;
  always #5 clk = ~clk;
  global_buffer #(.WIDTH(W), .DEPTH(D)) dut (.*);

  initial begin
    #200000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int i = 0; i < D; i++) begin
      @(negedge clk);
      we = 1; waddr = 8'(i); wdata = {$urandom(), $urandom()};
      model[i] = wdata;
    end
    @(negedge clk); we = 0;
    for (int n = 0; n < 500; n++) begin
      @(negedge clk);
      re = 1; raddr = 8'($urandom_range(0, D-1));
      @(negedge clk);
      re = 0;
      checks++;
      if (rdata != model[raddr]) failures++;
      raddr = raddr + 1;
      @(negedge clk);
      checks++;
      if (rdata != model[raddr - 1]) failures++;   // held
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

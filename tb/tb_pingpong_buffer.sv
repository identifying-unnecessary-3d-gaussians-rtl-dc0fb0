// tb_pingpong_buffer: a writer streams numbered records, a slow or fast
// reader drains full banks. Checks record order and contents, bank sizes
// (DEPTH, or the remainder after flush), that filling overlaps processing,
// that the writer stalls when both banks are full, and the empty flag.
module tb_pingpong_buffer;
  localparam int W = 32, D = 8;
  logic clk = 0, rst_n = 0, wr_valid = 0, wr_ready, flush = 0;
  logic [W-1:0] wr_data, rd_data;
  logic rd_bank_valid, rd_release = 0, swap, empty;
  logic [$clog2(D):0] rd_count;
  logic [$clog2(D)-1:0] rd_addr = '0;
  int checks = 0, failures = 0, next_wr = 0, next_rd = 0, overlap = 0, stalls = 0, swaps = 0;
  localparam int TOTAL = 203;
  always #5 clk = ~clk;
  pingpong_buffer #(.WIDTH(W), .DEPTH(D)) dut (.*);

  initial begin
    #2000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // writer
  initial begin
    wr_data = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    while (next_wr < TOTAL) begin
      @(negedge clk);
      wr_valid = ($urandom_range(0, 3) != 0);
      wr_data  = W'(next_wr);
      #1;
      if (wr_valid && !wr_ready) stalls++;
      if (wr_valid && wr_ready && rd_bank_valid) overlap++;
      if (wr_valid && wr_ready) next_wr++;
      @(posedge clk);
    end
    @(negedge clk);
    wr_valid = 0;
    flush = 1;
    @(negedge clk);
    flush = 0;
  end

  always @(posedge clk) if (swap) swaps++;

  // reader
  initial begin
    @(posedge rst_n);
    while (next_rd < TOTAL) begin
      @(negedge clk);
      if (rd_bank_valid) begin
        checks++;
        if (!(rd_count == D || (next_rd + int'(rd_count) == TOTAL))) failures++;
        for (int i = 0; i < int'(rd_count); i++) begin
          rd_addr = i[$clog2(D)-1:0];
          #1;
          checks++;
          if (rd_data != W'(next_rd)) begin
            failures++;
            $display("rd %0d got %0d", next_rd, rd_data);
          end
          next_rd++;
          repeat ((next_rd / 64) % 2 ? 3 : 0) @(negedge clk);   // slow phases
        end
        @(negedge clk);
        rd_release = 1;
        @(negedge clk);
        rd_release = 0;
      end
    end
    repeat (3) @(negedge clk);
    checks += 4;
    if (!empty) failures++;
    if (overlap == 0) failures++;
    if (stalls == 0) failures++;
    if (swaps != (TOTAL + D - 1) / D) failures++;
    $display("swaps=%0d overlap=%0d stalls=%0d", swaps, overlap, stalls);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

// global_buffer: on-chip SRAM that holds the Gaussian parameters brought in
// from DRAM, read by the step-1 and step-2 loaders.
//
// DEPTH words of WIDTH bits, one write port (the DRAM fill path) and one
// synchronous read port: rdata shows mem[raddr] one cycle after re and holds
// it until the next read. The accelerator uses two instances, one for the
// geometry (means, scales, rotations) read by step 1 and one for opacity and
// SH coefficients read by step 2. The global buffer is the paper's; the split
// in two, the sizes and the port timing are this design's choice.
module global_buffer #(
  parameter int WIDTH = 320,
  parameter int DEPTH = 2048
) (
  input  logic                     clk,
  input  logic                     we,
  input  logic [$clog2(DEPTH)-1:0] waddr,
  input  logic [WIDTH-1:0]         wdata,
  input  logic                     re,
  input  logic [$clog2(DEPTH)-1:0] raddr,
  output logic [WIDTH-1:0]         rdata
);
  logic [WIDTH-1:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (we) mem[waddr] <= wdata;
    if (re) rdata <= mem[raddr];
  end
endmodule

// cluster_fifo: the FIFO queue of the Cluster Identification Engine that holds
// cluster centroid/radius records (gs_pkg::cluster_t) until the PE array
// takes them.
//
// A synchronous FIFO of DEPTH entries (a power of two) with valid/ready on
// both sides. push_ready is low when full; pop_valid is high when not empty
// and pop_data shows the oldest entry (first-word fall-through). A push and
// a pop may happen in the same cycle. The FIFO is the paper's; depth and
// handshake are this design's choice.
module cluster_fifo
  import gs_pkg::*;
#(
  parameter int DEPTH = 16
) (
  input  logic     clk,
  input  logic     rst_n,
  input  logic     push_valid,
  output logic     push_ready,
  input  cluster_t push_data,
  output logic     pop_valid,
  input  logic     pop_ready,
  output cluster_t pop_data,
  output logic [$clog2(DEPTH):0] level
);
  localparam int AW = $clog2(DEPTH);
  cluster_t mem [DEPTH];
  logic [AW:0] wptr, rptr;
  logic push, pop;

  assign level      = wptr - rptr;
  assign push_ready = (level != (AW+1)'(DEPTH));
  assign pop_valid  = (level != '0);
  assign pop_data   = mem[rptr[AW-1:0]];
  assign push       = push_valid && push_ready;
  assign pop        = pop_valid && pop_ready;

  always_ff @(posedge clk) begin
    if (push) mem[wptr[AW-1:0]] <= push_data;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wptr <= '0;
      rptr <= '0;
    end else begin
      if (push) wptr <= wptr + 1'b1;
      if (pop)  rptr <= rptr + 1'b1;
    end
  end

  a_no_overflow: assert property (@(posedge clk) disable iff (!rst_n) level <= (AW+1)'(DEPTH));
endmodule

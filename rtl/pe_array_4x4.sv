// pe_array_4x4: the Cluster Identification Engine's 4x4 processing-element
// array for the projection matrix multiplication.
//
// PE (i,j) multiplies matrix element mat[i][j] by vector element vec[j] and
// adds the partial sum arriving from PE (i,j-1); the last PE of row i
// therefore produces res[i] = sum_j mat[i][j]*vec[j]. With vec = (x,y,z,1)
// and mat the world-to-camera matrix this gives a cluster centroid in camera
// coordinates. One vector is accepted every cycle; res and out_valid are
// registered, one cycle after in_valid. The 4x4 PE array is the paper's;
// the row-chained dataflow and single-cycle latency are this design's choice.
module pe_array_4x4
  import gs_pkg::*;
(
  input  logic           clk,
  input  logic           rst_n,
  input  logic           en,        // pipeline advance
  input  logic           in_valid,
  input  fx_t [3:0][3:0] mat,
  input  fx_t [3:0]      vec,
  output logic           out_valid,
  output fx_t [3:0]      res
);
  fx_t [3:0][4:0] psum;   // psum[i][j] enters PE (i,j)

  for (genvar i = 0; i < 4; i++) begin : g_row
    assign psum[i][0] = '0;
    for (genvar j = 0; j < 4; j++) begin : g_col
      pe u_pe (
        .a       (mat[i][j]),
        .b       (vec[j]),
        .psum_in (psum[i][j]),
        .psum_out(psum[i][j+1])
      );
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      res       <= '0;
    end else if (en) begin
      out_valid <= in_valid;
      for (int i = 0; i < 4; i++) res[i] <= psum[i][4];
    end
  end
endmodule

// depth_sorter: depth sorting of the Gaussians of one tile.
//
// An insertion-sort register array of N entries. Each cycle with in_valid
// one (key, val) pair is inserted at its place: every entry whose key is
// larger than in_key moves one position up, so the array stays sorted by
// ascending key (nearest Gaussian first); equal keys keep their arrival
// order. clear empties the array. The sorted contents are read
// combinationally through rd_idx (rd_val, rd_key); count gives the number of
// entries. Inserting into a full array drops the farthest entry.
// Sorting by depth per tile is the paper's; the insertion-sort structure is
// this design's choice.
module depth_sorter
  import gs_pkg::*;
#(
  parameter int N    = 64,
  parameter int VW   = 6
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic                  clear,
  input  logic                  in_valid,
  input  fx_t                   in_key,
  input  logic [VW-1:0]         in_val,
  input  logic [$clog2(N)-1:0]  rd_idx,
  output fx_t                   rd_key,
  output logic [VW-1:0]         rd_val,
  output logic [$clog2(N):0]    count
);
  fx_t           keys [N];
  logic [VW-1:0] vals [N];
  logic [N-1:0]  le;

  always_comb begin
    for (int i = 0; i < N; i++) le[i] = (i < int'(count)) && (keys[i] <= in_key);
  end

  assign rd_key = keys[rd_idx];
  assign rd_val = vals[rd_idx];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      count <= '0;
      for (int i = 0; i < N; i++) begin
        keys[i] <= '0;
        vals[i] <= '0;
      end
    end else if (clear) begin
      count <= '0;
    end else if (in_valid) begin
      if (int'(count) < N) count <= count + 1'b1;
      for (int i = 0; i < N; i++) begin
        if (le[i]) begin
          keys[i] <= keys[i];
          vals[i] <= vals[i];
        end else if (i == 0 || le[i-1]) begin
          keys[i] <= in_key;
          vals[i] <= in_val;
        end else begin
          keys[i] <= keys[i-1];
          vals[i] <= vals[i-1];
        end
      end
    end
  end
endmodule

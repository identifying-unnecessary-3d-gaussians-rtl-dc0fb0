// gaussian_distribute: the Gaussian distribution module of the step-2 engine.
//
// Takes one Gaussian at a time (its index in the current batch, projected
// centre (u, v) and 3-sigma radius r in pixels) and emits, one per cycle, a
// (tile, index) pair for every TILE x TILE screen tile that the square
// [u-r, u+r] x [v-r, v+r] overlaps, clipped to the image. Tiles are numbered
// in raster order, tile = ty * (IMG_W/TILE) + tx. A Gaussian that covers k
// tiles takes max(k,1) cycles; in_ready is high when the unit is idle, and
// idle is high when no pairs remain. IMG_W, IMG_H must be multiples of TILE,
// TILE a power of two.
// Tile distribution is the paper's; the square footprint and the tile size
// follow the 3D Gaussian splatting renderer; the iteration order is this
// design's.
module gaussian_distribute
  import gs_pkg::*;
#(
  parameter int IMG_W = 128,
  parameter int IMG_H = 128,
  parameter int TILE  = 16,
  parameter int IDX_W = 6
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             in_valid,
  output logic             in_ready,
  input  logic [IDX_W-1:0] in_idx,
  input  fx_t              in_u,
  input  fx_t              in_v,
  input  logic [15:0]      in_radius,
  output logic             out_valid,
  output logic [$clog2((IMG_W/TILE)*(IMG_H/TILE))-1:0] out_tile,
  output logic [IDX_W-1:0] out_idx,
  output logic             idle
);
  localparam int TX = IMG_W / TILE;
  localparam int TY = IMG_H / TILE;
  localparam int TW = $clog2(TX * TY);
  localparam int SH = $clog2(TILE);

  logic        busy;
  logic [15:0] x0, x1, y1, cx, cy;
  logic [IDX_W-1:0] idx;
  int          umin, umax, vmin, vmax;
  logic        any;
  logic [15:0] nx0, nx1, ny0, ny1;

  always_comb begin
    umin = int'(in_u >>> FRAC) - int'(in_radius);
    umax = int'(in_u >>> FRAC) + int'(in_radius);
    vmin = int'(in_v >>> FRAC) - int'(in_radius);
    vmax = int'(in_v >>> FRAC) + int'(in_radius);
    any  = (umax >= 0) && (umin < IMG_W) && (vmax >= 0) && (vmin < IMG_H);
    nx0  = (umin < 0) ? 16'd0 : 16'(umin >>> SH);
    ny0  = (vmin < 0) ? 16'd0 : 16'(vmin >>> SH);
    nx1  = (umax >= IMG_W) ? 16'(TX - 1) : 16'(umax >>> SH);
    ny1  = (vmax >= IMG_H) ? 16'(TY - 1) : 16'(vmax >>> SH);
  end

  assign in_ready  = !busy;
  assign idle      = !busy;
  assign out_valid = busy;
  assign out_tile  = TW'(cy * 16'(TX) + cx);
  assign out_idx   = idx;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy <= 1'b0;
      x0 <= '0; x1 <= '0; y1 <= '0; cx <= '0; cy <= '0; idx <= '0;
    end else if (!busy) begin
      if (in_valid && any) begin
        busy <= 1'b1;
        x0 <= nx0; x1 <= nx1; y1 <= ny1;
        cx <= nx0; cy <= ny0;
        idx <= in_idx;
      end
    end else begin
      if (cx == x1) begin
        cx <= x0;
        if (cy == y1) busy <= 1'b0;
        else cy <= cy + 1'b1;
      end else begin
        cx <= cx + 1'b1;
      end
    end
  end
endmodule

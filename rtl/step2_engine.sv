// step2_engine: the step-2 engine.
//
// Receives the Gaussians identified by step 1 (splat_t), fetches their
// opacity and SH coefficients from the appearance global buffer, and stores
// the combined records in the fill bank of a ping-pong buffer. Each full bank
// (a batch of up to PP_DEPTH Gaussians) is rendered while the other bank
// fills:
//   1. distribution: gaussian_distribute lists, for every TILE x TILE tile,
//      the batch Gaussians whose 3-sigma square overlaps it;
//   2. per tile with a non-empty list: the list is sorted by depth
//      (depth_sorter, one insertion per cycle);
//   3. per tile: the sorted Gaussians are blended front to back into every
//      pixel of the tile (alpha_blend, one pixel-Gaussian pair per cycle),
//      the colour coming from sh_color.
// Per-pixel colour and transmittance live in an on-chip frame accumulator
// that carries over from one batch to the next. After the last batch of a
// frame the image is streamed out in raster order (pix_*, 8 bits per
// channel, one pixel per cycle) and frame_done rises.
//
// Timing: frame_start clears the accumulator (IMG_W*IMG_H cycles) and opens
// a frame; loading may proceed meanwhile, processing waits. A batch takes
// about n (distribution) + sum over tiles of (k_t sort + k_t*TILE^2 blend)
// cycles, k_t being the Gaussians listed in tile t. upstream_done (step 1
// finished) flushes a partly filled bank.
// Blending order: Gaussians are depth sorted within a batch, and batches are
// blended in arrival order, so the image equals the reference renderer's when
// batches arrive front to back; this ordering across batches, the
// accumulator and the one-pair-per-cycle datapath are this design's choices.
module step2_engine
  import gs_pkg::*;
#(
  parameter int PP_DEPTH = 64,
  parameter int GB_DEPTH = 2048,
  parameter int IMG_W    = 128,
  parameter int IMG_H    = 128,
  parameter int TILE     = 16
) (
  input  logic        clk,
  input  logic        rst_n,
  input  view_t       view,
  input  logic        frame_start,
  input  logic        upstream_done,
  input  logic        in_valid,
  output logic        in_ready,
  input  splat_t      in_splat,
  output logic        gb_re,
  output logic [$clog2(GB_DEPTH)-1:0] gb_raddr,
  input  attr_t       gb_rdata,
  output logic        pix_valid,
  output logic [15:0] pix_x,
  output logic [15:0] pix_y,
  output logic [23:0] pix_rgb,
  output logic        frame_done,
  output logic [31:0] cnt_loaded,
  output logic [31:0] cnt_pairs,
  output logic [31:0] cnt_blends,
  output logic [31:0] cnt_swaps,
  output logic [31:0] cnt_batches,
  output logic [31:0] cnt_stalls
);
  typedef struct packed {
    splat_t s;
    attr_t  a;
  } rec_t;

  localparam int IW   = $clog2(PP_DEPTH);
  localparam int TX   = IMG_W / TILE;
  localparam int NT   = TX * (IMG_H / TILE);
  localparam int TW   = $clog2(NT);
  localparam int NPIX = IMG_W * IMG_H;
  localparam int PW   = $clog2(NPIX);
  localparam int SHT  = $clog2(TILE);

  // ---------------- loader ----------------
  logic   pend, wr_ready, wr_fire, flush, flushed, pp_empty, swap;
  splat_t pend_splat;

  assign wr_fire  = pend && wr_ready;
  assign in_ready = !pend || wr_fire;
  assign gb_re    = in_valid && in_ready;
  assign gb_raddr = in_splat.gid[$clog2(GB_DEPTH)-1:0];
  assign flush    = upstream_done && !in_valid && !pend && !flushed;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      pend <= 1'b0; pend_splat <= '0; flushed <= 1'b0;
      cnt_loaded <= '0; cnt_stalls <= '0; cnt_swaps <= '0;
    end else begin
      if (gb_re) begin
        pend       <= 1'b1;
        pend_splat <= in_splat;
      end else if (wr_fire) begin
        pend <= 1'b0;
      end
      if (frame_start) flushed <= 1'b0;
      else if (flush)  flushed <= 1'b1;
      if (wr_fire) cnt_loaded <= cnt_loaded + 1;
      if (pend && !wr_ready) cnt_stalls <= cnt_stalls + 1;
      if (swap) cnt_swaps <= cnt_swaps + 1;
    end
  end

  // ---------------- ping-pong buffer ----------------
  logic          rd_bank_valid, rd_release;
  logic [IW:0]   rd_count;
  logic [IW-1:0] rd_addr;
  rec_t          rec;

  pingpong_buffer #(.WIDTH($bits(rec_t)), .DEPTH(PP_DEPTH)) u_pp (
    .clk, .rst_n,
    .wr_valid(pend), .wr_ready, .wr_data({pend_splat, gb_rdata}), .flush,
    .rd_bank_valid, .rd_count, .rd_addr, .rd_data(rec), .rd_release,
    .swap, .empty(pp_empty)
  );

  // ---------------- batch processing ----------------
  typedef enum logic [2:0] {P_IDLE, P_DIST, P_DWAIT, P_TILE, P_SORT, P_BLEND, P_OUT, P_DONE} pstate_t;
  pstate_t       st;
  logic          clearing;
  logic [PW-1:0] cidx, oidx;
  logic [IW-1:0] didx, k;
  logic [IW:0]   g;
  logic [TW-1:0] tile;
  logic [2*SHT-1:0] p;
  logic [IW:0]   tcnt  [NT];
  logic [IW-1:0] tlist [NT*PP_DEPTH];

  // distribution
  logic          d_in_valid, d_in_ready, d_out_valid, d_idle;
  logic [TW-1:0] d_tile;
  logic [IW-1:0] d_idx;
  assign d_in_valid = (st == P_DIST);
  gaussian_distribute #(.IMG_W(IMG_W), .IMG_H(IMG_H), .TILE(TILE), .IDX_W(IW)) u_dist (
    .clk, .rst_n,
    .in_valid(d_in_valid), .in_ready(d_in_ready), .in_idx(didx),
    .in_u(rec.s.u), .in_v(rec.s.v), .in_radius(rec.s.radius),
    .out_valid(d_out_valid), .out_tile(d_tile), .out_idx(d_idx), .idle(d_idle)
  );

  // sorting
  logic          s_clear, s_in_valid;
  fx_t           s_key;
  logic [IW-1:0] s_val, s_rd_val;
  logic [IW:0]   s_count;
  logic [IW-1:0] list_entry;
  assign list_entry = tlist[{tile, k}];
  assign s_clear    = (st == P_TILE);
  assign s_in_valid = (st == P_SORT);
  assign s_key      = rec.s.depth;
  assign s_val      = list_entry;
  depth_sorter #(.N(PP_DEPTH), .VW(IW)) u_sort (
    .clk, .rst_n, .clear(s_clear), .in_valid(s_in_valid), .in_key(s_key), .in_val(s_val),
    .rd_idx(g[IW-1:0]), .rd_key(), .rd_val(s_rd_val), .count(s_count)
  );

  always_comb begin
    case (st)
      P_DIST:  rd_addr = didx;
      P_SORT:  rd_addr = list_entry;
      default: rd_addr = s_rd_val;
    endcase
  end

  // blending
  rgb_t          color, c_rd, c_new;
  fx_t           t_rd, t_new;
  logic          hit;
  logic [15:0]   bx, by;
  logic [PW-1:0] baddr;
  fx_t           acc_t [NPIX];
  rgb_t          acc_c [NPIX];

  assign bx    = 16'((32'(tile) % TX) * TILE) + 16'(p[SHT-1:0]);
  assign by    = 16'((32'(tile) / TX) * TILE) + 16'(p[2*SHT-1:SHT]);
  assign baddr = (st == P_OUT) ? oidx : PW'(32'(by) * IMG_W + 32'(bx));
  assign t_rd  = acc_t[baddr];
  assign c_rd  = acc_c[baddr];

  sh_color u_sh (.mean(rec.s.mean), .campos(view.campos), .sh(rec.a.shc), .rgb(color));

  alpha_blend u_blend (
    .px(bx), .py(by), .u(rec.s.u), .v(rec.s.v), .ca(rec.s.ca), .cb(rec.s.cb), .cc(rec.s.cc),
    .opacity(rec.a.opacity), .color, .t_in(t_rd), .c_in(c_rd),
    .t_out(t_new), .c_out(c_new), .hit
  );

  always_ff @(posedge clk) begin
    if (clearing) begin
      acc_t[cidx] <= FX_ONE;
      acc_c[cidx] <= '0;
    end else if (st == P_BLEND) begin
      acc_t[baddr] <= t_new;
      acc_c[baddr] <= c_new;
    end
    if (d_out_valid) tlist[{d_tile, tcnt[d_tile][IW-1:0]}] <= d_idx;
  end

  assign rd_release = (st == P_TILE && tcnt[tile] == '0 && tile == TW'(NT-1)) ||
                      (st == P_BLEND && p == '1 && g == s_count - 1'b1 && tile == TW'(NT-1));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st <= P_IDLE; clearing <= 1'b0; cidx <= '0; oidx <= '0;
      didx <= '0; k <= '0; g <= '0; tile <= '0; p <= '0;
      for (int i = 0; i < NT; i++) tcnt[i] <= '0;
      cnt_pairs <= '0; cnt_blends <= '0; cnt_batches <= '0;
    end else begin
      if (frame_start) begin
        clearing <= 1'b1;
        cidx     <= '0;
      end else if (clearing) begin
        cidx <= cidx + 1'b1;
        if (cidx == PW'(NPIX-1)) clearing <= 1'b0;
      end
      if (d_out_valid) begin
        tcnt[d_tile] <= tcnt[d_tile] + 1'b1;
        cnt_pairs    <= cnt_pairs + 1;
      end
      if (st == P_BLEND && hit) cnt_blends <= cnt_blends + 1;
      if (rd_release) cnt_batches <= cnt_batches + 1;

      case (st)
        P_IDLE: begin
          if (!clearing && !frame_start) begin
            if (rd_bank_valid) begin
              for (int i = 0; i < NT; i++) tcnt[i] <= '0;
              didx <= '0;
              st   <= P_DIST;
            end else if (flushed && pp_empty && !pend) begin
              oidx <= '0;
              st   <= P_OUT;
            end
          end
        end
        P_DIST: if (d_in_ready) begin
          didx <= didx + 1'b1;
          if ((IW+1)'(didx) == rd_count - 1'b1) st <= P_DWAIT;
        end
        P_DWAIT: if (d_idle) begin
          tile <= '0;
          st   <= P_TILE;
        end
        P_TILE: begin
          k <= '0;
          if (tcnt[tile] == '0) begin
            if (tile == TW'(NT-1)) st <= P_IDLE;
            else tile <= tile + 1'b1;
          end else begin
            st <= P_SORT;
          end
        end
        P_SORT: begin
          k <= k + 1'b1;
          if ((IW+1)'(k) == tcnt[tile] - 1'b1) begin
            g  <= '0;
            p  <= '0;
            st <= P_BLEND;
          end
        end
        P_BLEND: begin
          p <= p + 1'b1;
          if (p == '1) begin
            g <= g + 1'b1;
            if (g == s_count - 1'b1) begin
              if (tile == TW'(NT-1)) st <= P_IDLE;
              else begin
                tile <= tile + 1'b1;
                st   <= P_TILE;
              end
            end
          end
        end
        P_OUT: begin
          oidx <= oidx + 1'b1;
          if (oidx == PW'(NPIX-1)) st <= P_DONE;
        end
        P_DONE: if (frame_start) st <= P_IDLE;
        default: st <= P_IDLE;
      endcase
    end
  end

  // pixel output
  function automatic logic [7:0] to8(fx_t c);
    fx_t s;
    if (c <= 0) return 8'd0;
    if (c >= FX_ONE) return 8'd255;
    s = c * 255;
    return s[23:16];
  endfunction

  assign pix_valid  = (st == P_OUT);
  assign pix_x      = 16'(32'(oidx) % IMG_W);
  assign pix_y      = 16'(32'(oidx) / IMG_W);
  assign pix_rgb    = {to8(c_rd.r), to8(c_rd.g), to8(c_rd.b)};
  assign frame_done = (st == P_DONE);

  a_tp: assert property (@(posedge clk) disable iff (!rst_n) st == P_BLEND |-> s_count != '0);
endmodule

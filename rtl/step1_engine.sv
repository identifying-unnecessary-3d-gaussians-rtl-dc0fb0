// step1_engine: the step-1 engine.
//
// Receives the clusters that the Cluster Identification Engine kept, loads
// the Gaussians of each (global-buffer entries first .. first+count-1) into
// the fill bank of a ping-pong buffer, and, as soon as a bank is full, runs
// step 1 (step1_preprocess) on its Gaussians while the other bank fills.
// Gaussians whose footprint touches the image leave on out_* as splat_t
// records; the others are dropped here and never reach step 2.
//
// Timing: the loader reads one Gaussian per cycle from the synchronous
// global buffer (one cycle latency, a pending register holds the word while
// the ping-pong buffer is full). The processing side feeds one Gaussian per
// cycle into the one-stage step-1 datapath; a full output register with
// out_ready low stalls it. When upstream_done is high and all kept clusters
// are loaded, the partly filled bank is flushed; done rises once everything
// has been processed and stays high until frame_start.
// The ping-pong buffering and the start-when-full rule are the paper's; the
// loader, the flush and the handshakes are this design's choice.
module step1_engine
  import gs_pkg::*;
#(
  parameter int PP_DEPTH = 64,
  parameter int GB_DEPTH = 2048
) (
  input  logic     clk,
  input  logic     rst_n,
  input  view_t    view,
  input  logic     frame_start,
  input  logic     upstream_done,
  input  logic     cl_valid,
  output logic     cl_ready,
  input  cluster_t cl_cluster,
  output logic     gb_re,
  output logic [$clog2(GB_DEPTH)-1:0] gb_raddr,
  input  geom_t    gb_rdata,
  output logic     out_valid,
  input  logic     out_ready,
  output splat_t   out_splat,
  output logic     done,
  output logic [31:0] cnt_loaded,
  output logic [31:0] cnt_culled,
  output logic [31:0] cnt_swaps,
  output logic [31:0] cnt_stalls
);
  localparam int AW = $clog2(PP_DEPTH);
  localparam int W  = GID_W + $bits(geom_t);

  // ---------------- loader ----------------
  logic [GID_W-1:0] cur, rem;
  logic             busy;       // a cluster is being loaded
  logic             pend;       // gb_rdata holds a word not yet written
  logic [GID_W-1:0] pend_gid;
  logic             wr_ready, wr_fire, flush, flushed, pp_empty, swap;

  assign cl_ready = !busy;
  assign gb_re    = busy && (!pend || wr_fire);
  assign gb_raddr = cur[$clog2(GB_DEPTH)-1:0];
  assign wr_fire  = pend && wr_ready;
  assign flush    = upstream_done && !busy && !cl_valid && !pend && !flushed;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy <= 1'b0; pend <= 1'b0; cur <= '0; rem <= '0; pend_gid <= '0;
      flushed <= 1'b0; cnt_loaded <= '0; cnt_stalls <= '0; cnt_swaps <= '0;
    end else begin
      if (frame_start) flushed <= 1'b0;
      else if (flush)  flushed <= 1'b1;
      if (cl_valid && cl_ready) begin
        busy <= (cl_cluster.count != '0);
        cur  <= cl_cluster.first;
        rem  <= cl_cluster.count;
      end else if (gb_re) begin
        cur  <= cur + 1'b1;
        rem  <= rem - 1'b1;
        if (rem == 1) busy <= 1'b0;
      end
      if (gb_re) begin
        pend     <= 1'b1;
        pend_gid <= cur;
      end else if (wr_fire) begin
        pend <= 1'b0;
      end
      if (wr_fire) cnt_loaded <= cnt_loaded + 1;
      if (pend && !wr_ready) cnt_stalls <= cnt_stalls + 1;
      if (swap) cnt_swaps <= cnt_swaps + 1;
    end
  end

  // ---------------- ping-pong buffer ----------------
  logic          rd_bank_valid, rd_release;
  logic [AW:0]   rd_count;
  logic [AW-1:0] ridx;
  logic [W-1:0]  rd_data;

  pingpong_buffer #(.WIDTH(W), .DEPTH(PP_DEPTH)) u_pp (
    .clk, .rst_n,
    .wr_valid(pend), .wr_ready, .wr_data({pend_gid, gb_rdata}), .flush,
    .rd_bank_valid, .rd_count, .rd_addr(ridx), .rd_data, .rd_release,
    .swap, .empty(pp_empty)
  );

  // ---------------- step-1 datapath ----------------
  logic   en, p_valid, p_visible;
  splat_t p_splat;

  assign en         = !out_valid || out_ready;
  assign rd_release = en && rd_bank_valid && ((AW+1)'(ridx) == rd_count - 1'b1);

  step1_preprocess u_s1 (
    .clk, .rst_n, .en, .view,
    .in_valid(rd_bank_valid),
    .in_gid(rd_data[W-1 -: GID_W]),
    .in_geom(geom_t'(rd_data[$bits(geom_t)-1:0])),
    .out_valid(p_valid), .out_visible(p_visible), .out_splat(p_splat)
  );

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      ridx       <= '0;
      cnt_culled <= '0;
    end else begin
      if (en && rd_bank_valid) ridx <= rd_release ? '0 : ridx + 1'b1;
      if (en && p_valid && !p_visible) cnt_culled <= cnt_culled + 1;
    end
  end

  assign out_valid = p_valid && p_visible;
  assign out_splat = p_splat;
  assign done      = flushed && pp_empty && !busy && !pend && !p_valid;
endmodule

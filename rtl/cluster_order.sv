// cluster_order: cluster ordering - issues the clusters of the scene to the
// Cluster Identification Engine, most frequently needed first.
//
// Holds the cluster table (written through tbl_* from DRAM, indexed by
// cluster id), an order table (a permutation of the ids) and a usage counter
// per cluster. On frame_start the clusters are issued in order-table order,
// one per cycle while out_ready is high, with the record's id field set to
// the cluster id. Every hit_valid (a cluster the CIE kept) increments that
// cluster's usage counter. On frame_end one reverse bubble pass walks the
// order table from the back to the front carrying the cluster with the
// highest usage seen so far, so that the most used cluster reaches the
// front and others move up by one; over successive frames the order tends
// to descending usage. A pass takes n_clusters cycles; ready is high when a
// new frame may start. After reset the order table is initialised to the
// identity and the counters to zero (N_CLUSTERS cycles).
// Prioritising clusters by how often they are used is the paper's; the
// counters, the bubble pass and the on-chip table are this design's choice.
module cluster_order
  import gs_pkg::*;
#(
  parameter int N_CLUSTERS = 4096
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        tbl_we,
  input  logic [$clog2(N_CLUSTERS)-1:0] tbl_addr,
  input  cluster_t    tbl_data,
  input  logic [15:0] n_clusters,
  input  logic        frame_start,
  input  logic        frame_end,
  output logic        ready,
  output logic        issue_done,
  output logic        out_valid,
  input  logic        out_ready,
  output cluster_t    out_cluster,
  input  logic        hit_valid,
  input  logic [CID_W-1:0] hit_id,
  output logic [31:0] cnt_reorder_moves
);
  localparam int AW = $clog2(N_CLUSTERS);
  typedef enum logic [2:0] {O_INIT, O_IDLE, O_ISSUE, O_WAIT, O_SORT} ostate_t;

  cluster_t    ctbl  [N_CLUSTERS];
  logic [AW-1:0] order [N_CLUSTERS];
  logic [15:0] usage [N_CLUSTERS];

  ostate_t       st;
  logic [AW-1:0] i;
  logic [AW-1:0] cur;
  logic [AW-1:0] nxt;
  logic          cur_wins;

  assign ready      = (st == O_IDLE);
  assign issue_done = (st == O_WAIT);
  assign out_valid  = (st == O_ISSUE);
  always_comb begin
    out_cluster    = ctbl[order[i]];
    out_cluster.id = CID_W'(order[i]);
  end
  assign nxt      = order[i];
  assign cur_wins = usage[cur] > usage[nxt];

  always_ff @(posedge clk) begin
    if (tbl_we) ctbl[tbl_addr] <= tbl_data;
    if (st == O_INIT) begin
      order[i] <= i;
      usage[i] <= '0;
    end else begin
      if (hit_valid && usage[hit_id[AW-1:0]] != '1) usage[hit_id[AW-1:0]] <= usage[hit_id[AW-1:0]] + 1'b1;
      if (st == O_SORT) begin
        if (i == '1) order[0] <= cur;                 // final write of the pass
        else order[i + 1'b1] <= cur_wins ? nxt : cur;
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st <= O_INIT;
      i  <= '0;
      cur <= '0;
      cnt_reorder_moves <= '0;
    end else begin
      case (st)
        O_INIT: begin
          i <= i + 1'b1;
          if (i == AW'(N_CLUSTERS-1)) st <= O_IDLE;
        end
        O_IDLE: if (frame_start && n_clusters != 0) begin
          i  <= '0;
          st <= O_ISSUE;
        end
        O_ISSUE: if (out_ready) begin
          if (16'(i) == n_clusters - 1'b1) st <= O_WAIT;
          else i <= i + 1'b1;
        end
        O_WAIT: if (frame_end) begin
          if (n_clusters < 2) st <= O_IDLE;
          else begin
            cur <= order[AW'(n_clusters - 1'b1)];
            i   <= AW'(n_clusters - 16'd2);
            st  <= O_SORT;
          end
        end
        O_SORT: begin
          if (i == '1) st <= O_IDLE;
          else begin
            if (cur_wins) cnt_reorder_moves <= cnt_reorder_moves + 1;
            else cur <= nxt;
            i <= i - 1'b1;
          end
        end
        default: st <= O_IDLE;
      endcase
    end
  end
endmodule

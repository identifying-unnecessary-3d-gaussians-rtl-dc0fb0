// pingpong_buffer: the local double buffer of the step-1 and step-2 engines.
//
// Two banks of DEPTH records. The fill side writes records into the current
// fill bank; when the bank holds DEPTH records, or when flush closes a partly
// filled bank at the end of a frame, the bank becomes full and the fill side
// moves to the other bank. The process side sees the oldest full bank:
// rd_bank_valid, its record count rd_count, and any record through rd_addr
// (combinational read). rd_release frees the bank after processing. Filling
// thus overlaps with processing, and wr_ready drops only when both banks are
// full (the fill side stalls). swap pulses when a bank closes.
// Flush may be given together with a write; the write lands first. The
// ping-pong scheme is the paper's; the flush and the port set are this
// design's choice.
module pingpong_buffer #(
  parameter int WIDTH = 320,
  parameter int DEPTH = 64
) (
  input  logic                       clk,
  input  logic                       rst_n,
  input  logic                       wr_valid,
  output logic                       wr_ready,
  input  logic [WIDTH-1:0]           wr_data,
  input  logic                       flush,
  output logic                       rd_bank_valid,
  output logic [$clog2(DEPTH):0]     rd_count,
  input  logic [$clog2(DEPTH)-1:0]   rd_addr,
  output logic [WIDTH-1:0]           rd_data,
  input  logic                       rd_release,
  output logic                       swap,
  output logic                       empty
);
  localparam int AW = $clog2(DEPTH);
  logic [WIDTH-1:0] mem [2*DEPTH];
  logic [AW:0] cnt [2];
  logic [1:0]  full;
  logic        wb, rb;
  logic        wr;
  logic [AW:0] cnt_next;

  assign wr_ready      = !full[wb];
  assign wr            = wr_valid && wr_ready;
  assign cnt_next      = cnt[wb] + (AW+1)'(wr);
  assign rd_bank_valid = full[rb];
  assign rd_count      = cnt[rb];
  assign rd_data       = mem[{rb, rd_addr}];
  assign empty         = !full[0] && !full[1] && cnt[wb] == '0;
  assign swap          = !full[wb] && (cnt_next == (AW+1)'(DEPTH) || (flush && cnt_next != '0));

  always_ff @(posedge clk) begin
    if (wr) mem[{wb, cnt[wb][AW-1:0]}] <= wr_data;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cnt[0] <= '0;
      cnt[1] <= '0;
      full   <= '0;
      wb     <= 1'b0;
      rb     <= 1'b0;
    end else begin
      if (!full[wb]) cnt[wb] <= cnt_next;
      if (swap) begin
        full[wb] <= 1'b1;
        wb       <= !wb;
      end
      if (rd_release && full[rb]) begin
        full[rb] <= 1'b0;
        cnt[rb]  <= '0;
        rb       <= !rb;
      end
    end
  end

  a_release_full: assert property (@(posedge clk) disable iff (!rst_n) rd_release |-> full[rb]);
endmodule

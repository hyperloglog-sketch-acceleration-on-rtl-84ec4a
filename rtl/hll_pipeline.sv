// hll_pipeline: one HyperLogLog aggregation pipeline.
//
// The chain of the paper's single-pipeline engine: Murmur3 hash (6 cycles),
// index extractor (1), leading zero detector (1) and the bucket memory with
// its read-compare-write (hll_buckets). It takes one 32-bit item per cycle
// (II = 1) and never stalls while its buckets are in RUN mode; 'busy' is high
// while the buckets clear after reset or drain, and the item stream must be
// held off then. in_last marks the end of a data set; 'done' pulses when its
// update has reached the bucket memory, LATENCY + 2 cycles after in_last. On
// drain_start the pipeline streams its 2^PREC counters out (out_valid,
// out_rank, out_last) and is left empty.
//
// rst_n also switches off the assertions of the bucket memory ('disable
// iff'), so lint reports it as used both as an asynchronous reset and in
// clocked logic; only the assertions use it that way.
module hll_pipeline #(
  parameter int unsigned HASH_W = hll_pkg::HASH_W,
  parameter int unsigned PREC   = hll_pkg::PREC,
  parameter logic [63:0] SEED   = 64'd0,
  parameter int unsigned RANK_W = hll_pkg::rank_w(HASH_W, PREC)
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              in_valid,
  input  logic [31:0]       in_data,
  input  logic              in_last,
  output logic              done,
  output logic              merged,
  input  logic              drain_start,
  output logic              busy,
  output logic              out_valid,
  output logic [RANK_W-1:0] out_rank,
  output logic              out_last
);
  localparam int unsigned W = HASH_W - PREC;

  logic              h_valid, h_last;
  logic [63:0]       h_hash;
  logic              x_valid, x_last;
  logic [PREC-1:0]   x_idx;
  logic [W-1:0]      x_w;
  logic              r_valid, r_last;
  logic [PREC-1:0]   r_idx;
  logic [RANK_W-1:0] r_rank;

  hll_murmur3_64 #(.SEED(SEED)) u_hash (
    .clk, .rst_n,
    .in_valid(in_valid), .in_data(in_data), .in_last(in_last),
    .out_valid(h_valid), .out_hash(h_hash), .out_last(h_last)
  );

  hll_index_extractor #(.HASH_W(HASH_W), .PREC(PREC)) u_idx (
    .clk, .rst_n,
    .in_valid(h_valid), .in_hash(h_hash[HASH_W-1:0]), .in_last(h_last),
    .out_valid(x_valid), .out_idx(x_idx), .out_w(x_w), .out_last(x_last)
  );

  hll_lzd #(.W(W), .IDX_W(PREC), .RANK_W(RANK_W)) u_lzd (
    .clk, .rst_n,
    .in_valid(x_valid), .in_idx(x_idx), .in_w(x_w), .in_last(x_last),
    .out_valid(r_valid), .out_idx(r_idx), .out_rank(r_rank), .out_last(r_last)
  );

  hll_buckets #(.PREC(PREC), .RANK_W(RANK_W)) u_buckets (
    .clk, .rst_n,
    .in_valid(r_valid), .in_idx(r_idx), .in_rank(r_rank), .in_last(r_last),
    .done, .merged,
    .drain_start, .busy,
    .out_valid, .out_rank, .out_last
  );
endmodule

// hll_merge_buckets: folds the partial sketches of NUM_PIPES pipelines.
//
// All pipelines drain their counters in lock-step, bucket by bucket. For each
// bucket this block takes the maximum rank over the NUM_PIPES inputs (a fold
// of max) and registers it, so one merged counter leaves per cycle with one
// cycle of latency; valid and last are taken from pipeline 0. Merging by the
// per-bucket maximum is the paper's; the single register stage is this
// design's choice. An assertion checks that the inputs arrive in lock-step.
//
// rst_n also switches off the lock-step assertion ('disable iff'), so lint reports it
// as used both as an asynchronous reset and in clocked logic; only the
// assertion uses it that way.
module hll_merge_buckets #(
  parameter int unsigned NUM_PIPES = 16,
  parameter int unsigned RANK_W    = 6
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              in_valid [NUM_PIPES],
  input  logic [RANK_W-1:0] in_rank  [NUM_PIPES],
  input  logic              in_last  [NUM_PIPES],
  output logic              out_valid,
  output logic [RANK_W-1:0] out_rank,
  output logic              out_last
);
  logic [RANK_W-1:0] fold;

  always_comb begin
    fold = in_rank[0];
    for (int i = 1; i < NUM_PIPES; i++) begin
      if (in_rank[i] > fold) fold = in_rank[i];
    end
  end

  always_ff @(posedge clk) out_rank <= fold;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      out_last  <= 1'b0;
    end else begin
      out_valid <= in_valid[0];
      out_last  <= in_valid[0] && in_last[0];
    end
  end

  logic in_step;
  always_comb begin
    in_step = 1'b1;
    for (int i = 1; i < NUM_PIPES; i++) begin
      if (in_valid[i] != in_valid[0] || in_last[i] != in_last[0]) in_step = 1'b0;
    end
  end

  a_in_step: assert property (@(posedge clk) disable iff (!rst_n) in_step)
    else $error("hll_merge_buckets: pipelines out of step");
endmodule

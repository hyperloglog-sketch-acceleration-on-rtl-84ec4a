// hll_lzd: leading zero detector producing the HyperLogLog rank.
//
// For the remainder w of W bits it outputs rho(w) = (number of leading zeros
// of w) + 1, so rho ranges over 1..W+1; an all-zero w gives W+1 (49 for the
// default W = 48). The rank definition is the paper's; the count is a plain
// priority search from the most significant bit, registered once (one cycle
// of latency, II = 1). The bucket index rides along unchanged.
module hll_lzd #(
  parameter int unsigned W      = 48,
  parameter int unsigned IDX_W  = 16,
  parameter int unsigned RANK_W = hll_pkg::bits_for(W + 1)
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              in_valid,
  input  logic [IDX_W-1:0]  in_idx,
  input  logic [W-1:0]      in_w,
  input  logic              in_last,
  output logic              out_valid,
  output logic [IDX_W-1:0]  out_idx,
  output logic [RANK_W-1:0] out_rank,
  output logic              out_last
);
  logic [RANK_W-1:0] rank;

  always_comb begin
    rank = RANK_W'(W + 1);
    for (int i = 0; i < W; i++) begin
      if (in_w[i]) rank = RANK_W'(W - i);   // highest set bit wins (last assignment)
    end
  end

  always_ff @(posedge clk) begin
    out_idx  <= in_idx;
    out_rank <= rank;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      out_last  <= 1'b0;
    end else begin
      out_valid <= in_valid;
      out_last  <= in_last;
    end
  end
endmodule

// hll_index_extractor: splits a hash value into bucket index and remainder.
//
// Following the paper, the first (most significant) PREC bits of the
// HASH_W-bit hash select the bucket, idx = x[HASH_W-1 -: PREC], and the
// remaining HASH_W-PREC bits, w = x[HASH_W-PREC-1:0], go on to the leading
// zero detector (16 and 48 bits for the default H = 64, p = 16).
// The stage is registered (one cycle of latency, one item per cycle), which
// is this design's choice for timing; valid and the end-of-set marker travel
// alongside.
module hll_index_extractor #(
  parameter int unsigned HASH_W = 64,
  parameter int unsigned PREC   = 16
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     in_valid,
  input  logic [HASH_W-1:0]        in_hash,
  input  logic                     in_last,
  output logic                     out_valid,
  output logic [PREC-1:0]          out_idx,
  output logic [HASH_W-PREC-1:0]   out_w,
  output logic                     out_last
);
  always_ff @(posedge clk) begin
    out_idx <= in_hash[HASH_W-1 -: PREC];
    out_w   <= in_hash[HASH_W-PREC-1:0];
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

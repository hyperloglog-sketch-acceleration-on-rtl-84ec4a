// hll_rank_max: the max() of the bucket update, M[idx] = max(M[idx], rho(w)).
//
// Purely combinational: it returns the larger of the stored rank and the new
// rank, and raises 'update' when the new rank is strictly larger, i.e. when
// the bucket memory has to be written. Used inside hll_buckets between the
// read and the write of the read-modify-write.
module hll_rank_max #(
  parameter int unsigned RANK_W = 6
) (
  input  logic [RANK_W-1:0] cur_rank,
  input  logic [RANK_W-1:0] new_rank,
  output logic [RANK_W-1:0] max_rank,
  output logic              update
);
  always_comb begin
    update   = new_rank > cur_rank;
    max_rank = update ? new_rank : cur_rank;
  end
endmodule

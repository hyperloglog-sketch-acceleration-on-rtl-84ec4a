// hll_zero_counter: zero counter and bypass.
//
// Forwards the merged bucket stream unchanged (registered, one cycle of
// latency) to the harmonic mean, and counts on the way the number V of
// buckets whose rank is still zero. When the last bucket of a sweep passes,
// v_valid pulses with v_count = V (0..2^PREC, hence PREC+1 bits) and the
// count restarts for the next sweep. The function is the paper's; the
// registered bypass and the end-of-sweep pulse are this design's.
module hll_zero_counter #(
  parameter int unsigned PREC   = 16,
  parameter int unsigned RANK_W = 6
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              in_valid,
  input  logic [RANK_W-1:0] in_rank,
  input  logic              in_last,
  output logic              out_valid,
  output logic [RANK_W-1:0] out_rank,
  output logic              out_last,
  output logic              v_valid,
  output logic [PREC:0]     v_count
);
  logic [PREC:0] acc, acc_next;

  assign acc_next = acc + (PREC+1)'(in_rank == '0);

  always_ff @(posedge clk) out_rank <= in_rank;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      acc       <= '0;
      v_count   <= '0;
      v_valid   <= 1'b0;
      out_valid <= 1'b0;
      out_last  <= 1'b0;
    end else begin
      out_valid <= in_valid;
      out_last  <= in_valid && in_last;
      v_valid   <= in_valid && in_last;
      if (in_valid) begin
        if (in_last) begin
          v_count <= acc_next;
          acc     <= '0;
        end else begin
          acc     <= acc_next;
        end
      end
    end
  end
endmodule

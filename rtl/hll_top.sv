// hll_top: multi-pipelined HyperLogLog cardinality estimator.
//
// Data path (the paper's parallel architecture): the data partition slices
// each input word into NUM_PIPES 32-bit items; each item is hashed, split
// and ranked in its own aggregation pipeline, which keeps a private sketch of
// 2^PREC buckets. At the end of a data set all pipelines stream their
// buckets out in lock-step; the merge block takes the per-bucket maximum,
// the zero counter counts empty buckets (V), the harmonic mean forms the raw
// estimate E and the correction block picks E or linear counting. With
// NUM_PIPES = 1 this is the single-pipeline engine.
//
// Sequencing (this design's): after reset the buckets clear themselves
// (2^PREC cycles, s_tready low). The engine then accepts input words at one
// per cycle. The word carrying s_tlast ends the data set: input is held off
// (s_tready low), the pipelines finish their last updates, and their buckets
// are drained (2^PREC cycles; the drain also empties them). 2^PREC cycles
// plus a few more than the divider's width (148 in all at the defaults, 130 at
// PREC = 10) after the last word, the result appears on m_valid with m_card = E*,
// m_raw = E, m_zeros = V and m_small_range (linear counting used), all
// estimates unsigned with EST_FRAC fractional bits. The result is held until
// m_ready; then the next data set can start.
//
// Ports are in the network (322 MHz in the paper's system) clock domain.
//
// Lint notes: the per-pipeline 'merged' pulses, the exact harmonic sum z_sum
// and the linear-counting value lc_q are left unconnected here on purpose.
// They are observation points for verification (the testbenches count merge
// events through the hierarchy) and cost nothing after synthesis, which
// removes them. The reset also disables the blocks' handshake assertions
// ('disable iff'), so lint sees rst_n used both as an asynchronous reset and in
// clocked logic; only the assertions use it that way.
module hll_top #(
  parameter int unsigned NUM_PIPES = 16,
  parameter int unsigned HASH_W    = hll_pkg::HASH_W,
  parameter int unsigned PREC      = hll_pkg::PREC,
  parameter logic [63:0] SEED      = 64'd0,
  localparam int unsigned EST_W    = hll_pkg::EST_W
) (
  input  logic                    clk,
  input  logic                    rst_n,
  // item stream: NUM_PIPES 32-bit items per word
  input  logic                    s_tvalid,
  output logic                    s_tready,
  input  logic [32*NUM_PIPES-1:0] s_tdata,
  input  logic [NUM_PIPES-1:0]    s_tkeep,
  input  logic                    s_tlast,
  // cardinality result
  output logic                    m_valid,
  input  logic                    m_ready,
  output logic [EST_W-1:0]        m_card,
  output logic [EST_W-1:0]        m_raw,
  output logic [PREC:0]           m_zeros,
  output logic                    m_small_range
);
  localparam int unsigned RANK_W = hll_pkg::rank_w(HASH_W, PREC);
  localparam int unsigned Z_W    = HASH_W + 2 * PREC + 2;

  typedef enum logic [2:0] {S_INIT, S_AGG, S_FLUSH, S_COMPUTE, S_RESULT} state_t;
  state_t state;

  // partition -> pipelines
  logic              lane_valid [NUM_PIPES];
  logic [31:0]       lane_data  [NUM_PIPES];
  logic              lane_last  [NUM_PIPES];
  // pipelines -> merge
  logic              p_done     [NUM_PIPES];
  logic              p_merged   [NUM_PIPES];
  logic              p_busy     [NUM_PIPES];
  logic              p_valid    [NUM_PIPES];
  logic [RANK_W-1:0] p_rank     [NUM_PIPES];
  logic              p_last     [NUM_PIPES];
  logic              drain_start;
  // merged stream
  logic              g_valid, g_last;
  logic [RANK_W-1:0] g_rank;
  logic              b_valid, b_last;
  logic [RANK_W-1:0] b_rank;
  logic              v_valid;
  logic [PREC:0]     v_count;
  logic              e_valid;
  logic [EST_W-1:0]  e_q;
  logic [Z_W-1:0]    z_sum;
  logic              est_valid, small_range;
  logic [EST_W-1:0]  est_q, lc_q;
  logic [EST_W-1:0]  e_q_hold;
  logic [PREC:0]     v_hold;

  hll_data_partition #(.NUM_PIPES(NUM_PIPES)) u_part (
    .clk, .rst_n,
    .accept(state == S_AGG),
    .s_tvalid, .s_tready, .s_tdata, .s_tkeep, .s_tlast,
    .lane_valid, .lane_data, .lane_last
  );

  for (genvar g = 0; g < NUM_PIPES; g++) begin : g_pipe
    hll_pipeline #(.HASH_W(HASH_W), .PREC(PREC), .SEED(SEED), .RANK_W(RANK_W)) u_pipe (
      .clk, .rst_n,
      .in_valid(lane_valid[g]), .in_data(lane_data[g]), .in_last(lane_last[g]),
      .done(p_done[g]), .merged(p_merged[g]),
      .drain_start(drain_start), .busy(p_busy[g]),
      .out_valid(p_valid[g]), .out_rank(p_rank[g]), .out_last(p_last[g])
    );
  end

  hll_merge_buckets #(.NUM_PIPES(NUM_PIPES), .RANK_W(RANK_W)) u_merge (
    .clk, .rst_n,
    .in_valid(p_valid), .in_rank(p_rank), .in_last(p_last),
    .out_valid(g_valid), .out_rank(g_rank), .out_last(g_last)
  );

  hll_zero_counter #(.PREC(PREC), .RANK_W(RANK_W)) u_zero (
    .clk, .rst_n,
    .in_valid(g_valid), .in_rank(g_rank), .in_last(g_last),
    .out_valid(b_valid), .out_rank(b_rank), .out_last(b_last),
    .v_valid, .v_count
  );

  hll_harmonic_mean #(.HASH_W(HASH_W), .PREC(PREC), .RANK_W(RANK_W)) u_hmean (
    .clk, .rst_n,
    .in_valid(b_valid), .in_rank(b_rank), .in_last(b_last),
    .e_valid, .e_q, .z_sum
  );

  hll_correction #(.PREC(PREC)) u_corr (
    .clk, .rst_n,
    .v_valid, .v_count, .e_valid, .e_q,
    .est_valid, .est_q, .lc_q, .small_range
  );

  // All pipelines see the same control and the same end-of-set marker, so
  // pipeline 0 speaks for all of them.
  assign drain_start = (state == S_FLUSH) && p_done[0];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state         <= S_INIT;
      m_card        <= '0;
      m_raw         <= '0;
      m_zeros       <= '0;
      m_small_range <= 1'b0;
    end else begin
      unique case (state)
        S_INIT:    if (!p_busy[0]) state <= S_AGG;
        S_AGG:     if (s_tvalid && s_tlast) state <= S_FLUSH;
        S_FLUSH:   if (p_done[0]) state <= S_COMPUTE;
        S_COMPUTE: if (est_valid) begin
          state         <= S_RESULT;
          m_card        <= est_q;
          m_raw         <= e_q_hold;
          m_zeros       <= v_hold;
          m_small_range <= small_range;
        end
        S_RESULT:  if (m_ready && !p_busy[0]) state <= S_AGG;
        default:   state <= S_INIT;
      endcase
    end
  end

  // E and V are held for the result registers
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      e_q_hold <= '0;
      v_hold   <= '0;
    end else begin
      if (e_valid) e_q_hold <= e_q;
      if (v_valid) v_hold   <= v_count;
    end
  end

  assign m_valid = (state == S_RESULT);
endmodule

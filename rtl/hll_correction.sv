// hll_correction: small-range correction of the HyperLogLog estimate.
//
// Final estimate E* = LinearCounting(m, V) = m * ln(m / V) when the raw
// estimate E <= 5/2 * m and some bucket is still empty (V != 0), and E
// otherwise. No large-range correction is applied: with a 64-bit hash it is
// not needed. The selection rule is the paper's; how linear counting is
// evaluated is this design's.
//
// Linear counting is computed as m * ln2 * (p - log2 V). log2 V is found by
// normalising V = 2^ve * y with y in [1,2) (a priority search gives ve), and
// then producing the fraction bits of log2 y one per cycle by repeated
// squaring: y <- y*y; if y >= 2 the next bit is 1 and y <- y/2. The mantissa
// is kept to MANT_W fractional bits and LOG_FRAC fraction bits are produced,
// so the linear-counting value is ready LOG_FRAC + 2 cycles after v_valid; its
// relative error is a few 2^-LOG_FRAC. All estimates are unsigned fixed point
// with EST_FRAC fractional bits.
//
// Interface: v_valid/v_count (from the zero counter) and e_valid/e_q (from the
// harmonic mean) may arrive in either order; one cycle after both are in,
// est_valid pulses with est_q = E*, lc_q (the linear-counting value, 0 for
// V = 0) and small_range (1 when linear counting was chosen).
//
// The high bits of lc_q, and of est_q when it carries linear counting, are
// always zero: m * ln m < 2^(PREC+5), so linear counting never needs more than
// a few tens of the EST_W bits. Synthesis reports those bits as constant; the
// port keeps the common estimate width on purpose.
module hll_correction #(
  parameter int unsigned PREC     = hll_pkg::PREC,
  parameter int unsigned EST_W    = hll_pkg::EST_W,
  parameter int unsigned EST_FRAC = hll_pkg::EST_FRAC,
  parameter int unsigned LOG_FRAC = 24,
  parameter int unsigned MANT_W   = 32
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             v_valid,
  input  logic [PREC:0]    v_count,
  input  logic             e_valid,
  input  logic [EST_W-1:0] e_q,
  output logic             est_valid,
  output logic [EST_W-1:0] est_q,
  output logic [EST_W-1:0] lc_q,
  output logic             small_range
);
  localparam int unsigned VE_W   = hll_pkg::bits_for(PREC);
  localparam int unsigned L_W    = VE_W + LOG_FRAC;
  localparam int unsigned P_W    = L_W + 32 + PREC;
  localparam int unsigned SHR    = LOG_FRAC + 32 - EST_FRAC;
  localparam int unsigned CNT_W  = hll_pkg::bits_for(LOG_FRAC);
  localparam logic [EST_W-1:0] THRESH = EST_W'(5) << (PREC - 1 + EST_FRAC);

  typedef enum logic [1:0] {L_IDLE, L_NORM, L_ITER, L_DONE} lstate_t;

  lstate_t             lstate;
  logic [PREC:0]       v_q;
  logic [VE_W-1:0]     vexp;
  logic [MANT_W:0]     y;            // Q1.MANT_W
  logic [LOG_FRAC-1:0] frac;
  logic [CNT_W-1:0]    cnt;
  logic                have_e;
  logic [EST_W-1:0]    e_hold;

  // combinational helpers
  logic [VE_W-1:0]       msb;
  logic [MANT_W:0]       norm;         // Q1.MANT_W, the normalised V
  logic [2*MANT_W+1:0]   sq;
  logic [L_W-1:0]        l_q;
  logic [P_W-1:0]        prod;
  logic [EST_W-1:0]      lc_val;

  always_comb begin
    msb = '0;
    for (int i = 0; i <= PREC; i++) begin
      if (v_q[i]) msb = VE_W'(i);
    end
    norm = (MANT_W+1)'({v_q, {MANT_W{1'b0}}} >> msb);
    sq   = y * y;
    l_q  = (L_W'(PREC - vexp) << LOG_FRAC) - L_W'(frac);
    prod = (P_W'(l_q) * P_W'(hll_pkg::LN2_Q32)) << PREC;
    lc_val = (v_q == '0) ? '0 : EST_W'(prod >> SHR);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      lstate      <= L_IDLE;
      v_q         <= '0;
      vexp        <= '0;
      y           <= '0;
      frac        <= '0;
      cnt         <= '0;
      have_e      <= 1'b0;
      e_hold      <= '0;
      est_valid   <= 1'b0;
      est_q       <= '0;
      lc_q        <= '0;
      small_range <= 1'b0;
    end else begin
      est_valid <= 1'b0;
      if (e_valid) begin
        have_e <= 1'b1;
        e_hold <= e_q;
      end
      unique case (lstate)
        L_IDLE: if (v_valid) begin
          v_q    <= v_count;
          lstate <= L_NORM;
        end
        L_NORM: begin
          vexp   <= msb;
          y      <= norm[MANT_W:0];
          frac   <= '0;
          cnt    <= '0;
          lstate <= L_ITER;
        end
        L_ITER: begin
          if (sq[2*MANT_W+1]) begin
            y    <= sq[2*MANT_W+1:MANT_W+1];
            frac <= {frac[LOG_FRAC-2:0], 1'b1};
          end else begin
            y    <= sq[2*MANT_W:MANT_W];
            frac <= {frac[LOG_FRAC-2:0], 1'b0};
          end
          cnt <= cnt + 1'b1;
          if (cnt == CNT_W'(LOG_FRAC - 1)) lstate <= L_DONE;
        end
        L_DONE: begin
          if (have_e) begin
            have_e      <= 1'b0;
            lstate      <= L_IDLE;
            est_valid   <= 1'b1;
            lc_q        <= lc_val;
            small_range <= (e_hold <= THRESH) && (v_q != '0);
            est_q       <= ((e_hold <= THRESH) && (v_q != '0)) ? lc_val : e_hold;
          end
        end
        default: lstate <= L_IDLE;
      endcase
    end
  end
endmodule

// hll_harmonic_mean: raw HyperLogLog estimate E = alpha_m * m^2 / sum 2^-M[j].
//
// Summation: every incoming bucket rank r contributes 2^-r, which is a
// one-hot word with only the fractional bit r set. The addends are summed
// exactly in a fixed-point accumulator with INT_W = PREC+1 integer bits and
// FRAC_W = HASH_W+PREC+1 fractional bits (98 bits for H = 64, p = 16): the sum
// of 2^PREC ones needs PREC+1 integer bits, and ranks never exceed
// HASH_W-PREC+1, well inside FRAC_W.
// Division: after the last bucket the serial divider hll_divider computes
//   E * 2^EST_FRAC = alpha_q32 * 2^(2*PREC + EST_FRAC + FRAC_W - 32) / Z
// with Z the accumulator read as an integer, one quotient bit per cycle
// (NUM_W = 2*PREC + EST_FRAC + FRAC_W cycles, 129 by default). E leaves as an
// unsigned fixed-point number with EST_FRAC fractional bits, saturated to
// EST_W bits (only reachable when nearly every bucket holds the maximum rank).
// The one-hot addends and the exact fixed-point sum follow the paper. The
// paper forms E with floating-point arithmetic; this design uses the fixed-
// point division above instead, which is exact up to truncation of the last
// fractional bit. The accumulator width is taken from the sum's range (see
// the README) rather than the paper's "m binary integer digits".
//
// Interface: bucket stream in (in_valid/in_rank/in_last); e_valid pulses with
// e_q and z_sum (the exact sum) NUM_W + 1 cycles after the last bucket.
//
// rst_n also switches off the assertion on the divider ('disable iff'), so lint reports it
// as used both as an asynchronous reset and in clocked logic; only the
// assertion uses it that way.
module hll_harmonic_mean #(
  parameter int unsigned HASH_W   = hll_pkg::HASH_W,
  parameter int unsigned PREC     = hll_pkg::PREC,
  parameter int unsigned RANK_W   = hll_pkg::rank_w(HASH_W, PREC),
  parameter int unsigned EST_W    = hll_pkg::EST_W,
  parameter int unsigned EST_FRAC = hll_pkg::EST_FRAC,
  localparam int unsigned INT_W   = PREC + 1,
  localparam int unsigned FRAC_W  = HASH_W + PREC + 1,
  localparam int unsigned Z_W     = INT_W + FRAC_W
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              in_valid,
  input  logic [RANK_W-1:0] in_rank,
  input  logic              in_last,
  output logic              e_valid,
  output logic [EST_W-1:0]  e_q,
  output logic [Z_W-1:0]    z_sum
);
  localparam int unsigned SH    = 2 * PREC + EST_FRAC + FRAC_W - 32;
  localparam int unsigned NUM_W = 32 + SH;
  localparam logic [NUM_W-1:0] NUMERATOR = NUM_W'(hll_pkg::alpha_q32(PREC)) << SH;

  logic [Z_W-1:0]   acc, addend, acc_next;
  logic [Z_W-1:0]   z_fin;
  logic             div_start, div_busy, div_done;
  logic [NUM_W-1:0] quot;

  always_comb begin
    addend = '0;
    addend[FRAC_W - int'(in_rank)] = 1'b1;   // 2^-rank
    acc_next = acc + addend;
  end

  assign div_start = in_valid && in_last;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      acc   <= '0;
      z_fin <= '0;
    end else if (in_valid) begin
      if (in_last) begin
        z_fin <= acc_next;
        acc   <= '0;
      end else begin
        acc   <= acc_next;
      end
    end
  end

  hll_divider #(.NUM_W(NUM_W), .DEN_W(Z_W)) u_div (
    .clk, .rst_n,
    .start(div_start), .num(NUMERATOR), .den(acc_next),
    .busy(div_busy), .done(div_done), .quot(quot)
  );

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      e_valid <= 1'b0;
      e_q     <= '0;
    end else begin
      e_valid <= div_done;
      if (div_done) begin
        if (|(quot >> EST_W)) e_q <= '1;
        else                  e_q <= quot[EST_W-1:0];
      end
    end
  end

  assign z_sum = z_fin;

  a_div_free: assert property (@(posedge clk) disable iff (!rst_n) !(div_start && div_busy))
    else $error("hll_harmonic_mean: new sweep ended before the division finished");
endmodule

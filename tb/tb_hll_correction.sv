// tb_hll_correction: pairs (V, E) at p = 16 covering V = 0, V = m, random V,
// E on both sides of the 5/2 m threshold and exactly on it, with V and E
// arriving in either order. Checks the choice between E and linear counting,
// the linear-counting value m ln(m/V) against real arithmetic, and that the
// result follows within LOG_FRAC + 4 cycles of the later input.
module tb_hll_correction;
  import hll_ref_pkg::*;
  localparam int P = 16;
  localparam int M = 1 << P;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic        v_valid = 0, e_valid = 0;
  logic [P:0]  v_count = 0;
  logic [79:0] e_q = 0;
  logic        est_valid, small_range;
  logic [79:0] est_q, lc_q;
  int checks = 0, failures = 0;

  hll_correction dut (.*);

  int n_small = 0, n_raw = 0;

  task automatic one(int v, logic [79:0] e, bit e_first);
    real exp_e, got, lc_ref;
    bit  exp_small;
    int  t;
    @(negedge clk);
    if (e_first) begin e_valid = 1; e_q = e; end
    else         begin v_valid = 1; v_count = (P+1)'(v); end
    @(negedge clk);
    e_valid = 0; v_valid = 0;
    repeat ($urandom_range(0, 40)) @(negedge clk);
    if (e_first) begin v_valid = 1; v_count = (P+1)'(v); end
    else         begin e_valid = 1; e_q = e; end
    @(negedge clk);
    e_valid = 0; v_valid = 0;
    t = 0;
    while (!est_valid && t < 100) begin
      @(negedge clk);
      t++;
    end
    checks++;
    if (!est_valid || t > 24 + 4) begin
      failures++;
      $display("no result within %0d cycles", t);
      return;
    end
    exp_small = (q16_to_real(e) <= 2.5 * M) && (v != 0);
    lc_ref    = (v == 0) ? 0.0 : linear_counting(P, v);
    exp_e     = exp_small ? lc_ref : q16_to_real(e);
    got       = q16_to_real(est_q);
    checks++;
    if (small_range !== exp_small) begin
      failures++;
      $display("V=%0d E=%f: small_range %b", v, q16_to_real(e), small_range);
    end
    checks++;
    if (!close(q16_to_real(lc_q), lc_ref, 2e-6, 2e-3)) begin
      failures++;
      $display("V=%0d: LC %f expected %f", v, q16_to_real(lc_q), lc_ref);
    end
    checks++;
    if (!close(got, exp_e, 2e-6, 2e-3)) begin
      failures++;
      $display("V=%0d E=%f: E* %f expected %f", v, q16_to_real(e), got, exp_e);
    end
    if (small_range) n_small++; else n_raw++;
  endtask

  function automatic logic [79:0] q16(real x);
    return 80'(longint'(x * 65536.0));
  endfunction

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1;
    one(M, q16(47270.3385), 0);                 // empty sketch: E* = 0
    one(0, q16(1000.0), 1);                     // no empty bucket: keep E
    one(1, q16(100000.0), 0);
    one(M - 1, q16(2.0 * M), 1);
    one(12345, 80'(5 * M / 2) << 16, 0);        // exactly on the threshold
    one(12345, (80'(5 * M / 2) << 16) + 1, 1);  // just above it
    for (int i = 0; i < 200; i++) begin
      int v;
      v = $urandom_range(0, M);
      one(v, q16($urandom_range(1000, 400000) + $urandom_range(0, 65535) / 65536.0),
          $urandom_range(0, 1));
    end
    // every power of two for V exercises the normalisation
    for (int b = 0; b <= P; b++) one(1 << b, q16(1000.0), 0);
    checks++;
    if (n_small == 0 || n_raw == 0) begin
      failures++;
      $display("one of the two ranges was never chosen");
    end
    $display("linear counting %0d times, raw estimate %0d times", n_small, n_raw);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

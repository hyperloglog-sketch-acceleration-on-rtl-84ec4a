// tb_hll_harmonic_mean: sweeps of 2^16 bucket ranks (all zero, random,
// geometric like a real sketch, geometric shifted up by 8 to 40 ranks as for
// very large data sets, all at the maximum rank 49). Checks the exact
// fixed-point sum against a bit-exact reference, the raw estimate
// alpha_m m^2 / Z against real arithmetic, the saturation of E, and the
// latency from the last bucket to e_valid (one cycle per quotient bit).
module tb_hll_harmonic_mean;
  import hll_ref_pkg::*;
  localparam int P = 16;
  localparam int M = 1 << P;
  localparam int FRAC = 64 + P + 1;
  localparam int ZW = P + 1 + FRAC;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic          in_valid = 0, in_last = 0;
  logic [5:0]    in_rank = 0;
  logic          e_valid;
  logic [79:0]   e_q;
  logic [ZW-1:0] z_sum;
  int checks = 0, failures = 0;

  hll_harmonic_mean dut (.*);

  int cycle = 0, last_cycle = 0, n_e = 0, n_sat = 0;
  always @(posedge clk) begin
    cycle <= cycle + 1;
    if (rst_n && in_valid && in_last) last_cycle = cycle;
  end

  task automatic sweep(int mode, string tag, int shift = 0);
    logic [ZW-1:0] zref;
    real zr, eref, got;
    zref = '0;
    for (int j = 0; j < M; j++) begin
      int r;
      case (mode)
        0: r = 0;
        1: r = $urandom_range(0, 49);
        2: begin  // geometric ranks, as hashing produces
          r = 1;
          while (r < 49 && $urandom_range(0, 1) == 0) r++;
          if (shift == 0 && $urandom_range(0, 3) == 0) r = 0;
          else if (r + shift > 49) r = 49;
          else r = r + shift;
        end
        default: r = 49;
      endcase
      zref = zref + (ZW'(1) << (FRAC - r));
      @(negedge clk);
      in_valid = 1;
      in_last  = (j == M - 1);
      in_rank  = 6'(r);
    end
    @(negedge clk);
    in_valid = 0; in_last = 0;
    while (!e_valid) @(negedge clk);
    checks++;
    if (cycle - last_cycle > 135) begin
      failures++;
      $display("%s: estimate %0d cycles after the last bucket", tag, cycle - last_cycle);
    end
    $display("%s: latency %0d cycles", tag, cycle - last_cycle);
    checks++;
    if (z_sum !== zref) begin
      failures++;
      $display("%s: sum %h expected %h", tag, z_sum, zref);
    end
    zr = 0.0;
    for (int i = ZW - 1; i >= 0; i--) zr = zr * 2.0 + (zref[i] ? 1.0 : 0.0);
    zr = zr / (2.0 ** FRAC);
    eref = raw_estimate(P, zr);
    got  = q16_to_real(e_q);
    checks++;
    if (mode == 3) begin
      if (e_q !== '1) begin
        failures++;
        $display("%s: E not saturated: %h", tag, e_q);
      end else n_sat++;
    end else if (!close(got, eref, 1e-8, 1.0 / 65536.0)) begin
      failures++;
      $display("%s: E = %f expected %f", tag, got, eref);
    end
    $display("%s: E = %f (reference %f)", tag, got, eref);
    n_e++;
  endtask

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1;
    sweep(0, "all zero");
    sweep(1, "uniform");
    sweep(2, "geometric");
    for (int sh = 8; sh <= 40; sh += 8) sweep(2, $sformatf("geometric + %0d", sh), sh);
    sweep(3, "all max");
    checks++;
    if (n_e != 9 || n_sat != 1) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (1000000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

// tb_hll_std_error: accuracy of the engine at its default size (16 pipelines,
// p = 16, 64-bit hash) over a sweep of cardinalities.
//
// Each data set holds exactly n distinct 32-bit items:
//   v_i = (i * 0x9E3779B1) xor salt
// Multiplying by an odd constant and xoring are both bijective modulo 2^32,
// so the items are distinct without keeping a set. Each data set gets its own
// salt. The cardinalities are the points of the accuracy plot for p = 16,
// from 1,000 to 100,000,000 (about 6.3 million cycles, some 20 s of
// simulation). The plot's last point, 10^9, would take ten times as long and
// is left out.
//
// Checks:
//   - every estimate lies within six standard errors of the true count
//     (1.04/sqrt(m) = 0.41% each);
//   - the root-mean-square relative error over the sweep stays below 2%, the
//     typical error the HyperLogLog engine is meant to reach;
//   - both the linear-counting and the raw-estimate branch were taken;
//   - every result arrives 2^16 + a small constant cycles after the last
//     word.
module tb_hll_std_error;
  localparam int K = 16;
  localparam int P = 16;
  localparam int M = 1 << P;
  localparam int NSETS = 12;
  localparam int SIZES [NSETS] = '{1000, 10000, 20000, 40000, 60000, 80000,
                                   100000, 200000, 400000, 1000000, 10000000,
                                   100000000};

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic            s_tvalid = 0, s_tready, s_tlast = 0;
  logic [32*K-1:0] s_tdata = '0;
  logic [K-1:0]    s_tkeep = '0;
  logic            m_valid, m_ready = 0, m_small_range;
  logic [79:0]     m_card, m_raw;
  logic [P:0]      m_zeros;
  int checks = 0, failures = 0;

  hll_top dut (.*);

  int cycle = 0, tlast_cycle = 0;
  always @(posedge clk) begin
    cycle <= cycle + 1;
    if (s_tvalid && s_tready && s_tlast) tlast_cycle = cycle;
  end

  function automatic real q16(logic [79:0] q);
    real r;
    r = 0.0;
    for (int b = 79; b >= 0; b--) r = r * 2.0 + (q[b] ? 1.0 : 0.0);
    return r / 65536.0;
  endfunction

  task automatic stream_set(int n, logic [31:0] salt);
    int i;
    i = 0;
    while (i < n) begin
      @(negedge clk);
      s_tvalid = 1;
      s_tkeep  = '0;
      for (int l = 0; l < K; l++) begin
        if (i < n) begin
          s_tdata[32*l +: 32] = (32'(i) * 32'h9E3779B1) ^ salt;
          s_tkeep[l] = 1'b1;
          i++;
        end else begin
          s_tdata[32*l +: 32] = '0;
        end
      end
      s_tlast = (i >= n);
      @(posedge clk);
      while (!s_tready) @(posedge clk);
    end
    @(negedge clk);
    s_tvalid = 0; s_tlast = 0;
  endtask

  initial begin
    real sum_sq, rel, est, sigma;
    int  n_small, n_raw, lat;
    sum_sq = 0.0; n_small = 0; n_raw = 0;
    sigma = 1.04 / $sqrt(real'(M));
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int s = 0; s < NSETS; s++) begin
      stream_set(SIZES[s], 32'($urandom));
      while (!m_valid) @(negedge clk);
      lat = cycle - tlast_cycle;
      est = q16(m_card);
      rel = (est - real'(SIZES[s])) / real'(SIZES[s]);
      sum_sq += rel * rel;
      if (m_small_range) n_small++; else n_raw++;
      $display("n = %0d: E* = %0.1f, error %0.3f%% (%s), V = %0d, %0d cycles",
               SIZES[s], est, 100.0 * rel, m_small_range ? "linear counting" : "raw",
               m_zeros, lat);
      checks++;
      if (rel > 6.0 * sigma || rel < -6.0 * sigma) begin
        failures++;
        $display("  error beyond six standard errors");
      end
      checks++;
      if (lat < M || lat > M + 200) begin
        failures++;
        $display("  result after %0d cycles", lat);
      end
      @(negedge clk);
      m_ready = 1;
      @(negedge clk);
      m_ready = 0;
    end
    checks++;
    $display("rms relative error %0.3f%% (expected about %0.2f%%)",
             100.0 * $sqrt(sum_sq / NSETS), 100.0 * sigma);
    if ($sqrt(sum_sq / NSETS) > 0.02) begin
      failures++;
      $display("rms relative error above 2%%");
    end
    checks++;
    if (n_small == 0 || n_raw == 0) begin
      failures++;
      $display("a correction branch was never taken: linear counting %0d, raw %0d",
               n_small, n_raw);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (10_000_000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

// tb_hll_throughput: input rate and correctness of the engine for the
// pipeline counts of the throughput study: 1, 2, 4, 8, 10 and 16 pipelines.
//
// One engine per pipeline count is instantiated side by side, each with
// p = 10 to keep the drain short (the pipeline count does not depend on p).
// Each engine gets a data set of N distinct items, packed k to a word, and
// s_tvalid is held high throughout. The test checks:
//   - s_tready never drops while the data set streams in, so the engine takes
//     ceil(N/k) words in exactly ceil(N/k) cycles, i.e. k x 32 bits per cycle
//     (k x 10.3 Gbit/s at a 322 MHz clock);
//   - the estimate lies within six standard errors (1.04/sqrt(2^10) = 3.25%
//     each) of N;
//   - every engine with the same data set and hash gives the same bucket
//     contents, so V must agree across all pipeline counts;
//   - the result arrives 2^p + a small constant cycles after the last word.
module tb_hll_throughput;
  localparam int P = 10;
  localparam int M = 1 << P;
  localparam int N = 5000;
  localparam int NK = 6;
  localparam int KS [NK] = '{1, 2, 4, 8, 10, 16};

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  bit finished [NK];
  int zeros    [NK];

  function automatic real q16(logic [79:0] q);
    real r;
    r = 0.0;
    for (int b = 79; b >= 0; b--) r = r * 2.0 + (q[b] ? 1.0 : 0.0);
    return r / 65536.0;
  endfunction

  for (genvar g = 0; g < NK; g++) begin : g_eng
    localparam int K = KS[g];
    logic            s_tvalid = 0, s_tready, s_tlast = 0;
    logic [32*K-1:0] s_tdata = '0;
    logic [K-1:0]    s_tkeep = '0;
    logic            m_valid, m_ready = 0, m_small_range;
    logic [79:0]     m_card, m_raw;
    logic [P:0]      m_zeros;

    hll_top #(.NUM_PIPES(K), .PREC(P)) dut (
      .clk, .rst_n, .s_tvalid, .s_tready, .s_tdata, .s_tkeep, .s_tlast,
      .m_valid, .m_ready, .m_card, .m_raw, .m_zeros, .m_small_range
    );

    int cycle = 0, first_cycle = -1, last_cycle = 0, words = 0, stalls = 0;
    always @(posedge clk) begin
      cycle <= cycle + 1;
      if (s_tvalid && s_tready) begin
        if (first_cycle < 0) first_cycle = cycle;
        words++;
        if (s_tlast) last_cycle = cycle;
      end
      if (s_tvalid && !s_tready && first_cycle >= 0) stalls++;
    end

    initial begin
      int  i, expect_words, lat;
      real est, rel;
      i = 0;
      expect_words = (N + K - 1) / K;
      @(posedge rst_n);
      @(negedge clk);
      while (!s_tready) @(negedge clk);
      while (i < N) begin
        s_tvalid = 1;
        s_tkeep  = '0;
        for (int l = 0; l < K; l++) begin
          if (i < N) begin
            s_tdata[32*l +: 32] = (32'(i) * 32'h9E3779B1) ^ 32'h5A5A_0F0F;
            s_tkeep[l] = 1'b1;
            i++;
          end else begin
            s_tdata[32*l +: 32] = '0;
          end
        end
        s_tlast = (i >= N);
        @(posedge clk);
        while (!s_tready) @(posedge clk);
        @(negedge clk);
      end
      s_tvalid = 0; s_tlast = 0;
      while (!m_valid) @(negedge clk);
      lat = cycle - last_cycle;
      est = q16(m_card);
      rel = (est - real'(N)) / real'(N);
      $display("%2d pipelines: %0d words in %0d cycles (%0.1f Gbit/s at 322 MHz), E* %0.1f (%0.2f%%), V %0d, result after %0d cycles",
               K, words, last_cycle - first_cycle + 1, 32.0 * K * 0.322, est, 100.0 * rel,
               m_zeros, lat);
      checks++;
      if (words != expect_words || last_cycle - first_cycle + 1 != expect_words || stalls != 0) begin
        failures++;
        $display("  %0d pipelines: %0d words, %0d cycles, %0d stalls; expected %0d words back to back",
                 K, words, last_cycle - first_cycle + 1, stalls, expect_words);
      end
      checks++;
      if (rel > 6.0 * 1.04 / $sqrt(real'(M)) || rel < -6.0 * 1.04 / $sqrt(real'(M))) begin
        failures++;
        $display("  %0d pipelines: estimate off by %0.2f%%", K, 100.0 * rel);
      end
      checks++;
      if (lat < M || lat > M + 200) begin
        failures++;
        $display("  %0d pipelines: result after %0d cycles", K, lat);
      end
      zeros[g] = int'(m_zeros);
      finished[g] = 1;
    end
  end

  initial begin
    bit all_done;
    repeat (2) @(negedge clk);
    rst_n = 1;
    all_done = 0;
    while (!all_done) begin
      @(negedge clk);
      all_done = 1;
      for (int g = 0; g < NK; g++) if (!finished[g]) all_done = 0;
    end
    for (int g = 1; g < NK; g++) begin
      checks++;
      if (zeros[g] != zeros[0]) begin
        failures++;
        $display("V differs: %0d pipelines %0d, 1 pipeline %0d", KS[g], zeros[g], zeros[0]);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

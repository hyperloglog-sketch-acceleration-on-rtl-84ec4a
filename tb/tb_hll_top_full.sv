// tb_hll_top_full: the end-to-end test of tb_hll_top run on the engine at
// its default size: 16 pipelines, p = 16 (65536 buckets per pipeline), 64-bit
// hash. Data sets: 5,000 distinct items (linear counting range), 400,000
// distinct items (raw estimate range, above 5/2 m = 163,840), 30,000 items
// with repeats and partial words, and an empty set. Results are checked
// against a reference sketch, against the true count (six standard errors,
// 1.04/sqrt(m) = 0.41% each), and the time from the last word to the result
// must be 2^16 cycles plus a small constant.
module tb_hll_top_full;
  import hll_ref_pkg::*;
  localparam int K = 16;
  localparam int P = 16;
  localparam int M = 1 << P;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic            s_tvalid = 0, s_tready, s_tlast = 0;
  logic [32*K-1:0] s_tdata = '0;
  logic [K-1:0]    s_tkeep = '0;
  logic            m_valid, m_ready = 0, m_small_range;
  logic [79:0]     m_card, m_raw;
  logic [P:0]      m_zeros;
  int checks = 0, failures = 0;

  hll_top dut (.*);   // default parameters: 16 pipelines, p = 16, H = 64

  int  ref_m [M];
  bit  seen [int unsigned];
  int  cycle = 0, tlast_cycle = 0;
  int  n_backpressure = 0, n_merge = 0, n_lane_differ = 0, n_partial = 0;
  int  n_small = 0, n_raw = 0, n_results = 0;

  always @(posedge clk) begin
    cycle <= cycle + 1;
    if (rst_n) begin
      if (s_tvalid && !s_tready) n_backpressure++;
      if (s_tvalid && s_tready) begin
        for (int i = 0; i < K; i++) begin
          if (s_tkeep[i]) begin
            longint unsigned x;
            int b, r;
            x = murmur3_64(s_tdata[32*i +: 32]);
            b = index_of(x, P);
            r = rank_of(x, P);
            if (r > ref_m[b]) ref_m[b] = r;
            seen[s_tdata[32*i +: 32]] = 1;
          end
        end
        if (s_tkeep != '1) n_partial++;
        if (s_tlast) tlast_cycle = cycle;
      end
      for (int i = 0; i < K; i++) if (dut.p_merged[i]) n_merge++;
      if (dut.p_valid[0]) begin
        for (int i = 1; i < K; i++) if (dut.p_rank[i] != dut.p_rank[0]) begin
          n_lane_differ++;
          break;
        end
      end
    end
  end

  // present one word and hold it until it is accepted
  task automatic put(logic [32*K-1:0] d, logic [K-1:0] keep, bit last);
    @(negedge clk);
    s_tvalid = 1; s_tdata = d; s_tkeep = keep; s_tlast = last;
    @(posedge clk);
    while (!s_tready) @(posedge clk);
  endtask

  task automatic release_bus();
    @(negedge clk);
    s_tvalid = 0; s_tlast = 0;
  endtask

  // stream n items; mode 0: distinct random, 1: repeats and partial words
  task automatic stream(int n, int mode);
    int left;
    left = n;
    while (left > 0) begin
      logic [32*K-1:0] d;
      logic [K-1:0]    keep;
      int cnt;
      keep = '1;
      if (mode == 1 && $urandom_range(0, 3) == 0) keep = K'($urandom);
      cnt = $countones(keep);
      if (cnt > left) begin
        keep = '0;
        for (int i = 0; i < left; i++) keep[i] = 1'b1;
        cnt = left;
      end
      for (int i = 0; i < K; i++) d[32*i +: 32] = $urandom;
      if (mode == 1 && $urandom_range(0, 2) == 0) begin
        // the same small value in every lane, twice in a row
        logic [31:0] v;
        v = 32'($urandom_range(0, 50));
        for (int i = 0; i < K; i++) d[32*i +: 32] = v;
        left -= cnt;
        put(d, keep, left <= 0);
        if (left <= 0) break;
        if (cnt > left) begin
          keep = '0;
          for (int i = 0; i < left; i++) keep[i] = 1'b1;
          cnt = left;
        end
      end
      left -= cnt;
      put(d, keep, left <= 0);
    end
    release_bus();
  endtask

  task automatic check_result(string tag);
    real z, eref, estar, got_raw, got, truth;
    int  v;
    int  t;
    t = 0;
    while (!m_valid) begin
      @(negedge clk);
      t++;
    end
    z = 0.0; v = 0;
    for (int j = 0; j < M; j++) begin
      z += 2.0 ** (-ref_m[j]);
      if (ref_m[j] == 0) v++;
    end
    eref    = raw_estimate(P, z);
    estar   = final_estimate(P, eref, v);
    got_raw = q16_to_real(m_raw);
    got     = q16_to_real(m_card);
    truth   = seen.size();
    checks++;
    if (int'(m_zeros) != v) begin
      failures++;
      $display("%s: V = %0d expected %0d", tag, m_zeros, v);
    end
    checks++;
    if (!close(got_raw, eref, 1e-8, 1e-3)) begin
      failures++;
      $display("%s: E = %f expected %f", tag, got_raw, eref);
    end
    checks++;
    if (!close(got, estar, 2e-6, 2e-3)) begin
      failures++;
      $display("%s: E* = %f expected %f", tag, got, estar);
    end
    checks++;
    if (!close(got, truth, 6.0 * 1.04 / $sqrt(M), 2.0)) begin
      failures++;
      $display("%s: E* = %f far from the true count %0.0f", tag, got, truth);
    end
    checks++;
    if (cycle - tlast_cycle < M || cycle - tlast_cycle > M + 200) begin
      failures++;
      $display("%s: result %0d cycles after the end of the data set", tag, cycle - tlast_cycle);
    end
    $display("%s: true %0.0f, E* %0.2f (%s), E %0.2f, V %0d, %0d cycles after the last word",
             tag, truth, got, m_small_range ? "linear counting" : "raw", got_raw, m_zeros,
             cycle - tlast_cycle);
    if (m_small_range) n_small++; else n_raw++;
    n_results++;
    @(negedge clk);
    m_ready = 1;
    @(negedge clk);
    m_ready = 0;
    foreach (ref_m[j]) ref_m[j] = 0;
    seen.delete();
  endtask

  initial begin
    foreach (ref_m[j]) ref_m[j] = 0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    stream(5000, 0);
    check_result("small set");
    stream(400000, 0);
    check_result("large set");
    stream(30000, 1);
    check_result("repeats, partial words");
    put('0, '0, 1);                        // a data set without items
    release_bus();
    check_result("empty set");
    checks++;
    if (int'(m_card) != 0) failures++;
    checks++;
    if (n_backpressure == 0 || n_merge == 0 || n_lane_differ == 0 || n_partial == 0 ||
        n_small == 0 || n_raw == 0 || n_results != 4) begin
      failures++;
      $display("a mechanism never happened");
    end
    $display("held off %0d, merged %0d, lanes differ %0d, partial words %0d, linear counting %0d, raw %0d",
             n_backpressure, n_merge, n_lane_differ, n_partial, n_small, n_raw);
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

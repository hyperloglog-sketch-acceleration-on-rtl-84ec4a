// tb_hll_buckets: bucket memory of one pipeline at p = 10.
// Checks the clearing after reset (2^p cycles), random update streams with
// many back-to-back updates of the same bucket (the merge path), the 'done'
// timing, the drain (every bucket in order, once, with out_last on the last)
// against a reference array, and that the drain leaves the buckets empty for
// a second data set.
module tb_hll_buckets;
  localparam int P = 10;
  localparam int M = 1 << P;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic         in_valid = 0, in_last = 0, drain_start = 0;
  logic [P-1:0] in_idx = 0;
  logic [5:0]   in_rank = 0;
  logic         done, merged, busy, out_valid, out_last;
  logic [5:0]   out_rank;
  int checks = 0, failures = 0;

  hll_buckets #(.PREC(P), .RANK_W(6)) dut (.*);

  int ref_m [M];
  int cycle = 0, last_cycle = 0, done_cycle = 0, drain_cycle = 0;
  int n_out = 0, n_merged = 0, n_done = 0, n_lastout = 0, first_out_cycle = -1;
  int drained [M];

  always @(posedge clk) begin
    cycle <= cycle + 1;
    if (rst_n) begin
      if (in_valid) begin
        if (int'(in_rank) > ref_m[in_idx]) ref_m[in_idx] = int'(in_rank);
      end
      if (in_last) last_cycle = cycle;
      if (done) begin
        done_cycle = cycle;
        n_done++;
      end
      if (merged) n_merged++;
      if (drain_start) drain_cycle = cycle;
      if (out_valid) begin
        if (first_out_cycle < 0) first_out_cycle = cycle;
        if (n_out < M) drained[n_out] = int'(out_rank);
        if (out_last) begin
          n_lastout++;
          checks++;
          if (n_out != M - 1) begin
            failures++;
            $display("out_last at position %0d", n_out);
          end
        end
        n_out++;
      end
    end
  end

  task automatic run_set(int n, int hot);
    for (int i = 0; i < n; i++) begin
      @(negedge clk);
      in_valid = 1;
      in_last  = (i == n - 1);
      // a small hot set of buckets makes back-to-back hits likely
      in_idx   = ($urandom_range(0, 1) == 0) ? P'($urandom_range(0, hot)) : P'($urandom);
      // slowly rising ranks keep the hot buckets being rewritten
      in_rank  = 6'($urandom_range(1, (2 + i / 100 > 49) ? 49 : 2 + i / 100));
      if ($urandom_range(0, 7) == 0 && i != n - 1) begin
        @(negedge clk);
        in_valid = 0; in_last = 0;
      end
    end
    @(negedge clk);
    in_valid = 0; in_last = 0;
  endtask

  // back-to-back updates of one bucket, the larger rank first: the second
  // read is issued before the first write lands, so only the merge keeps the
  // larger rank
  task automatic directed_pairs(int n);
    for (int k = 0; k < n; k++) begin
      @(negedge clk);
      in_valid = 1; in_last = 0;
      in_idx   = P'(512 + k);
      in_rank  = 6'($urandom_range(20, 49));
      @(negedge clk);
      in_rank  = 6'($urandom_range(1, 19));
    end
  endtask

  task automatic drain_and_check(string tag);
    while (n_done == 0) @(negedge clk);
    checks++;
    if (done_cycle - last_cycle != 2) begin
      failures++;
      $display("%s: done %0d cycles after last", tag, done_cycle - last_cycle);
    end
    n_out = 0; n_lastout = 0; first_out_cycle = -1;
    @(negedge clk);
    drain_start = 1;
    @(negedge clk);
    drain_start = 0;
    checks++;
    if (!busy) begin
      failures++;
      $display("%s: not busy while draining", tag);
    end
    while (busy) @(negedge clk);
    repeat (3) @(negedge clk);
    checks++;
    if (n_out != M || n_lastout != 1 || first_out_cycle - drain_cycle != 2) begin
      failures++;
      $display("%s: %0d buckets out, %0d last, first after %0d", tag, n_out, n_lastout,
               first_out_cycle - drain_cycle);
    end
    for (int j = 0; j < M; j++) begin
      checks++;
      if (drained[j] != ref_m[j]) begin
        failures++;
        if (failures < 10) $display("%s: bucket %0d = %0d, expected %0d", tag, j, drained[j], ref_m[j]);
      end
      ref_m[j] = 0;     // the drain empties the buckets
    end
    n_done = 0;
  endtask

  initial begin
    int t;
    foreach (ref_m[j]) ref_m[j] = 0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    t = 0;
    while (busy) begin
      @(negedge clk);
      t++;
    end
    checks++;
    if (t < M - 1 || t > M + 1) begin
      failures++;
      $display("clearing took %0d cycles", t);
    end
    directed_pairs(40);
    run_set(4000, 3);
    drain_and_check("set 1");
    run_set(300, 7);
    drain_and_check("set 2");
    // a data set with no items at all: only the end marker
    @(negedge clk);
    in_last = 1;
    @(negedge clk);
    in_last = 0;
    drain_and_check("empty set");
    checks++;
    if (n_merged == 0) begin
      failures++;
      $display("merge path never used");
    end
    $display("merged updates: %0d", n_merged);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (30000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

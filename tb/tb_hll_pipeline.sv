// tb_hll_pipeline: one aggregation pipeline at p = 10 fed one item per
// cycle (with some gaps and many repeated items), then drained. The drained
// buckets must equal a reference sketch built with the reference hash, index
// and rank; 'done' must follow the end marker after 10 cycles (6 hash, 1
// index, 1 rank, 2 bucket update). A second data set checks that the drain
// left the sketch empty.
module tb_hll_pipeline;
  import hll_ref_pkg::*;
  localparam int P = 10;
  localparam int M = 1 << P;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic        in_valid = 0, in_last = 0, drain_start = 0;
  logic [31:0] in_data = 0;
  logic        done, merged, busy, out_valid, out_last;
  logic [5:0]  out_rank;
  int checks = 0, failures = 0;

  hll_pipeline #(.PREC(P)) dut (.*);

  int ref_m [M];
  int drained [$];
  int cycle = 0, last_cycle = 0, done_cycle = -1, n_merged = 0, n_items = 0;

  always @(posedge clk) begin
    cycle <= cycle + 1;
    if (rst_n) begin
      if (in_valid) begin
        longint unsigned x;
        int i, r;
        x = murmur3_64(in_data);
        i = index_of(x, P);
        r = rank_of(x, P);
        if (r > ref_m[i]) ref_m[i] = r;
        n_items++;
      end
      if (in_last) last_cycle = cycle;
      if (done) done_cycle = cycle;
      if (merged) n_merged++;
      if (out_valid) drained.push_back(int'(out_rank));
    end
  end

  task automatic run_set(int n, string tag);
    int cnt_before;
    cnt_before = n_items;
    done_cycle = -1;
    for (int i = 0; i < n; i++) begin
      @(negedge clk);
      in_valid = 1;
      in_last  = (i == n - 1);
      // small values repeat often, giving back-to-back hits on one bucket
      in_data  = ($urandom_range(0, 3) == 0) ? 32'($urandom_range(0, 2)) : $urandom;
      if ($urandom_range(0, 9) == 0 && i != n - 1) begin
        @(negedge clk);
        in_valid = 0; in_last = 0;
      end
    end
    @(negedge clk);
    in_valid = 0; in_last = 0;
    while (done_cycle < 0) @(negedge clk);
    checks++;
    if (done_cycle - last_cycle != 10) begin
      failures++;
      $display("%s: done %0d cycles after the end marker", tag, done_cycle - last_cycle);
    end
    drained.delete();
    @(negedge clk);
    drain_start = 1;
    @(negedge clk);
    drain_start = 0;
    while (busy) @(negedge clk);
    repeat (3) @(negedge clk);
    checks++;
    if (drained.size() != M) begin
      failures++;
      $display("%s: %0d buckets drained", tag, drained.size());
    end else begin
      for (int j = 0; j < M; j++) begin
        checks++;
        if (drained[j] != ref_m[j]) begin
          failures++;
          if (failures < 10) $display("%s: bucket %0d = %0d expected %0d", tag, j, drained[j], ref_m[j]);
        end
      end
    end
    foreach (ref_m[j]) ref_m[j] = 0;
    $display("%s: %0d items", tag, n_items - cnt_before);
  endtask

  initial begin
    foreach (ref_m[j]) ref_m[j] = 0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    while (busy) @(negedge clk);
    run_set(5000, "set 1");
    run_set(200, "set 2");
    checks++;
    if (n_merged == 0) begin
      failures++;
      $display("merge path never used");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (40000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

// tb_hll_merge_buckets: four lock-stepped bucket streams with random ranks;
// checks the per-bucket maximum, the one-cycle latency and valid/last.
module tb_hll_merge_buckets;
  localparam int K = 4;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic       in_valid [K];
  logic [5:0] in_rank  [K];
  logic       in_last  [K];
  logic       out_valid, out_last;
  logic [5:0] out_rank;
  int checks = 0, failures = 0;

  hll_merge_buckets #(.NUM_PIPES(K), .RANK_W(6)) dut (.*);

  logic pv = 0, pl = 0;
  int   pmax = 0, n_nonzero_lane = 0;

  always @(posedge clk) begin
    if (rst_n) begin
      checks++;
      if (out_valid !== pv || out_last !== (pv && pl)) begin
        failures++;
        $display("valid/last mismatch");
      end
      if (pv) begin
        checks++;
        if (int'(out_rank) != pmax) begin
          failures++;
          $display("merged %0d expected %0d", out_rank, pmax);
        end
      end
    end
    begin
      int mx;
      mx = 0;
      for (int i = 0; i < K; i++) if (int'(in_rank[i]) > mx) mx = int'(in_rank[i]);
      pmax <= mx;
    end
    pv <= in_valid[0];
    pl <= in_last[0];
  end

  initial begin
    for (int i = 0; i < K; i++) begin
      in_valid[i] = 0; in_last[i] = 0; in_rank[i] = 0;
    end
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int n = 0; n < 3000; n++) begin
      logic v, l;
      int hot;
      @(negedge clk);
      v = ($urandom_range(0, 5) != 0);
      l = v && ($urandom_range(0, 100) == 0);
      hot = $urandom_range(0, K - 1);     // the lane that holds the maximum
      for (int i = 0; i < K; i++) begin
        in_valid[i] = v;
        in_last[i]  = l;
        in_rank[i]  = 6'($urandom_range(0, 20));
      end
      in_rank[hot] = 6'($urandom_range(0, 49));
      if (hot != 0) n_nonzero_lane++;
    end
    @(negedge clk);
    for (int i = 0; i < K; i++) in_valid[i] = 0;
    repeat (3) @(negedge clk);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

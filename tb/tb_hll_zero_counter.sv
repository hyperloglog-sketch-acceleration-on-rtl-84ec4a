// tb_hll_zero_counter: sweeps of 1024 buckets with a varying share of zero
// ranks (including all-zero and no-zero sweeps); checks the bypassed stream
// (one cycle later, unchanged) and V at the end of each sweep.
module tb_hll_zero_counter;
  localparam int P = 10;
  localparam int M = 1 << P;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic       in_valid = 0, in_last = 0;
  logic [5:0] in_rank = 0;
  logic       out_valid, out_last, v_valid;
  logic [5:0] out_rank;
  logic [P:0] v_count;
  int checks = 0, failures = 0;

  hll_zero_counter #(.PREC(P), .RANK_W(6)) dut (.*);

  logic       pv = 0, pl = 0;
  logic [5:0] pr = 0;
  int         exp_v [$];
  int         n_v = 0;

  always @(posedge clk) begin
    if (rst_n) begin
      checks++;
      if (out_valid !== pv || out_last !== (pv && pl) || (pv && out_rank !== pr)) begin
        failures++;
        $display("bypass mismatch");
      end
      if (v_valid) begin
        int e;
        e = exp_v.pop_front();
        checks++;
        n_v++;
        if (int'(v_count) != e) begin
          failures++;
          $display("V = %0d, expected %0d", v_count, e);
        end
      end
    end
    pv <= in_valid; pl <= in_last; pr <= in_rank;
  end

  task automatic sweep(int zero_pct);
    int z;
    z = 0;
    for (int j = 0; j < M; j++) begin
      @(negedge clk);
      in_valid = 1;
      in_last  = (j == M - 1);
      in_rank  = ($urandom_range(1, 100) <= zero_pct) ? 6'd0 : 6'($urandom_range(1, 49));
      if (in_rank == 0) z++;
      if ($urandom_range(0, 9) == 0 && j != M - 1) begin
        @(negedge clk);
        in_valid = 0; in_last = 0;
      end
    end
    exp_v.push_back(z);
    @(negedge clk);
    in_valid = 0; in_last = 0;
  endtask

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1;
    sweep(100);
    sweep(50);
    sweep(0);
    sweep(3);
    repeat (3) @(negedge clk);
    checks++;
    if (n_v != 4) begin
      failures++;
      $display("%0d V results, expected 4", n_v);
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

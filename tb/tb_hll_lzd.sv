// tb_hll_lzd: checks rho(w) = leading zeros + 1 for 48-bit w, for every
// leading-zero count 0..48 (w = 0 gives 49) with random lower bits, plus the
// one-cycle latency and the index riding along.
module tb_hll_lzd;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic        in_valid = 0, in_last = 0, out_valid, out_last;
  logic [15:0] in_idx = 0, out_idx;
  logic [47:0] in_w = 0;
  logic [5:0]  out_rank;
  int checks = 0, failures = 0;

  hll_lzd dut (.*);

  logic        pv = 0, pl = 0;
  logic [15:0] pi = 0;
  int          pexp = 0;
  int          seen [50];

  always @(posedge clk) begin
    if (rst_n) begin
      checks++;
      if (out_valid !== pv || out_last !== pl) begin
        failures++;
        $display("valid/last mismatch");
      end
      if (pv) begin
        checks++;
        seen[out_rank]++;
        if (int'(out_rank) != pexp || out_idx !== pi) begin
          failures++;
          $display("rank %0d expected %0d", out_rank, pexp);
        end
      end
    end
    pv   <= in_valid;
    pl   <= in_last;
    pi   <= in_idx;
    pexp <= int'(hll_ref_pkg::rank_of({16'd0, in_w}, 16));
  end

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int i = 0; i < 3000; i++) begin
      int lz;
      logic [47:0] w;
      lz = $urandom_range(0, 48);
      w  = {$urandom, $urandom};
      if (lz == 48) w = '0;
      else begin
        w = w >> lz;
        w[47 - lz] = 1'b1;
      end
      @(negedge clk);
      in_valid = ($urandom_range(0, 5) != 0);
      in_last  = (i == 2999);
      in_idx   = 16'($urandom);
      in_w     = w;
    end
    @(negedge clk);
    in_valid = 0; in_last = 0;
    repeat (3) @(negedge clk);
    for (int r = 1; r <= 49; r++) begin
      checks++;
      if (seen[r] == 0) begin
        failures++;
        $display("rank %0d never produced", r);
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

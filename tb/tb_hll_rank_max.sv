// tb_hll_rank_max: exhaustive check of max() and its update flag over all
// pairs of 6-bit ranks.
module tb_hll_rank_max;
  logic [5:0] cur_rank, new_rank, max_rank;
  logic       update;
  int checks = 0, failures = 0;

  hll_rank_max dut (.*);

  initial begin
    for (int c = 0; c < 64; c++) begin
      for (int n = 0; n < 64; n++) begin
        cur_rank = 6'(c);
        new_rank = 6'(n);
        #1;
        checks++;
        if (int'(max_rank) != ((c > n) ? c : n) || update !== (n > c)) begin
          failures++;
          $display("max(%0d,%0d) = %0d update %b", c, n, max_rank, update);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

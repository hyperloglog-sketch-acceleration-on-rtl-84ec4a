// tb_hll_index_extractor: random hashes through the index extractor; checks
// that the index is the first 16 bits, w the remaining 48 bits, and that
// valid and the end-of-set marker arrive one cycle later.
module tb_hll_index_extractor;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic        in_valid = 0, in_last = 0, out_valid, out_last;
  logic [63:0] in_hash = 0;
  logic [15:0] out_idx;
  logic [47:0] out_w;
  int checks = 0, failures = 0;

  hll_index_extractor dut (.*);

  logic        pv = 0, pl = 0;
  logic [63:0] ph = 0;
  int          n_valid = 0;

  // compare outputs with the inputs sampled one edge earlier
  always @(posedge clk) begin
    if (rst_n) begin
      checks++;
      if (out_valid !== pv || out_last !== pl) begin
        failures++;
        $display("valid/last mismatch");
      end
      if (pv) begin
        checks++;
        n_valid++;
        if (out_idx !== ph[63:48] || out_w !== ph[47:0]) begin
          failures++;
          $display("split mismatch %h -> %h %h", ph, out_idx, out_w);
        end
      end
    end
    pv <= in_valid; pl <= in_last; ph <= in_hash;
  end

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int i = 0; i < 2000; i++) begin
      @(negedge clk);
      in_valid = ($urandom_range(0, 4) != 0);
      in_last  = ($urandom_range(0, 50) == 0);
      in_hash  = {$urandom, $urandom};
    end
    @(negedge clk);
    in_valid = 1; in_last = 0; in_hash = 64'h8000_0000_0000_0001;
    @(negedge clk);
    in_valid = 0;
    repeat (3) @(negedge clk);
    checks++;
    if (n_valid < 1000) failures++;
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

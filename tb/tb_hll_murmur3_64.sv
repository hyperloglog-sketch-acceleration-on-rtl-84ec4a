// tb_hll_murmur3_64: checks the pipelined 64-bit Murmur3 hash against the
// sequential reference, item by item, with random gaps in the input, and
// checks the six-cycle latency and the end-of-set marker.
module tb_hll_murmur3_64;
  import hll_ref_pkg::*;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic        in_valid = 0, in_last = 0, out_valid, out_last;
  logic [31:0] in_data = 0;
  logic [63:0] out_hash;
  int checks = 0, failures = 0;

  hll_murmur3_64 dut (.*);

  int unsigned exp_data [$];
  int          exp_cycle [$];
  int          cycle = 0;
  int          n_out = 0, n_last = 0;
  int          last_cycle = -1;

  always @(posedge clk) cycle <= cycle + 1;

  // scoreboard: inputs and outputs are both sampled at the rising edge
  always @(posedge clk) begin
    if (rst_n && in_valid) begin
      exp_data.push_back(in_data);
      exp_cycle.push_back(cycle);
    end
    if (rst_n && in_last) last_cycle = cycle;
    if (rst_n && out_valid) begin
      int unsigned v;
      int c;
      v = exp_data.pop_front();
      c = exp_cycle.pop_front();
      checks++;
      if (out_hash !== murmur3_64(v)) begin
        failures++;
        $display("hash mismatch v=%h got %h exp %h", v, out_hash, murmur3_64(v));
      end
      checks++;
      if (cycle - c != 6) begin
        failures++;
        $display("latency %0d, expected 6", cycle - c);
      end
      n_out++;
    end
    if (rst_n && out_last) begin
      checks++;
      if (cycle - last_cycle != 6) begin
        failures++;
        $display("last marker latency %0d", cycle - last_cycle);
      end
      n_last++;
    end
  end

  // inputs change on the falling edge, away from the sampling edge
  task automatic send(int unsigned v, bit last);
    @(negedge clk);
    in_valid = 1; in_data = v; in_last = last;
  endtask

  task automatic idle(int n);
    repeat (n) begin
      @(negedge clk);
      in_valid = 0; in_last = 0;
    end
  endtask

  initial begin
    repeat (3) @(posedge clk);
    rst_n <= 1;
    @(posedge clk);
    send(32'h0, 0);
    send(32'h1, 0);
    send(32'hffff_ffff, 0);
    send(32'hdead_beef, 0);
    for (int i = 0; i < 3000; i++) begin
      send($urandom, i == 2999);
      if ($urandom_range(0, 3) == 0) idle($urandom_range(1, 3));
    end
    idle(10);
    checks++;
    if (n_out != 3004 || n_last != 1) begin
      failures++;
      $display("saw %0d items and %0d last markers", n_out, n_last);
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

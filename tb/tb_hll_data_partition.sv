// tb_hll_data_partition: random wide words with random keep masks, last
// markers and accept toggling; checks s_tready, and that every lane gets its
// own 32-bit slice, its keep bit as valid and the shared last marker, one
// cycle after the word was accepted.
module tb_hll_data_partition;
  localparam int K = 16;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic            accept = 0, s_tvalid = 0, s_tready, s_tlast = 0;
  logic [32*K-1:0] s_tdata = '0;
  logic [K-1:0]    s_tkeep = '0;
  logic            lane_valid [K];
  logic [31:0]     lane_data  [K];
  logic            lane_last  [K];
  int checks = 0, failures = 0;

  hll_data_partition #(.NUM_PIPES(K)) dut (.*);

  logic            pfire = 0, plast = 0;
  logic [32*K-1:0] pdata = '0;
  logic [K-1:0]    pkeep = '0;
  int              n_fire = 0;

  always @(posedge clk) begin
    if (rst_n) begin
      checks++;
      if (s_tready !== accept) begin
        failures++;
        $display("s_tready does not follow accept");
      end
      for (int i = 0; i < K; i++) begin
        checks++;
        if (lane_valid[i] !== (pfire && pkeep[i]) || lane_last[i] !== (pfire && plast) ||
            (lane_valid[i] && lane_data[i] !== pdata[32*i +: 32])) begin
          failures++;
          $display("lane %0d mismatch", i);
        end
      end
      if (s_tvalid && accept) n_fire++;
    end
    pfire <= s_tvalid && accept;
    plast <= s_tlast;
    pdata <= s_tdata;
    pkeep <= s_tkeep;
  end

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int n = 0; n < 2000; n++) begin
      @(negedge clk);
      accept   = ($urandom_range(0, 3) != 0);
      s_tvalid = ($urandom_range(0, 4) != 0);
      s_tlast  = ($urandom_range(0, 20) == 0);
      for (int i = 0; i < K; i++) s_tdata[32*i +: 32] = $urandom;
      s_tkeep  = ($urandom_range(0, 1) == 0) ? '1 : K'($urandom);
    end
    @(negedge clk);
    s_tvalid = 0;
    repeat (3) @(negedge clk);
    checks++;
    if (n_fire < 500) failures++;
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

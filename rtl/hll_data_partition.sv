// hll_data_partition: slices the wide input stream over the pipelines.
//
// The input is an AXI4-Stream style word of NUM_PIPES 32-bit items. Item i
// (bits 32*i+31 : 32*i) goes to pipeline i, with no reassignment between
// pipelines, as in the paper. The handshake is minimal: the word is accepted
// when s_tvalid and s_tready are both high, and s_tready simply follows
// 'accept' (high while the engine is aggregating, since the pipelines
// never stall then). s_tkeep has one bit per 32-bit item and says which items
// of the word are real, so a data set need not be a multiple of NUM_PIPES
// items; s_tlast marks the last word of a data set and is copied to every
// lane. The per-item keep bit and the output register (one cycle of
// latency) are this design's choices. Since s_tready is 'accept' itself, it
// is an output driven straight from an input, with no logic in between.
module hll_data_partition #(
  parameter int unsigned NUM_PIPES = 16
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    accept,
  input  logic                    s_tvalid,
  output logic                    s_tready,
  input  logic [32*NUM_PIPES-1:0] s_tdata,
  input  logic [NUM_PIPES-1:0]    s_tkeep,
  input  logic                    s_tlast,
  output logic                    lane_valid [NUM_PIPES],
  output logic [31:0]             lane_data  [NUM_PIPES],
  output logic                    lane_last  [NUM_PIPES]
);
  logic fire;

  assign s_tready = accept;
  assign fire     = s_tvalid && accept;

  always_ff @(posedge clk) begin
    for (int i = 0; i < NUM_PIPES; i++) lane_data[i] <= s_tdata[32*i +: 32];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < NUM_PIPES; i++) begin
        lane_valid[i] <= 1'b0;
        lane_last[i]  <= 1'b0;
      end
    end else begin
      for (int i = 0; i < NUM_PIPES; i++) begin
        lane_valid[i] <= fire && s_tkeep[i];
        lane_last[i]  <= fire && s_tlast;
      end
    end
  end
endmodule

// hll_divider: serial unsigned restoring divider, quotient = num / den.
//
// One quotient bit per cycle, most significant first: start loads the
// operands, and NUM_W cycles later 'done' pulses with the quotient. 'busy' is
// high in between; a start while busy is ignored. Division by zero gives an
// all-ones quotient. Helper of hll_harmonic_mean.
module hll_divider #(
  parameter int unsigned NUM_W = 129,
  parameter int unsigned DEN_W = 98
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             start,
  input  logic [NUM_W-1:0] num,
  input  logic [DEN_W-1:0] den,
  output logic             busy,
  output logic             done,
  output logic [NUM_W-1:0] quot
);
  localparam int unsigned CNT_W = hll_pkg::bits_for(NUM_W);

  logic [DEN_W:0]   rem;
  logic [DEN_W-1:0] den_q;
  logic [CNT_W-1:0] cnt;
  logic [DEN_W+1:0] trial;

  // remainder with the next dividend bit shifted in, minus the divisor
  assign trial = {rem, quot[NUM_W-1]} - {2'b00, den_q};

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy  <= 1'b0;
      done  <= 1'b0;
      cnt   <= '0;
      rem   <= '0;
      den_q <= '0;
      quot  <= '0;
    end else begin
      done <= 1'b0;
      if (!busy) begin
        if (start) begin
          busy  <= 1'b1;
          cnt   <= '0;
          rem   <= '0;
          den_q <= den;
          quot  <= num;           // dividend bits are shifted out of quot's top
        end
      end else begin
        if (trial[DEN_W+1]) begin // negative: restore
          rem  <= {rem[DEN_W-1:0], quot[NUM_W-1]};
          quot <= {quot[NUM_W-2:0], 1'b0};
        end else begin
          rem  <= trial[DEN_W:0];
          quot <= {quot[NUM_W-2:0], 1'b1};
        end
        cnt <= cnt + 1'b1;
        if (cnt == CNT_W'(NUM_W - 1)) begin
          busy <= 1'b0;
          done <= 1'b1;
        end
      end
    end
  end
endmodule

// hll_buckets: the 2^PREC bucket counters of one aggregation pipeline.
//
// The counters live in a simple dual-port memory (one read port, one write
// port, registered read), as block RAM on an FPGA. The block runs in three
// modes:
//   CLEAR  after reset: writes zero to every counter, one per cycle
//          (2^PREC cycles); 'busy' is high.
//   RUN    accepts one (idx, rank) update per cycle. The update is the
//          paper's pipelined read-compare-write: cycle 0 reads M[idx],
//          cycle 1 compares with rho(w) (hll_rank_max) and writes the larger
//          value back if rho(w) was larger. Because the read of the next item
//          is issued while the current one is still being written, a value
//          written in the previous cycle is forwarded when the next item
//          addresses the same counter; this merges back-to-back updates of
//          one counter ('merged' pulses when it happens). 'done' pulses one
//          cycle after the update that carried in_last has been written.
//   DRAIN  started by drain_start: reads all counters in index order, one
//          per cycle, and streams them out (out_valid/out_rank, out_last on
//          counter 2^PREC-1), 'busy' high. Each counter is written back to
//          zero in the same cycle it is read, so the sketch is empty again
//          when the drain ends and the next data set can start at once.
// The read-compare-write with merging and the streaming of the counters
// after aggregation follow the paper; the clear-on-read during the drain, the
// one-entry forwarding register and the mode handshake are this design's.
// Updates may only be presented in RUN mode (checked by an assertion).
//
// rst_n also switches off the handshake assertions below ('disable iff'), so lint reports it
// as used both as an asynchronous reset and in clocked logic; only the
// assertion uses it that way.
module hll_buckets #(
  parameter int unsigned PREC   = 16,
  parameter int unsigned RANK_W = 6
) (
  input  logic              clk,
  input  logic              rst_n,
  // update stream
  input  logic              in_valid,
  input  logic [PREC-1:0]   in_idx,
  input  logic [RANK_W-1:0] in_rank,
  input  logic              in_last,
  output logic              done,
  output logic              merged,
  // control
  input  logic              drain_start,
  output logic              busy,
  // counter read-out stream
  output logic              out_valid,
  output logic [RANK_W-1:0] out_rank,
  output logic              out_last
);
  typedef enum logic [1:0] {B_CLEAR, B_RUN, B_DRAIN} bstate_t;

  localparam int unsigned M = 1 << PREC;

  bstate_t           state;
  logic [PREC-1:0]   cnt;

  logic [RANK_W-1:0] mem [M];
  logic              rd_en, wr_en;
  logic [PREC-1:0]   rd_addr, wr_addr;
  logic [RANK_W-1:0] rd_data, wr_data;

  // update pipeline stage 1 (read data available)
  logic              s1_valid, s1_last;
  logic [PREC-1:0]   s1_idx;
  logic [RANK_W-1:0] s1_rank;
  // last write, for forwarding
  logic              fw_valid;
  logic [PREC-1:0]   fw_idx;
  logic [RANK_W-1:0] fw_rank;
  // drain read-out stage
  logic              d_valid, d_last;

  logic              hit;
  logic [RANK_W-1:0] cur_rank, max_rank;
  logic              upd;

  assign hit      = fw_valid && (fw_idx == s1_idx);
  assign cur_rank = hit ? fw_rank : rd_data;

  hll_rank_max #(.RANK_W(RANK_W)) u_max (
    .cur_rank(cur_rank), .new_rank(s1_rank), .max_rank(max_rank), .update(upd)
  );

  // memory port control
  always_comb begin
    rd_en   = 1'b0;
    rd_addr = in_idx;
    wr_en   = 1'b0;
    wr_addr = s1_idx;
    wr_data = max_rank;
    unique case (state)
      B_CLEAR: begin
        wr_en   = 1'b1;
        wr_addr = cnt;
        wr_data = '0;
      end
      B_RUN: begin
        rd_en   = in_valid;
        wr_en   = s1_valid && upd;
      end
      B_DRAIN: begin
        rd_en   = 1'b1;
        rd_addr = cnt;
        wr_en   = 1'b1;
        wr_addr = cnt;
        wr_data = '0;
      end
      default: ;
    endcase
  end

  always_ff @(posedge clk) begin
    if (wr_en) mem[wr_addr] <= wr_data;
    if (rd_en) rd_data <= mem[rd_addr];
  end

  always_ff @(posedge clk) begin
    s1_idx  <= in_idx;
    s1_rank <= in_rank;
    fw_idx  <= s1_idx;
    fw_rank <= max_rank;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state    <= B_CLEAR;
      cnt      <= '0;
      s1_valid <= 1'b0;
      s1_last  <= 1'b0;
      fw_valid <= 1'b0;
      done     <= 1'b0;
      merged   <= 1'b0;
      d_valid  <= 1'b0;
      d_last   <= 1'b0;
    end else begin
      s1_valid <= (state == B_RUN) && in_valid;
      s1_last  <= (state == B_RUN) && in_last;
      fw_valid <= (state == B_RUN) && s1_valid && upd;
      done     <= s1_last;
      merged   <= s1_valid && hit;
      d_valid  <= (state == B_DRAIN);
      d_last   <= (state == B_DRAIN) && (cnt == PREC'(M - 1));
      unique case (state)
        B_CLEAR: begin
          cnt <= cnt + 1'b1;
          if (cnt == PREC'(M - 1)) state <= B_RUN;
        end
        B_RUN: begin
          cnt <= '0;
          if (drain_start) state <= B_DRAIN;
        end
        B_DRAIN: begin
          cnt <= cnt + 1'b1;
          if (cnt == PREC'(M - 1)) state <= B_RUN;
        end
        default: state <= B_CLEAR;
      endcase
    end
  end

  assign busy      = (state != B_RUN);
  assign out_valid = d_valid;
  assign out_rank  = rd_data;
  assign out_last  = d_last;

  // Updates are only accepted while the counters are in RUN mode, and a
  // drain must not start while an update is still in flight.
  a_run_only: assert property (@(posedge clk) disable iff (!rst_n) !in_valid || state == B_RUN)
    else $error("hll_buckets: update presented while busy");
  a_drain_idle: assert property (@(posedge clk) disable iff (!rst_n)
                                 !(drain_start && (in_valid || s1_valid)))
    else $error("hll_buckets: drain started with updates in flight");
endmodule

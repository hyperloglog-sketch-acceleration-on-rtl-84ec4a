// hll_murmur3_64: 64-bit Murmur3 hash of one 32-bit data item per cycle.
//
// The hash is the first 64-bit word of MurmurHash3_x64_128 applied to the
// item as a 4-byte little-endian key. For such a short key only the tail
// step and the finalisation run:
//   k1 = v * C1; k1 = rotl(k1, 31); k1 *= C2; h1 = seed ^ k1; h2 = seed;
//   h1 ^= 4; h2 ^= 4; h1 += h2; h2 += h1;
//   h1 = fmix64(h1); h2 = fmix64(h2); x = h1 + h2
// with fmix64(k) = k ^= k>>33; k *= F1; k ^= k>>33; k *= F2; k ^= k>>33.
// Each of the six 64x64 constant multiplications gets a stage of its own,
// the way a DSP-mapped pipeline would place them, so the latency is
// LATENCY = 6 cycles and a new item is accepted every cycle (II = 1).
// The use of a 64-bit Murmur3 hash follows the paper; the choice of the
// x64_128 variant's first word and the seed (SEED, default 0) are this
// design's own, as the paper does not say which 64-bit variant or seed it uses.
//
// Interface: in_valid/in_data/in_last in, out_valid/out_hash/out_last out,
// LATENCY cycles later. There is no back-pressure; in_last travels with the
// item even when in_valid is low (it marks the end of a data set).
module hll_murmur3_64 #(
  parameter logic [63:0] SEED = 64'd0
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        in_valid,
  input  logic [31:0] in_data,
  input  logic        in_last,
  output logic        out_valid,
  output logic [63:0] out_hash,
  output logic        out_last
);
  localparam int unsigned LATENCY = 6;
  localparam logic [63:0] C1 = 64'h87c37b91114253d5;
  localparam logic [63:0] C2 = 64'h4cf5ad432745937f;
  localparam logic [63:0] F1 = 64'hff51afd7ed558ccd;
  localparam logic [63:0] F2 = 64'hc4ceb9fe1a85ec53;
  localparam logic [63:0] LEN = 64'd4;

  logic [LATENCY-1:0] vld_q, last_q;
  logic [63:0] s1_k, s2_k, s3_h1, s3_h2, s4_h1, s4_h2, s5_h1, s5_h2, s6_x;

  // tail + finalisation adds, evaluated between stage 2 and stage 3
  logic [63:0] h1_a, h2_a, h1_b, h2_b;
  always_comb begin
    h1_a = SEED ^ s2_k ^ LEN;
    h2_a = SEED ^ LEN;
    h1_b = h1_a + h2_a;
    h2_b = h2_a + h1_b;
  end

  always_ff @(posedge clk) begin
    s1_k  <= {32'd0, in_data} * C1;
    s2_k  <= {s1_k[32:0], s1_k[63:33]} * C2;              // rotl 31
    s3_h1 <= h1_b;
    s3_h2 <= h2_b;
    s4_h1 <= (s3_h1 ^ (s3_h1 >> 33)) * F1;
    s4_h2 <= (s3_h2 ^ (s3_h2 >> 33)) * F1;
    s5_h1 <= (s4_h1 ^ (s4_h1 >> 33)) * F2;
    s5_h2 <= (s4_h2 ^ (s4_h2 >> 33)) * F2;
    s6_x  <= (s5_h1 ^ (s5_h1 >> 33)) + (s5_h2 ^ (s5_h2 >> 33));
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      vld_q  <= '0;
      last_q <= '0;
    end else begin
      vld_q  <= {vld_q[LATENCY-2:0], in_valid};
      last_q <= {last_q[LATENCY-2:0], in_last};
    end
  end

  assign out_valid = vld_q[LATENCY-1];
  assign out_last  = last_q[LATENCY-1];
  assign out_hash  = s6_x;
endmodule

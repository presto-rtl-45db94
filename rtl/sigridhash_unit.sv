// sigridhash_unit: feature normalisation by SigridHash (sparse id -> embedding index).
//
// For every 64-bit sparse id x it computes h = Hash(x, seed), keeps the low 63 bits, and
// returns h mod d, where d is the number of rows of the target embedding table
// (Algorithm 2 of the paper: "compute seeded hash function; c[i] <- h mod d").
//
// The paper does not give ComputeHash. This unit uses the 128-to-64-bit mix of CityHash /
// folly::hash_128_to_64 with the seed as the upper half:
//   a = (x ^ seed) * K;  a ^= a >> 47;  b = (seed ^ a) * K;  b ^= b >> 47;  h = b * K
// with K = 0x9DDFEA08EB382D69, all mod 2^64. The remainder is taken by Barrett
// reduction: at job start a bit-serial divider computes R = floor(2^63 / d) (64 cycles,
// in_ready low meanwhile); per element q = (h * R) >> 63 is at most one short of
// floor(h / d), so r = h - q*d needs at most one subtraction of d. d = 0 passes h
// through unreduced, d = 1 gives 0.
//
// Interface: p0 = seed, p1 = d, both held for the whole job; job_start pulses once when a
// job begins. Streaming valid/ready in and out; `last` travels with its element.
// Timing: a 6-stage pipeline, one element per cycle when the output is not stalled.
// The range assertion is disabled during reset (`disable iff (!rst_n)`), which lint reports
// as a synchronous use of the asynchronous reset.
module sigridhash_unit
  import presto_pkg::*;
(
  input  logic  clk,
  input  logic  rst_n,
  input  logic  job_start,
  input  word_t seed,
  input  word_t max_value,
  input  logic  in_valid,
  output logic  in_ready,
  input  elem_t in_data,
  output logic  out_valid,
  input  logic  out_ready,
  output elem_t out_data,
  output logic  idle
);
  localparam int unsigned NST = 6;

  // ---- reciprocal R = floor(2^63 / d), bit-serial restoring division ----
  logic        div_busy;
  logic [6:0]  div_i;
  logic [64:0] rem;
  logic [63:0] recip;
  wire  [64:0] rem_sh = {rem[63:0], (div_i == 7'd63)};   // numerator 2^63: only bit 63 set

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      div_busy <= 1'b0;
      div_i    <= '0;
      rem      <= '0;
      recip    <= '0;
    end else if (job_start) begin
      div_busy <= 1'b1;
      div_i    <= 7'd63;
      rem      <= '0;
      recip    <= '0;
    end else if (div_busy) begin
      if (rem_sh >= {1'b0, max_value}) begin
        rem <= rem_sh - {1'b0, max_value};
        recip[div_i[5:0]] <= 1'b1;
      end else begin
        rem <= rem_sh;
      end
      if (div_i == '0) div_busy <= 1'b0;
      else             div_i    <= div_i - 1'b1;
    end
  end

  // ---- pipeline ----
  logic [NST-1:0] v;
  logic [NST-1:0] lst;
  logic [63:0]    s1_a, s2_b, s3_h, s5_r;
  logic [126:0]   s4_p;
  logic [63:0]    s4_h;
  logic [63:0]    s6_r;

  wire en = !v[NST-1] || out_ready;
  assign in_ready = en && !div_busy && !job_start;
  wire take = in_valid && in_ready;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      v   <= '0;
      lst <= '0;
    end else if (en) begin
      v   <= {v[NST-2:0], take};
      lst <= {lst[NST-2:0], in_data.last};
    end
  end

  always_ff @(posedge clk) begin
    if (en) begin
      logic [63:0] t;
      // S1: a = (x ^ seed) * K
      s1_a <= (in_data.data ^ seed) * HASH_MUL;
      // S2: a ^= a >> 47; b = (seed ^ a) * K
      t     = s1_a ^ (s1_a >> 47);
      s2_b <= (seed ^ t) * HASH_MUL;
      // S3: b ^= b >> 47; h = b * K, keep 63 bits
      t     = s2_b ^ (s2_b >> 47);
      s3_h <= {1'b0, 63'(t * HASH_MUL)};
      // S4: Barrett product h * R
      s4_h <= s3_h;
      s4_p <= {64'd0, s3_h[62:0]} * {63'd0, recip};
      // S5: r = h - q * d with q = (h * R) >> 63
      s5_r <= s4_h - 64'(s4_p[126:63] * max_value);
      // S6: one correction step, special cases d = 0 and d = 1
      if (max_value == 64'd0)      s6_r <= s5_r;
      else if (max_value == 64'd1) s6_r <= '0;
      else if (s5_r >= max_value)  s6_r <= s5_r - max_value;
      else                         s6_r <= s5_r;
    end
  end

  assign out_valid     = v[NST-1];
  assign out_data.data = s6_r;
  assign out_data.last = lst[NST-1];
  assign idle          = (v == '0) && !div_busy;

  a_remainder_in_range: assert property (@(posedge clk) disable iff (!rst_n)
    (out_valid && max_value > 64'd1) |-> (out_data.data < max_value));
endmodule

// Shift-and-add modular reduction for q = 7681 = 2^13 - 2^9 + 1, in three
// pipeline stages (Algorithm 1 of the paper and the right half of its
// butterfly figure).
//
// The 26-bit input c is split as c4 (bit 25) | c3 (24:21) | c2 (20:17) |
// c1 (16:13) | c0 (12:0), the bit positions printed in the figure. Using
// 2^13 = 2^9 - 1 mod q, the high part is folded with additions, shifts and
// subtractions only:
//   stage 1: t0 = c4 + c3, t1 = t0 + c2, t2 = t1 + c1 (c0, c4 delayed)
//   stage 2: t5 = ((((t2 << 1) - t0) << 4) - t1) << 4) - t2
//   stage 3: r = t5 + c0 - (c4 << 12), which lies in (-q, 4q); one of
//            q, 0, -q, -2q, -3q is added after comparing r with the ranges
//            (-q,0), [0,q), [q,2q), [2q,3q), [3q,4q), as the figure shows
//            (the algorithm's listing does the same with a sign test and
//            three conditional subtractions; the figure's form is used).
// The result is in [0, q). Valid for every c below 2^26 (this covers
// (q-1)^2 + 2q, the largest value the butterfly produces).
//
// Timing: `out` is valid three cycles after `in`; `v_in` travels along as
// `v_out`.
module modred
  import rudraksh_pkg::*;
(
  input  logic          clk,
  input  logic          rst_n,
  input  logic          v_in,
  input  logic [25:0]   c,
  output logic          v_out,
  output logic [QW-1:0] d
);

  // stage 1
  logic        s1_v, s1_c4;
  logic [12:0] s1_c0;
  logic [5:0]  s1_t0, s1_t1, s1_t2;
  // stage 2
  logic        s2_v, s2_c4;
  logic [12:0] s2_c0;
  logic signed [15:0] s2_t5;

  logic signed [15:0] t3, t4, t5;
  logic signed [16:0] r;
  coeff_t             dn;

  always_comb begin
    t3 = (16'(s1_t2) <<< 1) - 16'(s1_t0);
    t4 = (t3 <<< 4) - 16'(s1_t1);
    t5 = (t4 <<< 4) - 16'(s1_t2);
    // correction: r lies in (-q, 4q); one compare-and-select
    r = 17'(s2_t5) + 17'(s2_c0) - (s2_c4 ? 17'sd4096 : 17'sd0);
    if (r < 0)                      dn = QW'(r + 17'(Q));
    else if (r < 17'(Q))            dn = QW'(r);
    else if (r < 17'(2*Q))          dn = QW'(r - 17'(Q));
    else if (r < 17'(3*Q))          dn = QW'(r - 17'(2*Q));
    else                            dn = QW'(r - 17'(3*Q));
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      s1_v <= 1'b0; s1_c4 <= 1'b0; s1_c0 <= '0; s1_t0 <= '0; s1_t1 <= '0; s1_t2 <= '0;
      s2_v <= 1'b0; s2_c4 <= 1'b0; s2_c0 <= '0; s2_t5 <= '0;
      v_out <= 1'b0; d <= '0;
    end else begin
      // stage 1
      s1_v  <= v_in;
      s1_c4 <= c[25];
      s1_c0 <= c[12:0];
      s1_t0 <= 6'(c[25]) + 6'(c[24:21]);
      s1_t1 <= 6'(c[25]) + 6'(c[24:21]) + 6'(c[20:17]);
      s1_t2 <= 6'(c[25]) + 6'(c[24:21]) + 6'(c[20:17]) + 6'(c[16:13]);
      // stage 2
      s2_v  <= s1_v;
      s2_c4 <= s1_c4;
      s2_c0 <= s1_c0;
      s2_t5 <= t5;
      // stage 3
      v_out <= s2_v;
      d     <= dn;
    end
  end

endmodule

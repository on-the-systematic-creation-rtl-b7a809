// ctb_mult -- faithfully rounded commutative truncated Booth radix-4
// multiplier, N x N bits -> N most significant product bits.
//
// The full product a*b would have 2N bits. Instead, the radix-4 Booth
// partial-product array of a (encoded) times b is built without its K least
// significant columns; K/2 compensation bits and a constant C are added in
// column K (trunc_array); the remaining array is summed (array_sum) and its
// N-K least significant result columns are dropped, leaving p = columns
// 2N-1 .. N. With the defaults K = k*(N) and C = C*min(k*) taken from the
// paper's closed forms (ctb_pkg), p is a faithful rounding of a*b / 2^N:
// p equals the exact upper half when the lower half of a*b is zero, and is
// otherwise the upper half or the upper half plus one. p(a,b) == p(b,a) for
// all inputs.
//
// Interface: a, b and p are N-bit two's complement values when SIGNED = 1
// (the paper's case) and unsigned when SIGNED = 0 (this design's extension).
// N must be even and at least 4 (the paper treats even N only). K and C may
// be overridden; elaboration stops if they leave the faithful-rounding
// range. Purely combinational: no clock, no reset, zero cycles of latency.
// The N-K low bits of 'sum' are computed but not output (lint notes them as
// unused): dropping them is the final rounding step.
//
// Defaults: N = 16, as in the paper's Fig. 2 (k* = 12, C* in [4, 11]). The
// choice of the lowest admissible C is this design's own.
module ctb_mult
  import ctb_pkg::*;
#(
  parameter int unsigned N      = 16,
  parameter bit          SIGNED = 1'b1,
  parameter int unsigned K      = kstar(N),
  parameter longint      C      = cstar_min(K)
) (
  input  logic [N-1:0] a,
  input  logic [N-1:0] b,
  output logic [N-1:0] p
);

  localparam int unsigned W  = 2 * N - K;
  localparam int unsigned NB = SIGNED ? N / 2 : N / 2 + 1;
  localparam int unsigned NR = NB + 2 + K / 2;

  if (N < 4 || N % 2 != 0) begin : g_bad_n
    $error("ctb_mult: N = %0d must be even and >= 4", N);
  end
  if (K % 2 != 0 || K >= N) begin : g_bad_k
    $error("ctb_mult: K = %0d must be even and below N", K);
  end
  if (C < cstar_min(K) || C > cstar_max(N, K)) begin : g_bad_c
    $error("ctb_mult: C = %0d outside the faithful range [%0d, %0d] for K = %0d",
           C, cstar_min(K), cstar_max(N, K), K);
  end

  logic [NR-1:0][W-1:0] rows;
  logic [W-1:0]         sum;

  trunc_array #(.N(N), .SIGNED(SIGNED), .K(K), .C(C)) u_array (
    .a    (a),
    .b    (b),
    .rows (rows)
  );

  array_sum #(.ROWS(NR), .W(W)) u_sum (
    .rows (rows),
    .sum  (sum)
  );

  // drop the N-K least significant columns of the sum: p = columns 2N-1..N
  assign p = sum[W-1 -: N];

endmodule

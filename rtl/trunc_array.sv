// trunc_array -- commutative truncated radix-4 Booth partial-product array.
//
// Builds the addends of columns K .. 2N-1 of an N x N radix-4 Booth product
// whose K least significant columns are removed (Sec. III-A / III-C
// construction):
//   * the multiplier a is Booth encoded into NB digits (booth_enc) and each
//     digit selects a row +-b / +-2b at column 2i (booth_row), cut to the
//     kept columns;
//   * the Booth sign bits s_i of rows with 2i >= K are kept, packed into one
//     addend (they occupy distinct columns 2i);
//   * rows with 2i < K lose s_i and get instead a compensation bit s_i' in
//     column K (comp_bit), with c0 = b[K-2i-1]; these K/2 bits are what makes
//     the truncated array commutative;
//   * the constant C (units of 2^K) is one more addend in column K.
// Bit 0 of every addend is column K. The addends are ordered: NB rows, then
// the sign-bit addend, then the constant, then the K/2 single-bit
// compensation addends.
//
// SIGNED = 1 treats a and b as two's complement (the paper's exposition,
// NB = N/2 digits). SIGNED = 0 treats them as unsigned by zero-extending,
// which needs one more digit (NB = N/2 + 1) at column N >= K and leaves the
// truncated part, and so the error analysis, unchanged; that variant is this
// design's own extension. Combinational.
// For SIGNED = 1 the two top bits of 'ax' are read by no digit (the extra
// digit exists only for unsigned operands), which lint reports as unused.
module trunc_array
  import ctb_pkg::*;
#(
  parameter int unsigned N      = 16,
  parameter bit          SIGNED = 1'b1,
  parameter int unsigned K      = kstar(N),
  parameter longint      C      = cstar_min(K),
  parameter int unsigned W      = 2 * N - K,
  parameter int unsigned NB     = SIGNED ? N / 2 : N / 2 + 1,
  parameter int unsigned NR     = NB + 2 + K / 2
) (
  input  logic [N-1:0]          a,     // multiplier (Booth encoded)
  input  logic [N-1:0]          b,     // multiplicand
  output logic [NR-1:0][W-1:0]  rows   // addends, bit 0 = column K
);

  logic         ext_a, ext_b;
  logic [N+1:0] ax;      // a widened by two bits, for the digit triples
  logic [N:0]   bx;      // b widened by one bit
  booth_digit_t dig   [NB];
  logic [W-1:0] pp    [NB];
  logic [NB-1:0] s_kept;
  logic [W-1:0] sign_row;

  always_comb begin
    ext_a = SIGNED ? a[N-1] : 1'b0;
    ext_b = SIGNED ? b[N-1] : 1'b0;
    ax    = {ext_a, ext_a, a};
    bx    = {ext_b, b};
  end

  for (genvar i = 0; i < NB; i++) begin : g_row
    booth_enc u_enc (
      .x (ax[2*i+1]),
      .y (ax[2*i]),
      .z ((i == 0) ? 1'b0 : ax[(i == 0) ? 0 : 2*i-1]),
      .d (dig[i])
    );
    booth_row #(.N(N), .K(K), .I(i), .W(W)) u_row (
      .d      (dig[i]),
      .bx     (bx),
      .row    (pp[i]),
      .s_kept (s_kept[i])
    );
    assign rows[i] = pp[i];
  end

  // sign bits of the rows that survive truncation, s_i at column 2i
  always_comb begin
    sign_row = '0;
    for (int i = 0; i < NB; i++)
      if (2 * i >= K) sign_row[2*i-K] = s_kept[i];
  end
  assign rows[NB]   = sign_row;
  assign rows[NB+1] = W'(C);

  // compensation bits s_i', all in column K
  for (genvar i = 0; i < K / 2; i++) begin : g_comp
    logic sp;
    comp_bit u_comp (
      .d  (dig[i]),
      .c0 (b[K-2*i-1]),
      .sp (sp)
    );
    assign rows[NB+2+i] = W'(sp);
  end

endmodule

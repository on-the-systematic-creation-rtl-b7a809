// comp_bit -- commutativity compensation bit s_i' of a truncated Booth row.
//
// For a row i whose Booth sign bit falls in the truncated columns (i < k/2),
// one extra bit is added in column k. With c0 = b[k-2i-1], the first
// multiplicand bit that truncation removes from the row, the paper's Table I
// (column row_i' = pp_i' + s_i') gives
//   s_i' = c0   for d > 0,   s_i' = ~c0  for d < 0,   s_i' = 0 for d = 0,
// i.e. s_i' = (one | two) & (c0 ^ neg). The closed form printed in the text,
// a[2i+1] & ~(a[2i] & a[2i-1]) & (c0 ^ a[2i+1]), agrees with the table only
// for negative digits and yields 0 for positive ones; with it the multiplier
// is not commutative, so this block follows the table. Combinational.
module comp_bit
  import ctb_pkg::*;
(
  input  booth_digit_t d,   // encoded Booth digit of row i
  input  logic         c0,  // b[k-2i-1]
  output logic         sp   // s_i', added in column k
);

  always_comb sp = (d.one | d.two) & (c0 ^ d.neg);

endmodule

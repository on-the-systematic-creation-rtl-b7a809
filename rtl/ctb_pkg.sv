// ctb_pkg -- shared types and design-time arithmetic of the commutative
// truncated Booth radix-4 multiplier.
//
// booth_digit_t is the encoded form of one radix-4 Booth digit
// d = -2*x + y + z of the multiplier operand: 'neg' marks d < 0, 'one' marks
// |d| = 1 and 'two' marks |d| = 2; all three are 0 for d = 0.
//
// kstar() and cstar_min(k)/cstar_max(n,k) evaluate the closed forms that choose
// the number of truncated columns and the compensation constant:
//   k*  = the largest even k with k <= 5 * 2^(n-k-2)
//   C*  in [ (2k-5-(-1)^(k/2))/5 , (5*2^(n-k)-2k-(-1)^(k/2))/5 ]
// C* is counted in units of 2^k (it is added in column k). These formulas are
// the published ones; only their integer rounding (ceil of the lower bound,
// floor of the upper bound) is written out here. They are intended for the
// even operand widths n >= 4 that the multiplier accepts.
package ctb_pkg;

  typedef struct packed {
    logic neg;  // digit is negative (row is one's complemented, +1 in s_i)
    logic one;  // |digit| == 1
    logic two;  // |digit| == 2
  } booth_digit_t;

  // (-1)^(k/2)
  function automatic longint alt_sign(input int unsigned k);
    return ((k / 2) % 2 == 0) ? 1 : -1;
  endfunction

  // Largest even k < n with k <= 5 * 2^(n-k-2).
  function automatic int unsigned kstar(input int unsigned n);
    int unsigned best;
    best = 0;
    for (int unsigned k = 0; k + 2 <= n; k += 2) begin
      if ((n - k - 2) >= 16) best = k;
      else if (longint'(k) <= 64'sd5 * (64'sd1 <<< (n - k - 2))) best = k;
    end
    return best;
  endfunction

  // Smallest admissible compensation constant (units of 2^k).
  function automatic longint cstar_min(input int unsigned k);
    longint x;
    x = 2 * longint'(k) - 5 - alt_sign(k);
    // ceiling division by 5, valid for either sign of x
    return (x >= 0) ? (x + 4) / 5 : -((-x) / 5);
  endfunction

  // Largest admissible compensation constant (units of 2^k).
  function automatic longint cstar_max(input int unsigned n, input int unsigned k);
    longint x;
    x = 5 * (64'sd1 <<< (n - k)) - 2 * longint'(k) - alt_sign(k);
    // floor division by 5, valid for either sign of x
    return (x >= 0) ? x / 5 : -((-x + 4) / 5);
  endfunction

endpackage

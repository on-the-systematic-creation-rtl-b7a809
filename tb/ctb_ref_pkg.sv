// ctb_ref_pkg -- reference arithmetic for the multiplier testbenches.
//
// Everything here is computed from the double-Booth formulation, not from the
// partial-product array the RTL builds: both operands are split into radix-4
// Booth digits, the product is the sum of 4^(i+j) * da_i * db_j, the terms
// with i + j >= k/2 form M (the part the hardware keeps) and the others form
// the truncation error Delta. The expected multiplier output is
// (M / 2^k + C) >> (n - k). Values are held in 264-bit signed integers so
// that operands up to 128 bits fit.
package ctb_ref_pkg;

  typedef logic signed [263:0] big_t;

  // n-bit operand x as a (sign- or zero-extended) integer
  function automatic big_t ext(input logic [127:0] x, input int n, input bit sgn);
    big_t v;
    v = '0;
    for (int i = 0; i < 264; i++)
      v[i] = (i < n) ? x[i] : (sgn ? x[n-1] : 1'b0);
    return v;
  endfunction

  // radix-4 Booth digit i of integer v: -2 v[2i+1] + v[2i] + v[2i-1]
  function automatic int digit(input big_t v, input int i);
    int z;
    z = (i == 0) ? 0 : int'(v[2*i-1]);
    return -2 * int'(v[2*i+1]) + int'(v[2*i]) + z;
  endfunction

  function automatic int ndig(input int n, input bit sgn);
    return sgn ? n / 2 : n / 2 + 1;
  endfunction

  // kept part M (keep = 1) or truncated part Delta (keep = 0)
  function automatic big_t part(input big_t av, input big_t bv, input int n,
                                input int k, input bit sgn, input bit keep);
    big_t s;
    s = '0;
    for (int i = 0; i < ndig(n, sgn); i++)
      for (int j = 0; j < ndig(n, sgn); j++)
        if ((i + j >= k / 2) == keep)
          s = s + (big_t'(digit(av, i) * digit(bv, j)) <<< (2 * (i + j)));
    return s;
  endfunction

  // expected output bits of the truncated multiplier
  function automatic logic [127:0] expect_out(input big_t av, input big_t bv,
      input int n, input int k, input longint c, input bit sgn);
    big_t m;
    m = part(av, bv, n, k, sgn, 1'b1);
    m = ((m >>> k) + big_t'(c)) >>> (n - k);
    return m[127:0];
  endfunction

  // (-1)^(k/2)
  function automatic longint sg(input int k);
    return ((k / 2) % 2 == 0) ? 64'sd1 : -64'sd1;
  endfunction

  // published tight bounds on Delta
  function automatic big_t delta_max(input int k);
    big_t t;
    t = (big_t'(1) <<< k) * big_t'(10 * k - 5 * sg(k) - 1) + big_t'(5 + sg(k));
    return t / 25;
  endfunction

  function automatic big_t delta_min(input int k);
    big_t t;
    t = (big_t'(1) <<< k) * big_t'(10 * k + 5 * sg(k) - 1) - big_t'(5) + big_t'(sg(k));
    return -(t / 25);
  endfunction

  // low k bits of the repeating hex patterns 0x...9999 and 0x...6666
  function automatic logic [127:0] pat(input int hexdigit, input int k);
    logic [127:0] v;
    for (int i = 0; i < 128; i += 4) v[i +: 4] = 4'(hexdigit);
    for (int i = 0; i < 128; i++) if (i >= k) v[i] = 1'b0;
    return v;
  endfunction

endpackage

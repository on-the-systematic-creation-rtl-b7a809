// booth_enc -- radix-4 Booth digit encoder.
//
// Encodes the bit triple (x, y, z) = (a[2i+1], a[2i], a[2i-1]) into the digit
// d = -2x + y + z in {-2..2} (Eq. B(x,y,z) of the radix-4 Booth scheme):
//   one = |d| == 1 = y ^ z
//   two = |d| == 2 = x & ~y & ~z  |  ~x & y & z
//   neg = d < 0    = x & ~(y & z)
// 'neg' is exactly the Booth sign bit s_i of the paper's Table I / Eq. (8):
// the triple 111 gives d = 0 with neg = 0, so a zero digit always yields an
// all-zero row. Purely combinational, no timing.
module booth_enc
  import ctb_pkg::*;
(
  input  logic         x,   // a[2i+1]
  input  logic         y,   // a[2i]
  input  logic         z,   // a[2i-1] (0 for i = 0)
  output booth_digit_t d
);

  always_comb begin
    d.one = y ^ z;
    d.two = (x & ~y & ~z) | (~x & y & z);
    d.neg = x & ~(y & z);
  end

endmodule

// tb_booth_enc -- exhaustive test of the radix-4 Booth digit encoder.
// All eight bit triples (x, y, z) are applied; the digit -2x + y + z is
// computed arithmetically and its sign and magnitude flags are compared with
// the encoder's outputs (Table I: the triple 111 is the zero digit with no
// negation).
module tb_booth_enc;
  import ctb_pkg::*;

  logic         x, y, z;
  booth_digit_t d;
  int           checks = 0, failures = 0;

  booth_enc u_dut (.x(x), .y(y), .z(z), .d(d));

  initial begin
    for (int v = 0; v < 8; v++) begin
      int dv;
      {x, y, z} = 3'(v);
      #1;
      dv = -2 * int'(x) + int'(y) + int'(z);
      checks += 3;
      if (d.neg !== (dv < 0))                 begin failures++; $display("neg wrong for %03b", v); end
      if (d.one !== (dv == 1 || dv == -1))    begin failures++; $display("one wrong for %03b", v); end
      if (d.two !== (dv == 2 || dv == -2))    begin failures++; $display("two wrong for %03b", v); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #1000;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end

endmodule

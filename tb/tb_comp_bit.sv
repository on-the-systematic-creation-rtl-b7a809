// tb_comp_bit -- exhaustive test of the compensation bit s_i'.
// For every digit value d in {-2..2} (in its encoded form) and both values
// of c0 = b[k-2i-1] the expected bit is taken from Table I: the row d*(c + c0)
// needs +c0 on top of the truncated row when d > 0, +~c0 when d < 0 and
// nothing when d = 0.
module tb_comp_bit;
  import ctb_pkg::*;

  booth_digit_t d;
  logic         c0, sp;
  int           checks = 0, failures = 0;

  comp_bit u_dut (.d(d), .c0(c0), .sp(sp));

  initial begin
    for (int dv = -2; dv <= 2; dv++) begin
      for (int c = 0; c < 2; c++) begin
        logic expv;
        d.neg = (dv < 0);
        d.one = (dv == 1 || dv == -1);
        d.two = (dv == 2 || dv == -2);
        c0    = 1'(c);
        #1;
        expv = (dv > 0) ? 1'(c) : (dv < 0) ? ~1'(c) : 1'b0;
        checks++;
        if (sp !== expv) begin
          failures++;
          $display("s' wrong for d=%0d c0=%0d: got %0d", dv, c, sp);
        end
      end
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

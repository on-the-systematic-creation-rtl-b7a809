// tb_booth_row -- test of the truncated partial-product rows.
// Rows i = 0..N/2 of an N = 16, K = 12 array are built side by side. For
// random multiplicands (signed and unsigned widening) and every digit value
// the expected row is computed arithmetically: the row value is d*b for
// d >= 0 and -|d|*b - 1 (one's complement) for d < 0, shifted to column 2i;
// the columns K..2N-1 of that value must match 'row', and the sign bit must
// be present exactly when d < 0 and 2i >= K.
module tb_booth_row;
  import ctb_pkg::*;

  localparam int unsigned N  = 16;
  localparam int unsigned K  = 12;
  localparam int unsigned W  = 2 * N - K;
  localparam int unsigned NR = N / 2 + 1;

  booth_digit_t   d;
  logic [N:0]     bx;
  logic [W-1:0]   row [NR];
  logic           s   [NR];
  int             checks = 0, failures = 0;

  for (genvar i = 0; i < NR; i++) begin : g_dut
    booth_row #(.N(N), .K(K), .I(i)) u_dut (.d(d), .bx(bx), .row(row[i]), .s_kept(s[i]));
  end

  initial begin
    for (int t = 0; t < 2000; t++) begin
      logic [N-1:0] bb;
      bb = N'($urandom);
      if (t == 0) bb = '1;
      if (t == 1) bb = {1'b1, {(N-1){1'b0}}};
      bx = (t % 2 == 0) ? {bb[N-1], bb} : {1'b0, bb};
      for (int dv = -2; dv <= 2; dv++) begin
        d.neg = (dv < 0);
        d.one = (dv == 1 || dv == -1);
        d.two = (dv == 2 || dv == -2);
        #1;
        for (int i = 0; i < NR; i++) begin
          logic signed [63:0] val, kept;
          val  = 64'($signed(bx)) * ((dv < 0) ? -dv : dv);
          if (dv < 0) val = -val - 1;
          kept = (val <<< (2 * i)) >>> K;
          checks += 2;
          if (row[i] !== kept[W-1:0]) begin
            failures++;
            if (failures < 10) $display("row %0d wrong: d=%0d bx=%h got %h want %h", i, dv, bx, row[i], kept[W-1:0]);
          end
          if (s[i] !== ((dv < 0) && (2 * i >= K))) begin
            failures++;
            if (failures < 10) $display("sign bit of row %0d wrong: d=%0d", i, dv);
          end
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #1000000;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end

endmodule

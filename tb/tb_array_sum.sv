// tb_array_sum -- test of the array adder.
// Random 16 x 20-bit arrays (and the all-ones array) are summed; the
// expected value is formed column by column, counting the ones in each
// column plus the carry from the column below, which does not use a
// multi-bit adder over whole rows.
module tb_array_sum;

  localparam int unsigned ROWS = 16;
  localparam int unsigned W    = 20;

  logic [ROWS-1:0][W-1:0] rows;
  logic [W-1:0]           sum;
  int                     checks = 0, failures = 0;

  array_sum #(.ROWS(ROWS), .W(W)) u_dut (.rows(rows), .sum(sum));

  initial begin
    for (int t = 0; t < 5000; t++) begin
      logic [W-1:0] expv;
      int carry;
      for (int r = 0; r < ROWS; r++) rows[r] = W'($urandom);
      if (t == 0) rows = '1;
      if (t == 1) rows = '0;
      #1;
      carry = 0;
      for (int c = 0; c < W; c++) begin
        int ones;
        ones = carry;
        for (int r = 0; r < ROWS; r++) ones += int'(rows[r][c]);
        expv[c] = ones[0];
        carry   = ones >> 1;
      end
      checks++;
      if (sum !== expv) begin
        failures++;
        if (failures < 10) $display("sum wrong: got %h want %h", sum, expv);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #100000;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end

endmodule

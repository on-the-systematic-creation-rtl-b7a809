// array_sum -- reduction and final addition of a partial-product array.
//
// Adds ROWS addends of W bits modulo 2^W. The paper leaves array reduction
// (compressor trees) and the final carry-propagate adder to established
// techniques and specifies only the sum, so this block states the sum as a
// plain chain of additions and leaves the choice of compressor tree and
// prefix adder to logic synthesis. Combinational.
module array_sum #(
  parameter int unsigned ROWS = 16,
  parameter int unsigned W    = 20
) (
  input  logic [ROWS-1:0][W-1:0] rows,
  output logic [W-1:0]           sum
);

  always_comb begin
    sum = '0;
    for (int r = 0; r < ROWS; r++) sum = sum + rows[r];
  end

endmodule

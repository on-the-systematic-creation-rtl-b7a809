// booth_row -- one truncated radix-4 Booth partial-product row.
//
// Row i of a standard radix-4 Booth array is d_i * b placed at column 2i.
// It is formed as the bit vector pp_i, equal to b or 2b (selected by the
// digit's 'one'/'two' flags) and one's complemented when the digit is
// negative, plus the sign bit s_i = neg in column 2i (Table I, column
// row_i = pp_i + s_i). This module sign-extends pp_i over the whole product
// and returns only the columns K .. 2N-1 that survive truncation, as a
// W = 2N-K bit vector whose bit 0 is column K. Its sign bit s_i is returned
// separately: it is kept (s_kept = neg) only when column 2i >= K; below that
// it is truncated along with the low columns (s_kept = 0) and the row's
// compensation bit (comp_bit) takes its place.
//
// Sign extension is written out in full (every row is sign-extended to
// column 2N-1); the paper's figure draws a shorter sign-extension encoding
// whose exact form it does not give. The multiplicand arrives already
// widened by one bit, bx = {ext, b}, so that signed and unsigned operands
// share this code. Combinational.
// Lint reports the low columns of 'placed' as unused: they are the truncated
// columns, which are dropped on purpose.
module booth_row
  import ctb_pkg::*;
#(
  parameter int unsigned N = 16,        // operand width
  parameter int unsigned K = 12,        // truncated columns
  parameter int unsigned I = 0,         // row index, digit d_i at column 2i
  parameter int unsigned W = 2 * N - K  // kept columns K .. 2N-1
) (
  input  booth_digit_t   d,        // encoded digit d_i
  input  logic [N:0]     bx,       // multiplicand, one bit of sign/zero extension
  output logic [W-1:0]   row,      // pp_i, columns K .. 2N-1
  output logic           s_kept    // s_i if column 2i >= K, else 0
);

  localparam int unsigned RW = N + 2;       // width of |d| * b
  localparam int unsigned FW = 2 * N + 2;   // full product width, with margin

  logic signed [RW-1:0] mag;
  logic signed [RW-1:0] pp;
  logic signed [FW-1:0] placed;

  always_comb begin
    unique case ({d.two, d.one})
      2'b01:   mag = RW'($signed(bx));
      2'b10:   mag = {bx, 1'b0};
      default: mag = '0;
    endcase
    pp     = d.neg ? ~mag : mag;
    placed = FW'(pp) <<< (2 * I);
    row    = placed[K +: W];
    s_kept = (2 * I >= K) ? d.neg : 1'b0;
  end

endmodule

// tb_trunc_array -- test of the commutative truncated Booth array.
// Two arrays (N = 16, K = 12, C = 4; signed and unsigned operands) are fed
// random and corner operands. The sum of all addends modulo 2^(2N-K) must
// equal M / 2^K + C, where M is the double-Booth kept part computed in
// ctb_ref_pkg; the addend order is checked too (constant addend equal to C,
// compensation addends holding a single bit in column K).
module tb_trunc_array;
  import ctb_pkg::*;
  import ctb_ref_pkg::*;

  localparam int unsigned N   = 16;
  localparam int unsigned K   = 12;
  localparam longint      C   = 4;
  localparam int unsigned W   = 2 * N - K;
  localparam int unsigned NRS = N / 2 + 2 + K / 2;
  localparam int unsigned NRU = N / 2 + 3 + K / 2;

  logic [N-1:0]          a, b;
  logic [NRS-1:0][W-1:0] rows_s;
  logic [NRU-1:0][W-1:0] rows_u;
  int                    checks = 0, failures = 0;

  trunc_array #(.N(N), .SIGNED(1'b1), .K(K), .C(C)) u_s (.a(a), .b(b), .rows(rows_s));
  trunc_array #(.N(N), .SIGNED(1'b0), .K(K), .C(C)) u_u (.a(a), .b(b), .rows(rows_u));

  task automatic check_rows(input bit sgn);
    logic [W-1:0] s;
    big_t m;
    int nb, nr;
    nb = sgn ? N / 2 : N / 2 + 1;
    nr = nb + 2 + K / 2;
    s  = '0;
    for (int r = 0; r < nr; r++) s += sgn ? rows_s[r] : rows_u[r];
    m = part(ext(128'(a), N, sgn), ext(128'(b), N, sgn), N, K, sgn, 1'b1);
    m = (m >>> K) + big_t'(C);
    checks++;
    if (s !== m[W-1:0]) begin
      failures++;
      if (failures < 10) $display("array sum wrong (signed=%0d) a=%h b=%h: %h vs %h", sgn, a, b, s, m[W-1:0]);
    end
    checks++;
    if ((sgn ? rows_s[nb+1] : rows_u[nb+1]) !== W'(C)) failures++;
    for (int i = 0; i < K / 2; i++) begin
      checks++;
      if (((sgn ? rows_s[nb+2+i] : rows_u[nb+2+i]) >> 1) != 0) failures++;
    end
  endtask

  initial begin
    for (int t = 0; t < 20000; t++) begin
      a = N'($urandom);
      b = N'($urandom);
      if (t == 0) begin a = '1; b = '1; end
      if (t == 1) begin a = {1'b1, {(N-1){1'b0}}}; b = a; end
      if (t == 2) begin a = N'(16'h9999); b = N'(16'h6666); end
      #1;
      check_rows(1'b1);
      check_rows(1'b0);
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

// ctb_check -- stimulus and checker for a pair of ctb_mult instances.
//
// Drives operands (a, b) to one multiplier and (b, a) to a second one, waits
// 1 time unit (the design is combinational) and checks, for every vector:
//   * p(a,b) equals the double-Booth reference of ctb_ref_pkg exactly;
//   * p(a,b) == p(b,a)                                   (commutativity);
//   * p is a faithful rounding of a*b / 2^N: equal to the upper product half
//     when the lower half is zero, else the upper half or the upper half + 1;
//   * the truncation error Delta lies within the published bounds, and the
//     worst-case operand patterns of the paper's Table III reach them.
// Stimulus: the Table III patterns under random upper bits, corner values,
// operands whose low halves are zero (exact products) and uniform random
// vectors; EXHAUSTIVE = 1 instead walks all 2^(2N) operand pairs.
// It counts how often each mechanism of the array occurs (negative digits,
// +-2 digits, each compensation bit s_i' set, rounding up, rounding down,
// exact results, Delta at either bound) and counts a failure for any that
// never occurs. 'done' rises when all vectors are applied.
module ctb_check
  import ctb_pkg::*;
  import ctb_ref_pkg::*;
#(
  parameter int unsigned N          = 16,
  parameter bit          SIGNED     = 1'b1,
  parameter int unsigned NVEC       = 20000,
  parameter bit          EXHAUSTIVE = 1'b0,
  parameter int unsigned K          = kstar(N),
  parameter longint      C          = cstar_min(K)
) (
  output logic [N-1:0] a,
  output logic [N-1:0] b,
  input  logic [N-1:0] p_ab,
  input  logic [N-1:0] p_ba,
  output int           checks,
  output int           failures,
  output logic         done
);

  localparam int ND = (N % 2 == 0) ? (SIGNED ? N / 2 : N / 2 + 1) : 1;

  int n_neg, n_two, n_up, n_down, n_exact, n_dmax, n_dmin, n_comm;
  int n_comp [K/2];

  function automatic logic [127:0] rnd128();
    return {$urandom, $urandom, $urandom, $urandom};
  endfunction

  task automatic check(input logic [N-1:0] x, input logic [N-1:0] y);
    big_t av, bv, prod, hi, lo, dl, pv;
    logic [127:0] expv;
    bit ok;
    a = x;
    b = y;
    #1;
    av   = ext(128'(x), N, SIGNED);
    bv   = ext(128'(y), N, SIGNED);
    prod = av * bv;
    hi   = prod >>> N;
    lo   = prod - (hi <<< N);
    expv = expect_out(av, bv, N, K, C, SIGNED);
    pv   = ext(128'(p_ab), N, SIGNED);
    dl   = part(av, bv, N, K, SIGNED, 1'b0);

    checks++;
    if (p_ab !== expv[N-1:0]) begin
      failures++;
      if (failures < 10)
        $display("MISMATCH N=%0d a=%h b=%h p=%h expected=%h", N, x, y, p_ab, expv[N-1:0]);
    end
    checks++;
    if (p_ab !== p_ba) begin
      failures++;
      if (failures < 10)
        $display("NOT COMMUTATIVE N=%0d a=%h b=%h p(a,b)=%h p(b,a)=%h", N, x, y, p_ab, p_ba);
    end else n_comm++;
    checks++;
    ok = (lo == 0) ? (pv == hi) : ((pv == hi) || (pv == hi + 1));
    if (!ok) begin
      failures++;
      if (failures < 10)
        $display("NOT FAITHFUL N=%0d a=%h b=%h p=%h", N, x, y, p_ab);
    end
    if (lo == 0) n_exact++;
    else if (pv == hi) n_down++;
    else n_up++;
    checks++;
    if (dl > delta_max(K) || dl < delta_min(K) || prod != dl + part(av, bv, N, K, SIGNED, 1'b1)) begin
      failures++;
      if (failures < 10) $display("DELTA OUT OF RANGE N=%0d a=%h b=%h", N, x, y);
    end
    if (dl == delta_max(K)) n_dmax++;
    if (dl == delta_min(K)) n_dmin++;
    for (int i = 0; i < ND; i++) begin
      if (digit(av, i) < 0) n_neg++;
      if (digit(av, i) == 2 || digit(av, i) == -2) n_two++;
    end
    for (int i = 0; i < K / 2; i++)
      if ((digit(av, i) > 0 && bv[K-2*i-1]) || (digit(av, i) < 0 && !bv[K-2*i-1]))
        n_comp[i]++;
  endtask

  task automatic mech(input string name, input int cnt);
    $display("  mechanism %-24s occurred %0d times", name, cnt);
    checks++;
    if (cnt == 0) begin
      failures++;
      $display("  mechanism %s never occurred", name);
    end
  endtask

  initial begin
    logic [127:0] r1, r2, p6, p9;
    checks = 0; failures = 0; done = 1'b0;
    n_neg = 0; n_two = 0; n_up = 0; n_down = 0; n_exact = 0;
    n_dmax = 0; n_dmin = 0; n_comm = 0;
    foreach (n_comp[i]) n_comp[i] = 0;
    a = '0; b = '0;
    p6 = pat(6, K);
    p9 = pat(9, K);
    if (EXHAUSTIVE) begin
      for (longint unsigned v = 0; v < (64'd1 << (2 * N)); v++)
        check(N'(v), N'(v >> N));
    end else begin
      // worst-case patterns of Table III in the K low bits
      for (int t = 0; t < 64; t++) begin
        r1 = rnd128() & ~((128'd1 << K) - 1);
        r2 = rnd128() & ~((128'd1 << K) - 1);
        check(N'(r1 | p9), N'(r2 | p6));
        check(N'(r1 | p6), N'(r2 | p6));
        check(N'(r1 | p6), N'(r2 | p9));
        check(N'(r1 | p9), N'(r2 | p9));
      end
      // corner values
      check('0, '0);
      check('1, '1);
      check({1'b1, {(N-1){1'b0}}}, {1'b1, {(N-1){1'b0}}});
      check({1'b0, {(N-1){1'b1}}}, {1'b1, {(N-1){1'b0}}});
      check({1'b0, {(N-1){1'b1}}}, {1'b0, {(N-1){1'b1}}});
      check('1, {1'b1, {(N-1){1'b0}}});
      // exact products: both low halves zero
      for (int t = 0; t < 64; t++) begin
        r1 = rnd128() & ~((128'd1 << (N / 2)) - 1);
        r2 = rnd128() & ~((128'd1 << (N / 2)) - 1);
        check(N'(r1), N'(r2));
      end
      // uniform random
      for (int unsigned t = 0; t < NVEC; t++) begin
        r1 = rnd128();
        r2 = rnd128();
        check(N'(r1), N'(r2));
      end
    end
    $display("ctb_check N=%0d SIGNED=%0d K=%0d C=%0d: %0d checks, %0d failures so far",
             N, SIGNED, K, C, checks, failures);
    mech("negative digit", n_neg);
    mech("digit +-2", n_two);
    for (int i = 0; i < K / 2; i++) mech($sformatf("compensation bit s'_%0d", i), n_comp[i]);
    mech("round up", n_up);
    mech("round down", n_down);
    mech("exact result", n_exact);
    mech("Delta at upper bound", n_dmax);
    mech("Delta at lower bound", n_dmin);
    mech("commutative pair", n_comm);
    done = 1'b1;
  end

endmodule

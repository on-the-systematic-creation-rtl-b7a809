// tb_ctb_sizes -- ctb_mult at the operand widths the paper evaluates.
// First the design-time formulas of ctb_pkg are compared with the paper's
// table of k* and the C* range for n = 8, 16, 24, 32, 53, 64. Then, each with
// a ctb_check pair (reference, commutativity, faithful rounding, mechanism
// coverage):
//   N = 8  signed, all 2^16 operand pairs;
//   N = 24, 32, 42, 64 signed (the synthesised widths and the widest
//   formally verified one) with random and worst-case vectors;
//   N = 4, 6 (all pairs) and 36, the remaining formally verified widths;
//   N = 16, 32 unsigned (the unsigned extension);
//   N = 8 (all pairs) and N = 16 with the largest admissible C* instead of
//   the smallest.
// A watchdog ends the run with a failure after 100 ms of simulated time.
module tb_ctb_sizes;
  import ctb_pkg::*;

  localparam int NT = 12;

  int   chk [NT];
  int   fl  [NT];
  logic dn  [NT];
  int   checks = 0, failures = 0;

  // one multiplier pair plus checker per configuration
  `define CTB_PAIR(IDX, NN, SG, NV, EX, CC)                                        \
    logic [NN-1:0] a_``IDX, b_``IDX, pab_``IDX, pba_``IDX;                     \
    ctb_mult #(.N(NN), .SIGNED(SG), .C(CC)) u_ab_``IDX (.a(a_``IDX), .b(b_``IDX), .p(pab_``IDX)); \
    ctb_mult #(.N(NN), .SIGNED(SG), .C(CC)) u_ba_``IDX (.a(b_``IDX), .b(a_``IDX), .p(pba_``IDX)); \
    ctb_check #(.N(NN), .SIGNED(SG), .NVEC(NV), .EXHAUSTIVE(EX), .C(CC)) u_chk_``IDX ( \
      .a(a_``IDX), .b(b_``IDX), .p_ab(pab_``IDX), .p_ba(pba_``IDX),            \
      .checks(chk[IDX]), .failures(fl[IDX]), .done(dn[IDX]));

  `CTB_PAIR(0,  8, 1'b1,     0, 1'b1, cstar_min(kstar(8)))
  `CTB_PAIR(1, 24, 1'b1, 20000, 1'b0, cstar_min(kstar(24)))
  `CTB_PAIR(2, 32, 1'b1, 20000, 1'b0, cstar_min(kstar(32)))
  `CTB_PAIR(3, 42, 1'b1, 10000, 1'b0, cstar_min(kstar(42)))
  `CTB_PAIR(4, 64, 1'b1,  5000, 1'b0, cstar_min(kstar(64)))
  `CTB_PAIR(5, 16, 1'b0, 20000, 1'b0, cstar_min(kstar(16)))
  `CTB_PAIR(6, 32, 1'b0, 10000, 1'b0, cstar_min(kstar(32)))

  // the other formally verified widths
  `CTB_PAIR(9,   4, 1'b1,     0, 1'b1, cstar_min(kstar(4)))
  `CTB_PAIR(10,  6, 1'b1,     0, 1'b1, cstar_min(kstar(6)))
  `CTB_PAIR(11, 36, 1'b1, 10000, 1'b0, cstar_min(kstar(36)))

  // the largest admissible constant must round faithfully as well
  `CTB_PAIR(7,  8, 1'b1,     0, 1'b1, cstar_max(8, kstar(8)))
  `CTB_PAIR(8, 16, 1'b1, 20000, 1'b0, cstar_max(16, kstar(16)))

  `undef CTB_PAIR

  task automatic table_row(input int n, input int k, input longint cmin, input longint cmax);
    checks += 3;
    if (kstar(n) != k) begin failures++; $display("k*(%0d) = %0d, paper %0d", n, kstar(n), k); end
    if (cstar_min(k) != cmin) begin failures++; $display("C*min(%0d) = %0d, paper %0d", n, cstar_min(k), cmin); end
    if (cstar_max(n, k) != cmax) begin failures++; $display("C*max(%0d) = %0d, paper %0d", n, cstar_max(n, k), cmax); end
  endtask

  initial begin
    table_row( 8,  4,  1,  14);
    table_row(16, 12,  4,  11);
    table_row(24, 20,  7,   7);
    table_row(32, 26, 10,  53);
    table_row(53, 46, 18, 109);
    table_row(64, 58, 23,  41);
    for (int i = 0; i < NT; i++) wait (dn[i]);
    for (int i = 0; i < NT; i++) begin
      checks   += chk[i];
      failures += fl[i];
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #100ms;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end

endmodule

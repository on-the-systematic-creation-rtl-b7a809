// tb_ctb_mult -- end-to-end test of ctb_mult at its default size (N = 16,
// signed, K = 12, C = 4). Two instances see (a, b) and (b, a); ctb_check
// compares both with the double-Booth reference, the faithful-rounding rule
// and each other, and confirms that every mechanism of the array was
// exercised. A watchdog ends the run with a failure after 10 ms of
// simulated time.
module tb_ctb_mult;

  localparam int unsigned N = 16;

  logic [N-1:0] a, b, p_ab, p_ba;
  int           checks, failures;
  logic         done;

  ctb_mult u_ab (.a(a), .b(b), .p(p_ab));
  ctb_mult u_ba (.a(b), .b(a), .p(p_ba));

  ctb_check #(.N(N), .SIGNED(1'b1), .NVEC(200000)) u_chk (
    .a(a), .b(b), .p_ab(p_ab), .p_ba(p_ba),
    .checks(checks), .failures(failures), .done(done)
  );

  initial begin
    wait (done);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #10ms;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end

endmodule

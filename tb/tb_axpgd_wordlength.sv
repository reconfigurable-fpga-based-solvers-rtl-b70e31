// tb_axpgd_wordlength -- the solver at the three fixed-point word lengths
// evaluated for the satellite controller: 28, 34 and 64 bits (16 integer
// bits each). One problem of the full MPC size (40 variables, 100
// iterations) runs on all three cores at once; each result must match the
// bit-exact model, and the total error against an unquantised
// double-precision run must not grow with the word length: the 64-bit core
// must be closer than the 28-bit core, and the 34-bit core no worse than the
// 28-bit core.
module tb_axpgd_wordlength;
  logic clk = 1'b0;
  logic go  = 1'b0;
  always #5 clk = ~clk;

  logic f28, f34, f64;
  int   c28, c34, c64, x28, x34, x64, z28, z34, z64;
  real  a28, a34, a64, t28, t34, t64;

  axpgd_wl_harness #(.W(28)) h28 (.clk, .go, .finished(f28), .checks(c28), .failures(x28),
                                  .err_arith(a28), .err_total(t28), .nnz_out(z28));
  axpgd_wl_harness #(.W(34)) h34 (.clk, .go, .finished(f34), .checks(c34), .failures(x34),
                                  .err_arith(a34), .err_total(t34), .nnz_out(z34));
  axpgd_wl_harness #(.W(64)) h64 (.clk, .go, .finished(f64), .checks(c64), .failures(x64),
                                  .err_arith(a64), .err_total(t64), .nnz_out(z64));

  int checks = 0, failures = 0;

  initial begin
    repeat (1_000_000) @(posedge clk);
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end

  initial begin
    repeat (2) @(negedge clk);
    go = 1'b1;
    wait (f28 && f34 && f64);
    checks   = c28 + c34 + c64;
    failures = x28 + x34 + x64;
    $display("W=28: max error %g (arithmetic %g), %0d non-zero", t28, a28, z28);
    $display("W=34: max error %g (arithmetic %g), %0d non-zero", t34, a34, z34);
    $display("W=64: max error %g (arithmetic %g), %0d non-zero", t64, a64, z64);
    checks++;
    if (!(t64 < t28)) begin failures++; $display("FAIL 64-bit not more accurate than 28-bit"); end
    checks++;
    if (!(t34 <= t28)) begin failures++; $display("FAIL 34-bit less accurate than 28-bit"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

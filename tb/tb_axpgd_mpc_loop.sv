// tb_axpgd_mpc_loop -- closed-loop attitude regulation at three word lengths.
//
// Runs the same illustrative satellite attitude loop (see axpgd_mpc_harness:
// 7 states, 4 actuator voltages, horizon 10, 40 samples of 0.1 s, 100 solver
// iterations per sample, warm started) on 28-, 34- and 64-bit cores side by
// side, the word lengths studied for this controller. Every solve of every
// core must match the bit-exact model. The 34- and 64-bit loops must bring
// the attitude and rate error below a fifth of its initial value and return
// sparse plans; the 28-bit loop is reported, not required to converge.
module tb_axpgd_mpc_loop;
  logic clk = 1'b0;
  always #5 clk = ~clk;

  logic f28, f34, f64;
  int   c28, c34, c64, x28, x34, x64, s28, s34, s64;
  real  b28, b34, b64, e28, e34, e64;

  axpgd_mpc_harness #(.W(28)) h28 (.clk, .finished(f28), .checks(c28), .failures(x28),
                                   .err_start(b28), .err_end(e28), .sparse_plans(s28));
  axpgd_mpc_harness #(.W(34)) h34 (.clk, .finished(f34), .checks(c34), .failures(x34),
                                   .err_start(b34), .err_end(e34), .sparse_plans(s34));
  axpgd_mpc_harness #(.W(64)) h64 (.clk, .finished(f64), .checks(c64), .failures(x64),
                                   .err_start(b64), .err_end(e64), .sparse_plans(s64));

  int checks = 0, failures = 0;

  initial begin
    repeat (20_000_000) @(posedge clk);
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end

  initial begin
    wait (f28 && f34 && f64);
    checks   = c28 + c34 + c64;
    failures = x28 + x34 + x64;
    $display("final error: W=28 %g, W=34 %g, W=64 %g (initial %g)", e28, e34, e64, b34);
    checks++;
    if (!(e34 < 0.2 * b34)) begin failures++; $display("FAIL 34-bit loop did not regulate"); end
    checks++;
    if (!(e64 < 0.2 * b64)) begin failures++; $display("FAIL 64-bit loop did not regulate"); end
    checks++;
    if (s34 == 0 || s64 == 0) begin failures++; $display("FAIL no sparse plan returned"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

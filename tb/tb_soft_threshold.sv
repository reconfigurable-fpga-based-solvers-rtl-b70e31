// tb_soft_threshold -- checks S_tau(x) on random and boundary operands.
//
// The expected value is formed from |x| and the sign of x (shrink the
// magnitude by tau, floor at zero), independently of the three-way
// comparison in the design. Covers x = +-tau, +-(tau+1), tau = 0 and the
// extremes of the 34-bit range.
module tb_soft_threshold;
  localparam int W = 34;

  logic signed [W-1:0] x, tau, y;
  logic                zeroed;

  soft_threshold #(.W(W)) dut (.x(x), .tau(tau), .y(y), .zeroed(zeroed));

  int checks = 0, failures = 0;
  logic clk = 1'b0;
  always #5 clk = ~clk;

  initial begin
    repeat (100_000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic try(longint xv, longint tv);
    longint m, e;
    bit     ez;
    x   = W'(xv);
    tau = W'(tv);
    #1;
    m  = (xv < 0) ? -xv : xv;
    ez = (m <= tv);
    e  = ez ? 0 : ((xv < 0) ? -(m - tv) : (m - tv));
    checks++;
    if (longint'(y) != e || (zeroed != (ez && m != tv))) begin
      failures++;
      $display("FAIL x=%0d tau=%0d y=%0d exp=%0d zeroed=%0b", xv, tv, y, e, zeroed);
    end
  endtask

  initial begin
    longint tv, xv;
    longint maxv = (longint'(1) << (W - 1)) - 1;
    for (int k = 0; k < 4000; k++) begin
      tv = longint'($urandom_range(0, 100000));
      case (k % 4)
        0: xv = longint'($urandom_range(0, 200000)) - 100000;
        1: xv = tv + longint'($urandom_range(0, 2)) - 1;
        2: xv = -tv + longint'($urandom_range(0, 2)) - 1;
        default: xv = ($urandom_range(0, 1) != 0) ? maxv - longint'($urandom_range(0, 5))
                                                  : -maxv + longint'($urandom_range(0, 5));
      endcase
      try(xv, tv);
    end
    try(0, 0);
    try(5, 0);
    try(-5, 0);
    try(maxv, 1000);
    try(-maxv - 1, 1000);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

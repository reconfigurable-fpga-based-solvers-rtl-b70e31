// tb_fxp_mac -- checks row dot products of the multiply-accumulate unit.
//
// Streams rows of random length (1..8 terms, signed 16-bit operands
// including the extremes), back to back and with idle cycles inside rows,
// and compares each result with a 64-bit sum computed in the testbench.
// Also checks that out_valid comes exactly two cycles after the `last` term
// and only then.
module tb_fxp_mac;
  localparam int W = 16;
  localparam int N = 8;
  localparam int ACCW = 2 * W + $clog2(N) + 1;

  logic                   clk = 1'b0, rst_n = 1'b0;
  logic                   in_valid = 1'b0, first = 1'b0, last = 1'b0;
  logic signed [W-1:0]    a = '0, b = '0;
  logic signed [ACCW-1:0] acc;
  logic                   out_valid;

  fxp_mac #(.W(W), .N(N)) dut (.*);

  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  longint cycle = 0;
  always @(posedge clk) cycle <= cycle + 1;

  initial begin
    repeat (200_000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // expected results queue: (sum, cycle of last term)
  longint exp_sum [$];
  longint exp_cyc [$];
  int     n_rows_out = 0;

  always @(negedge clk) begin
    if (rst_n && out_valid) begin
      checks++;
      if (exp_sum.size() == 0) begin
        failures++;
        $display("FAIL unexpected out_valid");
      end else begin
        longint s, c;
        s = exp_sum.pop_front();
        c = exp_cyc.pop_front();
        if (longint'(acc) != s || cycle != c + 2) begin
          failures++;
          $display("FAIL acc %0d expected %0d, at cycle %0d expected %0d", acc, s, cycle, c + 2);
        end
        n_rows_out++;
      end
    end
  end

  function automatic logic signed [W-1:0] rnd_op();
    case ($urandom_range(0, 5))
      0: return {1'b1, {(W-1){1'b0}}};
      1: return {1'b0, {(W-1){1'b1}}};
      default: return W'($urandom);
    endcase
  endfunction

  initial begin
    int len, n_rows = 300;
    longint s;
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    for (int r = 0; r < n_rows; r++) begin
      len = $urandom_range(1, N);
      s = 0;
      for (int j = 0; j < len; j++) begin
        while ($urandom_range(0, 4) == 0) begin
          @(negedge clk);
          in_valid = 1'b0;
          first = 1'($urandom); last = 1'($urandom);
          a = W'($urandom); b = W'($urandom);
        end
        @(negedge clk);
        in_valid = 1'b1;
        first = (j == 0);
        last  = (j == len - 1);
        a = rnd_op();
        b = rnd_op();
        s += longint'(a) * longint'(b);
        if (last) begin
          exp_sum.push_back(s);
          exp_cyc.push_back(cycle);
        end
      end
    end
    @(negedge clk);
    in_valid = 1'b0;
    repeat (5) @(negedge clk);
    checks++;
    if (n_rows_out != n_rows) begin
      failures++;
      $display("FAIL %0d rows out of %0d", n_rows_out, n_rows);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

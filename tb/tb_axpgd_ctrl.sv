// tb_axpgd_ctrl -- checks the sequencer's issue order, tags and timing.
//
// For several iteration counts (0, 1, 2, 3) on a 5 x 5 problem it records
// every issued term and checks: terms come in (iteration, row, column) order
// with no gap, first/last mark column 0 and N-1, the bank tag is the
// iteration parity, exactly n_iter*N*N terms are issued, `done` pulses once,
// n_iter*N*N + 4 cycles after the start cycle (1 cycle for n_iter = 0), busy
// covers the run, and res_bank equals n_iter mod 2. A start while busy must
// be ignored.
module tb_axpgd_ctrl;
  localparam int N = 5;
  localparam int IW = $clog2(N);

  logic          clk = 1'b0, rst_n = 1'b0, start = 1'b0;
  logic [15:0]   n_iter = '0;
  logic          iss_valid, iss_first, iss_last, iss_bank, busy, done, res_bank;
  logic [IW-1:0] iss_row, iss_col;

  axpgd_ctrl #(.N(N), .ITER_W(16), .PIPE_LAT(3)) dut (.*);

  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  longint cycle = 0;
  always @(posedge clk) cycle <= cycle + 1;

  initial begin
    repeat (100_000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  task automatic run(int k);
    longint t0;
    int     idx, it, r, c, n_done;
    @(negedge clk);
    n_iter = 16'(k);
    start  = 1'b1;
    t0     = cycle;
    @(negedge clk);
    start  = 1'b0;
    idx    = 0;
    n_done = 0;
    while (1) begin
      if (iss_valid) begin
        it = idx / (N * N);
        r  = (idx / N) % N;
        c  = idx % N;
        check(iss_row == IW'(r) && iss_col == IW'(c) && iss_bank == it[0] &&
              iss_first == (c == 0) && iss_last == (c == N - 1),
              $sformatf("term %0d: row %0d col %0d bank %0b first %0b last %0b", idx,
                        iss_row, iss_col, iss_bank, iss_first, iss_last));
        check(cycle == t0 + 1 + idx, $sformatf("term %0d issued at cycle %0d", idx, cycle - t0));
        idx++;
      end
      if (idx == 3 && k > 0) begin
        // a second start while busy is ignored
        start  = 1'b1;
        n_iter = 16'd9;
      end else begin
        start = 1'b0;
      end
      if (done) begin
        n_done++;
        break;
      end
      check(busy, "busy low during the run");
      @(negedge clk);
    end
    start = 1'b0;
    check(idx == k * N * N, $sformatf("%0d terms issued for %0d iterations", idx, k));
    check(cycle - t0 == ((k == 0) ? 1 : k * N * N + 4),
          $sformatf("done after %0d cycles for %0d iterations", cycle - t0, k));
    check(res_bank == 1'(k), "res_bank");
    repeat (3) begin
      @(negedge clk);
      check(!done && !busy && !iss_valid, "activity after done");
    end
  endtask

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    run(1);
    run(2);
    run(0);
    run(3);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

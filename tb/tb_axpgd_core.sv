// tb_axpgd_core -- end-to-end test of the solver core at its default size.
//
// Builds a random sparse-MPC-like problem with N = 40 variables: H symmetric
// and diagonally dominant (diagonal 2000..5000, off-diagonal within +-40, so
// all eigenvalues lie in (0, 1/s) and the iteration contracts), b with a
// third of its entries small so the l1 term zeroes them. It loads the
// problem through the host port, runs the core and compares every returned
// word bit for bit with axpgd_ref_pkg, and the cold-start answer with a
// double-precision run of the same iteration. It also checks the cycle count
// (n_iter*N*N + 4 from the start cycle to `done`) and makes each mechanism
// happen: soft-threshold zeroing, saturation with the sticky flag, results in
// the even and in the odd bank, a warm start, n_iter = 0, and a host write
// during a solve being ignored.
module tb_axpgd_core;
  import axpgd_pkg::*;
  import axpgd_ref_pkg::*;

  localparam int W    = WORD_W;
  localparam int FRAC = WORD_W - INT_BITS;
  localparam int N    = N_VAR;
  localparam int IW   = $clog2(N);
  localparam int HAW  = $clog2(N * N);

  logic                clk = 1'b0;
  logic                rst_n = 1'b0;
  logic                host_we = 1'b0;
  logic [1:0]          host_region = '0;
  logic [HAW-1:0]      host_addr = '0;
  logic signed [W-1:0] host_wdata = '0;
  logic [IW-1:0]       host_raddr = '0;
  logic signed [W-1:0] host_rdata;
  logic                start = 1'b0;
  logic [15:0]         n_iter = '0;
  logic signed [W-1:0] step_q, tau_q;
  logic                busy, done, overflow;
  logic [IW:0]         nnz;

  axpgd_core dut (.*);

  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  longint cycle = 0;
  always @(posedge clk) cycle <= cycle + 1;

  // watchdog
  initial begin
    repeat (2_000_000) @(posedge clk);
    failures++;
    $display("watchdog expired");
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

  // problem data
  real   hr [N][N];
  real   br [N];
  wide_t hq [N][N];
  wide_t bq [N];
  wide_t sq, tq;

  task automatic gen_problem();
    for (int i = 0; i < N; i++) begin
      hr[i][i] = 2000.0 + 3000.0 * ($urandom_range(0, 1000) / 1000.0);
      for (int j = i + 1; j < N; j++) begin
        hr[i][j] = -40.0 + 80.0 * ($urandom_range(0, 1000) / 1000.0);
        hr[j][i] = hr[i][j];
      end
      if (i % 3 == 0) br[i] = -1.0 + 2.0 * ($urandom_range(0, 1000) / 1000.0);
      else            br[i] = -30.0 + 60.0 * ($urandom_range(0, 1000) / 1000.0);
    end
    for (int i = 0; i < N; i++) begin
      for (int j = 0; j < N; j++) hq[i][j] = wide_t'(to_fixed(hr[i][j], FRAC));
      bq[i] = wide_t'(to_fixed(br[i], FRAC));
    end
    sq = wide_t'(to_fixed(STEP, FRAC));
    tq = wide_t'(to_fixed(SIGMA * STEP, FRAC));
  endtask

  task automatic host_write(logic [1:0] region, int addr, wide_t data);
    @(negedge clk);
    host_we     = 1'b1;
    host_region = region;
    host_addr   = HAW'(addr);
    host_wdata  = W'(data);
    @(negedge clk);
    host_we     = 1'b0;
  endtask

  task automatic load_problem(wide_t u0 [N]);
    for (int i = 0; i < N; i++)
      for (int j = 0; j < N; j++) host_write(REGION_H, i * N + j, hq[i][j]);
    for (int i = 0; i < N; i++) host_write(REGION_B, i, bq[i]);
    for (int i = 0; i < N; i++) host_write(REGION_U, i, u0[i]);
  endtask

  // returns cycles from the start cycle to the done cycle
  task automatic run(int k, output longint lat);
    longint t0;
    @(negedge clk);
    n_iter = 16'(k);
    start  = 1'b1;
    t0     = cycle;
    @(negedge clk);
    start  = 1'b0;
    while (!done) @(negedge clk);
    lat = cycle - t0;
  endtask

  task automatic read_result(output wide_t u [N]);
    for (int i = 0; i < N; i++) begin
      @(negedge clk);
      host_raddr = IW'(i);
      @(negedge clk);
      u[i] = sext(64'(host_rdata), W);
    end
  endtask

  task automatic ref_solve(int k, wide_t u0 [N], output wide_t u [N], output bit sat);
    wide_t cur [N];
    wide_t nxt [N];
    wide_t hu;
    sat = 1'b0;
    cur = u0;
    for (int it = 0; it < k; it++) begin
      for (int i = 0; i < N; i++) begin
        hu = 0;
        for (int j = 0; j < N; j++) hu = hu + hq[i][j] * cur[j];
        nxt[i] = ref_update(hu, bq[i], cur[i], sq, tq, W, FRAC, sat);
      end
      cur = nxt;
    end
    u = cur;
  endtask

  // the same iteration in double precision on the quantised data
  task automatic real_solve(int k, output real u [N]);
    real cur [N];
    real nxt [N];
    real s, t, v;
    s = real'(sq) / (2.0 ** FRAC);
    t = real'(tq) / (2.0 ** FRAC);
    for (int i = 0; i < N; i++) cur[i] = 0.0;
    for (int it = 0; it < k; it++) begin
      for (int i = 0; i < N; i++) begin
        v = 0.0;
        for (int j = 0; j < N; j++) v += (real'(hq[i][j]) / (2.0 ** FRAC)) * cur[j];
        v = cur[i] - s * (v - real'(bq[i]) / (2.0 ** FRAC));
        nxt[i] = (v > t) ? v - t : (v < -t) ? v + t : 0.0;
      end
      cur = nxt;
    end
    u = cur;
  endtask

  function automatic int count_nz(wide_t u [N]);
    int c = 0;
    for (int i = 0; i < N; i++) if (u[i] != 0) c++;
    return c;
  endfunction

  // mechanism counters
  int n_zeroing = 0, n_sat = 0, n_even = 0, n_odd = 0, n_warm = 0, n_zero_iter = 0, n_blocked = 0;

  task automatic solve_and_compare(string name, int k, wide_t u0 [N], output wide_t got [N]);
    wide_t exp_u [N];
    bit     exp_sat;
    longint lat;
    run(k, lat);
    read_result(got);
    ref_solve(k, u0, exp_u, exp_sat);
    for (int i = 0; i < N; i++)
      check(got[i] == exp_u[i], $sformatf("%s u[%0d] got %0d expected %0d", name, i, got[i], exp_u[i]));
    check(lat == longint'(k) * N * N + ((k == 0) ? 1 : 4),
          $sformatf("%s latency %0d for %0d iterations", name, lat, k));
    check(overflow == exp_sat, $sformatf("%s overflow flag %0b expected %0b", name, overflow, exp_sat));
    if (k > 0) check(int'(nnz) == count_nz(exp_u), $sformatf("%s nnz %0d expected %0d", name, nnz, count_nz(exp_u)));
    if (exp_sat && overflow) n_sat++;
    if (k > 0 && count_nz(exp_u) < N) n_zeroing++;
    if (k > 0 && k % 2 == 0) n_even++;
    if (k % 2 == 1) n_odd++;
    if (k == 0) n_zero_iter++;
    $display("%s: %0d iterations, %0d cycles, %0d of %0d non-zero, overflow %0b",
             name, k, lat, count_nz(got), N, overflow);
  endtask

  initial begin
    wide_t zero_u [N];
    wide_t big_u  [N];
    wide_t u1 [N];
    wide_t u2 [N];
    wide_t u3 [N];
    wide_t u4 [N];
    real   ur [N];
    real   err, maxerr;
    longint lat;

    step_q = '0;
    tau_q  = '0;
    gen_problem();
    step_q = W'(sq);
    tau_q  = W'(tq);
    for (int i = 0; i < N; i++) begin
      zero_u[i] = 0;
      big_u[i]  = wide_t'(to_fixed(100.0, FRAC));
    end
    repeat (3) @(negedge clk);
    rst_n = 1'b1;

    // 1. cold start, full solve
    load_problem(zero_u);
    solve_and_compare("cold", 100, zero_u, u1);
    real_solve(100, ur);
    maxerr = 0.0;
    for (int i = 0; i < N; i++) begin
      err = real'(u1[i]) / (2.0 ** FRAC) - ur[i];
      if (err < 0) err = -err;
      if (err > maxerr) maxerr = err;
    end
    $display("cold: max |fixed - double| = %g (LSB %g)", maxerr, 1.0 / (2.0 ** FRAC));
    check(maxerr < 32.0 / (2.0 ** FRAC), $sformatf("fixed-point result off double by %g", maxerr));

    // 2. warm start from the previous answer, odd iteration count
    for (int i = 0; i < N; i++) host_write(REGION_U, i, u1[i]);
    solve_and_compare("warm", 7, u1, u2);
    n_warm++;

    // 3. zero iterations returns the warm start
    for (int i = 0; i < N; i++) host_write(REGION_U, i, u2[i]);
    solve_and_compare("zero", 0, u2, u3);

    // 4. saturation: a large warm start drives H u out of range
    for (int i = 0; i < N; i++) host_write(REGION_U, i, big_u[i]);
    solve_and_compare("sat", 3, big_u, u4);

    // 5. a host write to H during a solve must be ignored
    for (int i = 0; i < N; i++) host_write(REGION_U, i, zero_u[i]);
    begin
      wide_t exp_u [N];
      bit exp_sat;
      @(negedge clk);
      n_iter = 16'd4;
      start  = 1'b1;
      @(negedge clk);
      start  = 1'b0;
      repeat (10) @(negedge clk);
      host_we = 1'b1; host_region = REGION_H; host_addr = '0; host_wdata = '1;
      @(negedge clk);
      host_we = 1'b0;
      while (!done) @(negedge clk);
      read_result(u4);
      ref_solve(4, zero_u, exp_u, exp_sat);
      for (int i = 0; i < N; i++)
        check(u4[i] == exp_u[i], $sformatf("blocked-write u[%0d] got %0d expected %0d", i, u4[i], exp_u[i]));
      if (u4 == exp_u) n_blocked++;
      // and the same run again confirms H[0][0] was not changed
      for (int i = 0; i < N; i++) host_write(REGION_U, i, zero_u[i]);
      run(4, lat);
      read_result(u4);
      check(u4 == exp_u, "H changed by a write during a solve");
    end

    $display("mechanisms: zeroing=%0d saturation=%0d even_bank=%0d odd_bank=%0d warm=%0d zero_iter=%0d blocked_write=%0d",
             n_zeroing, n_sat, n_even, n_odd, n_warm, n_zero_iter, n_blocked);
    check(n_zeroing > 0, "threshold zeroing never happened");
    check(n_sat > 0, "saturation never happened");
    check(n_even > 0, "even-bank result never happened");
    check(n_odd > 0, "odd-bank result never happened");
    check(n_warm > 0, "warm start never happened");
    check(n_zero_iter > 0, "zero-iteration solve never happened");
    check(n_blocked > 0, "blocked host write never happened");

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule

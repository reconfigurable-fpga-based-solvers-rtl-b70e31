// axpgd_wl_harness -- one solver core at word length W with its checker.
//
// Used by tb_axpgd_wordlength to run the same problem at several word
// lengths. The problem comes from a fixed linear congruential sequence, so
// every instance sees the same real-valued H and b whatever W is; they are
// then quantised to W bits with W-16 fraction bits. On `go` the harness
// loads the core, runs K cold-start iterations, compares every word with
// the bit-exact model and reports two errors: against the same iteration in
// double precision on the quantised data (arithmetic error only) and
// against the iteration in double precision on the unquantised data with the
// exact s = 0.0002 and sigma = 1.5 (total error of the word length).
module axpgd_wl_harness #(
  parameter int W = 34,
  parameter int K = 100
) (
  input  logic clk,
  input  logic go,
  output logic finished,
  output int   checks,
  output int   failures,
  output real  err_arith,
  output real  err_total,
  output int   nnz_out
);
  import axpgd_pkg::*;
  import axpgd_ref_pkg::*;

  localparam int FRAC = W - INT_BITS;
  localparam int N    = N_VAR;
  localparam int IW   = $clog2(N);
  localparam int HAW  = $clog2(N * N);

  logic                rst_n = 1'b0;
  logic                host_we = 1'b0;
  logic [1:0]          host_region = '0;
  logic [HAW-1:0]      host_addr = '0;
  logic signed [W-1:0] host_wdata = '0;
  logic [IW-1:0]       host_raddr = '0;
  logic signed [W-1:0] host_rdata;
  logic                start = 1'b0;
  logic [15:0]         n_iter = '0;
  logic signed [W-1:0] step_q = '0, tau_q = '0;
  logic                busy, done, overflow;
  logic [IW:0]         nnz;

  axpgd_core #(.W(W), .FRAC(FRAC), .N(N)) dut (.*);

  real   hr [N][N];
  real   br [N];
  wide_t hq [N][N];
  wide_t bq [N];
  wide_t sq, tq;
  int unsigned lcg = 32'd12345;

  function automatic real next_unit();
    lcg = lcg * 32'd1103515245 + 32'd12345;
    return real'(lcg >> 8) / 16777216.0;
  endfunction

  task automatic gen_problem();
    for (int i = 0; i < N; i++) begin
      hr[i][i] = 2000.0 + 3000.0 * next_unit();
      for (int j = i + 1; j < N; j++) begin
        hr[i][j] = -40.0 + 80.0 * next_unit();
        hr[j][i] = hr[i][j];
      end
      br[i] = (i % 3 == 0) ? -1.0 + 2.0 * next_unit() : -30.0 + 60.0 * next_unit();
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
    host_we = 1'b1; host_region = region; host_addr = HAW'(addr); host_wdata = W'(data);
    @(negedge clk);
    host_we = 1'b0;
  endtask

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL (W=%0d): %s", W, what);
    end
  endtask

  initial begin
    wide_t cur [N];
    wide_t nxt [N];
    wide_t got [N];
    wide_t hu;
    real   rq [N];
    real   ri [N];
    real   rqn [N];
    real   rin [N];
    real   v, w, s, t, e;
    bit    sat;
    int    t0, lat;

    finished  = 1'b0;
    checks    = 0;
    failures  = 0;
    err_arith = 0.0;
    err_total = 0.0;
    nnz_out   = 0;
    gen_problem();
    step_q = W'(sq);
    tau_q  = W'(tq);
    wait (go);
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    for (int i = 0; i < N; i++)
      for (int j = 0; j < N; j++) host_write(REGION_H, i * N + j, hq[i][j]);
    for (int i = 0; i < N; i++) host_write(REGION_B, i, bq[i]);
    for (int i = 0; i < N; i++) host_write(REGION_U, i, 0);

    @(negedge clk);
    n_iter = 16'(K);
    start  = 1'b1;
    @(negedge clk);
    start  = 1'b0;
    lat    = 1;
    while (!done) begin
      @(negedge clk);
      lat++;
    end
    check(lat == K * N * N + 4, $sformatf("latency %0d", lat));
    for (int i = 0; i < N; i++) begin
      @(negedge clk);
      host_raddr = IW'(i);
      @(negedge clk);
      got[i] = sext(64'(host_rdata), W);
    end

    // bit-exact model and the two double-precision runs
    s = real'(sq) / (2.0 ** FRAC);
    t = real'(tq) / (2.0 ** FRAC);
    sat = 1'b0;
    for (int i = 0; i < N; i++) begin
      cur[i] = 0;
      rq[i]  = 0.0;
      ri[i]  = 0.0;
    end
    for (int it = 0; it < K; it++) begin
      for (int i = 0; i < N; i++) begin
        hu = 0;
        v  = 0.0;
        w  = 0.0;
        for (int j = 0; j < N; j++) begin
          hu = hu + hq[i][j] * cur[j];
          v += (real'(hq[i][j]) / (2.0 ** FRAC)) * rq[j];
          w += hr[i][j] * ri[j];
        end
        nxt[i] = ref_update(hu, bq[i], cur[i], sq, tq, W, FRAC, sat);
        v = rq[i] - s * (v - real'(bq[i]) / (2.0 ** FRAC));
        rqn[i] = (v > t) ? v - t : (v < -t) ? v + t : 0.0;
        w = ri[i] - STEP * (w - br[i]);
        rin[i] = (w > SIGMA * STEP) ? w - SIGMA * STEP : (w < -SIGMA * STEP) ? w + SIGMA * STEP : 0.0;
      end
      cur = nxt;
      rq  = rqn;
      ri  = rin;
    end
    for (int i = 0; i < N; i++) begin
      check(got[i] == cur[i], $sformatf("u[%0d] got %0d expected %0d", i, got[i], cur[i]));
      e = real'(got[i]) / (2.0 ** FRAC) - rq[i];
      if (e < 0) e = -e;
      if (e > err_arith) err_arith = e;
      e = real'(got[i]) / (2.0 ** FRAC) - ri[i];
      if (e < 0) e = -e;
      if (e > err_total) err_total = e;
    end
    check(overflow == sat, "overflow flag");
    nnz_out = int'(nnz);
    finished = 1'b1;
  end

endmodule

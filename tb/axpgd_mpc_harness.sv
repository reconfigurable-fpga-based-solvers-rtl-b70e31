// axpgd_mpc_harness -- one solver core of word length W closing an
// attitude-control loop, with its checker; used by tb_axpgd_mpc_loop.
//
// Plant (an illustrative model, not a published one): seven states
// x = [roll, pitch, yaw, w1, w2, w3, w_w] and four inputs
// [tau_1, tau_2, tau_3, tau_w]. Each body axis is a double integrator driven
// by its thruster voltage; the wheel voltage spins the wheel and its reaction
// torque acts on the yaw rate. Discretised exactly with h = 0.1 s.
// Every state is an output (C = I), Q = q*I, horizon N_p = N_c = 10, so
// u has 40 entries. The harness builds Phi and F, H = Phi'QPhi (q is
// chosen so that the largest eigenvalue of H, found by power iteration, is
// 5000, inside the convergence range of s = 0.0002) and loads H once. At
// each of SAMPLES samples it forms b = -Phi'Q F x, loads b and the previous
// solution shifted by one move as warm start, runs K iterations, checks the
// answer bit for bit against the reference model, and applies the first
// move to the plant in double precision. It reports the final attitude and
// rate error and how many plans were sparse.
module axpgd_mpc_harness #(
  parameter int W       = 34,
  parameter int K       = 100,
  parameter int SAMPLES = 40
) (
  input  logic clk,
  output logic finished,
  output int   checks,
  output int   failures,
  output real  err_start,
  output real  err_end,
  output int   sparse_plans
);
  import axpgd_pkg::*;
  import axpgd_ref_pkg::*;

  localparam int FRAC = W - INT_BITS;
  localparam int N    = N_VAR;          // 40
  localparam int NX   = N_STATES;       // 7
  localparam int NU   = N_INPUTS;       // 4
  localparam int NP   = HORIZON;        // 10
  localparam int NY   = NX * NP;        // 70 predicted outputs
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

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL (W=%0d): %s", W, what);
    end
  endtask

  real ad [NX][NX];
  real bd [NX][NU];
  real phi [NY][N];
  real fm [NY][NX];
  real hr [N][N];
  wide_t hq [N][N];
  wide_t bq [N];
  wide_t sq, tq;
  real qw;

  task automatic build_model();
    real h, kt, kw, kr;
    real apow [NX][NX];
    real tmp [NX][NX];
    real ab [NX][NU];
    h  = 0.1;
    kt = 0.2;     // body angular acceleration per thruster volt
    kw = 0.5;     // wheel acceleration per wheel volt
    kr = 0.05;    // yaw reaction per wheel volt
    for (int i = 0; i < NX; i++) begin
      for (int j = 0; j < NX; j++) ad[i][j] = (i == j) ? 1.0 : 0.0;
      for (int j = 0; j < NU; j++) bd[i][j] = 0.0;
    end
    for (int a = 0; a < 3; a++) begin
      ad[a][3 + a] = h;
      bd[a][a]     = 0.5 * h * h * kt;
      bd[3 + a][a] = h * kt;
    end
    bd[6][3] = h * kw;
    bd[5][3] = -h * kr;
    bd[2][3] = -0.5 * h * h * kr;
    // Phi: block (i, j) = A^(i-j) B for the output at step i+1 and move j <= i
    for (int r = 0; r < NY; r++) for (int c = 0; c < N; c++) phi[r][c] = 0.0;
    for (int i = 0; i < NX; i++) for (int j = 0; j < NX; j++) apow[i][j] = (i == j) ? 1.0 : 0.0;
    for (int d = 0; d < NP; d++) begin
      // ab = A^d B
      for (int i = 0; i < NX; i++)
        for (int j = 0; j < NU; j++) begin
          ab[i][j] = 0.0;
          for (int l = 0; l < NX; l++) ab[i][j] += apow[i][l] * bd[l][j];
        end
      for (int i = d; i < NP; i++)
        for (int r = 0; r < NX; r++)
          for (int c = 0; c < NU; c++) phi[i * NX + r][(i - d) * NU + c] = ab[r][c];
      // apow = A^(d+1); F block d = A^(d+1)
      for (int i = 0; i < NX; i++)
        for (int j = 0; j < NX; j++) begin
          tmp[i][j] = 0.0;
          for (int l = 0; l < NX; l++) tmp[i][j] += apow[i][l] * ad[l][j];
        end
      apow = tmp;
      for (int i = 0; i < NX; i++) for (int j = 0; j < NX; j++) fm[d * NX + i][j] = apow[i][j];
    end
    // Phi' Phi, then scale so that lambda_max = 5000
    for (int i = 0; i < N; i++)
      for (int j = 0; j < N; j++) begin
        hr[i][j] = 0.0;
        for (int r = 0; r < NY; r++) hr[i][j] += phi[r][i] * phi[r][j];
      end
    begin
      real v [N];
      real w [N];
      real nrm, lam;
      for (int i = 0; i < N; i++) v[i] = 1.0 + 0.01 * i;
      lam = 0.0;
      for (int it = 0; it < 300; it++) begin
        nrm = 0.0;
        for (int i = 0; i < N; i++) begin
          w[i] = 0.0;
          for (int j = 0; j < N; j++) w[i] += hr[i][j] * v[j];
          nrm += w[i] * w[i];
        end
        nrm = $sqrt(nrm);
        lam = nrm;
        for (int i = 0; i < N; i++) v[i] = w[i] / nrm;
      end
      qw = 5000.0 / lam;
    end
    for (int i = 0; i < N; i++)
      for (int j = 0; j < N; j++) begin
        hr[i][j] = qw * hr[i][j];
        hq[i][j] = wide_t'(to_fixed(hr[i][j], FRAC));
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

  initial begin
    real   x [NX];
    real   fx;
    real   err0, err;
    wide_t warm [N];
    wide_t cur [N];
    wide_t nxt [N];
    wide_t got [N];
    wide_t hu;
    bit    sat;
    int    n_sparse, n_applied_zero, n_sat;

    finished     = 1'b0;
    checks       = 0;
    failures     = 0;
    sparse_plans = 0;
    n_sparse       = 0;
    n_applied_zero = 0;
    n_sat          = 0;
    build_model();
    step_q = W'(sq);
    tau_q  = W'(tq);
    x = '{0.3, -0.2, 0.25, 0.0, 0.1, -0.1, 0.0};
    err0 = 0.0;
    for (int i = 0; i < 6; i++) err0 += x[i] * x[i];
    err0 = $sqrt(err0);
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    for (int i = 0; i < N; i++)
      for (int j = 0; j < N; j++) host_write(REGION_H, i * N + j, hq[i][j]);
    for (int i = 0; i < N; i++) warm[i] = 0;

    for (int smp = 0; smp < SAMPLES; smp++) begin
      // b = -Phi' Q F x  (reference R_s = 0)
      for (int c = 0; c < N; c++) begin
        real acc_b;
        acc_b = 0.0;
        for (int r = 0; r < NY; r++) begin
          fx = 0.0;
          for (int l = 0; l < NX; l++) fx += fm[r][l] * x[l];
          acc_b += phi[r][c] * fx;
        end
        bq[c] = wide_t'(to_fixed(-qw * acc_b, FRAC));
        host_write(REGION_B, c, bq[c]);
      end
      for (int i = 0; i < N; i++) host_write(REGION_U, i, warm[i]);
      @(negedge clk);
      n_iter = 16'(K);
      start  = 1'b1;
      @(negedge clk);
      start  = 1'b0;
      while (!done) @(negedge clk);
      for (int i = 0; i < N; i++) begin
        @(negedge clk);
        host_raddr = IW'(i);
        @(negedge clk);
        got[i] = sext(64'(host_rdata), W);
      end
      // reference
      sat = 1'b0;
      cur = warm;
      for (int it = 0; it < K; it++) begin
        for (int i = 0; i < N; i++) begin
          hu = 0;
          for (int j = 0; j < N; j++) hu = hu + hq[i][j] * cur[j];
          nxt[i] = ref_update(hu, bq[i], cur[i], sq, tq, W, FRAC, sat);
        end
        cur = nxt;
      end
      for (int i = 0; i < N; i++)
        check(got[i] == cur[i], $sformatf("sample %0d u[%0d] got %0d expected %0d", smp, i, got[i], cur[i]));
      check(overflow == sat, $sformatf("sample %0d overflow flag", smp));
      if (sat) n_sat++;
      if (int'(nnz) < N) n_sparse++;
      // apply the first move
      begin
        real u0 [NU];
        real xn [NX];
        for (int j = 0; j < NU; j++) begin
          u0[j] = real'(got[j]) / (2.0 ** FRAC);
          if (got[j] == 0) n_applied_zero++;
        end
        for (int i = 0; i < NX; i++) begin
          xn[i] = 0.0;
          for (int l = 0; l < NX; l++) xn[i] += ad[i][l] * x[l];
          for (int j = 0; j < NU; j++) xn[i] += bd[i][j] * u0[j];
        end
        x = xn;
        if (smp % 10 == 9) $display("W=%0d sample %2d: u0 = [%8.4f %8.4f %8.4f %8.4f]  roll %7.4f pitch %7.4f yaw %7.4f  nnz %0d",
                 W, smp, u0[0], u0[1], u0[2], u0[3], x[0], x[1], x[2], nnz);
      end
      // warm start: shift the plan by one move, repeat the last move
      for (int i = 0; i < N; i++) warm[i] = (i + NU < N) ? got[i + NU] : got[i];
    end

    err = 0.0;
    for (int i = 0; i < 6; i++) err += x[i] * x[i];
    err_start    = err0;
    err_end      = $sqrt(err);
    sparse_plans = n_sparse;
    $display("W=%0d: error %g -> %g; sparse plans %0d of %0d, saturated solves %0d",
             W, err0, err_end, n_sparse, SAMPLES, n_sat);
    finished = 1'b1;
  end
endmodule

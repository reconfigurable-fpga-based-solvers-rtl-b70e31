// axpgd_core -- fixed-point sparse-MPC solver core (AxPGD), top level.
//
// The core solves the unconstrained sparse MPC problem
//     min_u  sigma*||u||_1 + 0.5*(Phi u + F x - R_s)' Q (Phi u + F x - R_s)
// for the stacked control sequence u (N = 4 inputs x 10 horizon samples = 40
// values) by running the approximate proximal-gradient iteration
//     u <- S_tau( u - s*(H u - b) ),  H = Phi' Q Phi,  b = -Phi' Q (F x - R_s),
//     s = 0.0002, tau = sigma*s (sigma = 1.5),
// in W-bit fixed point. The word length W is a synthesis parameter: it is the
// knob that trades accuracy against fabric power (28, 34 and 64 bits were
// studied; 34 is the default here).
//
// Use: while the core is idle the host writes H (region 0, address i*N+j),
// b (region 1, address i) and a warm start u0 (region 2, address i) through
// the load port, sets step_q = s and tau_q = sigma*s in the same fixed-point
// format, and pulses `start` with `n_iter`. `busy` stays high during the
// solve; `done` pulses when the result is ready, n_iter*N*N + 4 cycles after
// the start cycle. The host then reads u through host_raddr/host_rdata (one
// cycle of read latency); the first N_INPUTS words are the control move to
// apply. `overflow` is a sticky flag, cleared at start, set when any
// gradient or update value saturated during the solve. `nnz` counts the
// non-zero coordinates of the last iterate written (the support of the
// sparse control sequence); with n_iter = 0 it keeps its previous value.
// The two status outputs are this design's additions.
//
// Datapath (one Hessian term per cycle):
//   cycle 0  axpgd_ctrl issues (i, j): read H[i][j], u_k[j] and b[i]
//   cycle 1  RAM data out; the MAC takes H[i][j]*u_k[j]; u_k[i] is picked
//            out of the stream when j == i and held with b[i] at the row end
//   cycle 2  product register -> accumulator
//   cycle 3  accumulator holds (H u_k)_i; prox_update forms the new u_i,
//            written into the other iterate bank at the end of the cycle
// The schedule, the single multiplier and the host port are this design's
// own choices; the solver equation, the constants and the word lengths are
// the source's. Only the l1 (soft-threshold) variant of the unconstrained
// problem is built, as in the reported experiment.
module axpgd_core #(
  parameter int unsigned W      = axpgd_pkg::WORD_W,
  parameter int unsigned FRAC   = W - axpgd_pkg::INT_BITS,
  parameter int unsigned N      = axpgd_pkg::N_VAR,
  parameter int unsigned ITER_W = 16,
  localparam int unsigned IW    = (N > 1) ? $clog2(N) : 1,
  localparam int unsigned HAW   = $clog2(N * N),
  localparam int unsigned ACCW  = 2 * W + $clog2(N) + 1
) (
  input  logic                 clk,
  input  logic                 rst_n,
  // host load port (use while idle)
  input  logic                 host_we,
  input  logic [1:0]           host_region,   // axpgd_pkg::region_e
  input  logic [HAW-1:0]       host_addr,
  input  logic signed [W-1:0]  host_wdata,
  // host result read port (use while idle), data one cycle after address
  input  logic [IW-1:0]        host_raddr,
  output logic signed [W-1:0]  host_rdata,
  // run control
  input  logic                 start,
  input  logic [ITER_W-1:0]    n_iter,
  input  logic signed [W-1:0]  step_q,
  input  logic signed [W-1:0]  tau_q,
  output logic                 busy,
  output logic                 done,
  output logic                 overflow,
  output logic [IW:0]          nnz
);

  import axpgd_pkg::*;

  localparam int unsigned PIPE_LAT = 3;

  // ---------------------------------------------------------------- control
  logic          iss_valid, iss_first, iss_last, iss_bank;
  logic [IW-1:0] iss_row, iss_col;
  logic          res_bank;

  axpgd_ctrl #(.N(N), .ITER_W(ITER_W), .PIPE_LAT(PIPE_LAT)) u_ctrl (
    .clk      (clk),
    .rst_n    (rst_n),
    .start    (start),
    .n_iter   (n_iter),
    .iss_valid(iss_valid),
    .iss_row  (iss_row),
    .iss_col  (iss_col),
    .iss_first(iss_first),
    .iss_last (iss_last),
    .iss_bank (iss_bank),
    .busy     (busy),
    .done     (done),
    .res_bank (res_bank)
  );

  // ---------------------------------------------------------------- memories
  logic          h_we, b_we, u_host_we;
  logic [W-1:0]  h_rdata, b_rdata, u_rdata;
  logic [HAW-1:0] h_raddr;

  always_comb begin
    h_we      = host_we && !busy && (host_region == REGION_H);
    b_we      = host_we && !busy && (host_region == REGION_B);
    u_host_we = host_we && !busy && (host_region == REGION_U);
    h_raddr   = HAW'(iss_row) * HAW'(N) + HAW'(iss_col);
  end

  fxp_ram #(.WIDTH(W), .DEPTH(N * N)) u_hmem (
    .clk  (clk),
    .we   (h_we),
    .waddr(host_addr),
    .wdata(host_wdata),
    .raddr(h_raddr),
    .rdata(h_rdata)
  );

  fxp_ram #(.WIDTH(W), .DEPTH(N)) u_bmem (
    .clk  (clk),
    .we   (b_we),
    .waddr(IW'(host_addr)),
    .wdata(host_wdata),
    .raddr(iss_row),
    .rdata(b_rdata)
  );

  // iterate buffer: the sequencer owns it while busy, the host otherwise
  logic          ub_rd_bank, ub_we, ub_wr_bank;
  logic [IW-1:0] ub_raddr, ub_waddr;
  logic [W-1:0]  ub_wdata;

  // row write-back (stage 3)
  logic                wb_valid;
  logic [IW-1:0]       wb_row;
  logic                wb_bank;
  logic signed [W-1:0] wb_data;

  always_comb begin
    if (busy) begin
      ub_rd_bank = iss_bank;
      ub_raddr   = iss_col;
    end else begin
      ub_rd_bank = res_bank;
      ub_raddr   = host_raddr;
    end
    if (wb_valid) begin
      ub_we      = 1'b1;
      ub_wr_bank = wb_bank;
      ub_waddr   = wb_row;
      ub_wdata   = wb_data;
    end else begin
      ub_we      = u_host_we;
      ub_wr_bank = 1'b0;
      ub_waddr   = IW'(host_addr);
      ub_wdata   = host_wdata;
    end
  end

  axpgd_ubuf #(.W(W), .N(N)) u_ubuf (
    .clk    (clk),
    .rd_bank(ub_rd_bank),
    .raddr  (ub_raddr),
    .rdata  (u_rdata),
    .we     (ub_we),
    .wr_bank(ub_wr_bank),
    .waddr  (ub_waddr),
    .wdata  (ub_wdata)
  );

  assign host_rdata = u_rdata;

  // ---------------------------------------------------------------- stage 1
  logic          s1_valid, s1_first, s1_last, s1_bank, s1_diag;
  logic [IW-1:0] s1_row;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      s1_valid <= 1'b0;
      s1_first <= 1'b0;
      s1_last  <= 1'b0;
      s1_bank  <= 1'b0;
      s1_diag  <= 1'b0;
      s1_row   <= '0;
    end else begin
      s1_valid <= iss_valid;
      s1_first <= iss_first;
      s1_last  <= iss_last;
      s1_bank  <= iss_bank;
      s1_diag  <= (iss_col == iss_row);
      s1_row   <= iss_row;
    end
  end

  // pick u_k[i] out of the operand stream and hold it with b[i]
  logic signed [W-1:0] ui_run, ui_hold, bi_hold;
  logic [IW-1:0]       row_hold;
  logic                bank_hold;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      ui_run    <= '0;
      ui_hold   <= '0;
      bi_hold   <= '0;
      row_hold  <= '0;
      bank_hold <= 1'b0;
    end else if (s1_valid) begin
      if (s1_diag) ui_run <= u_rdata;
      if (s1_last) begin
        ui_hold   <= s1_diag ? u_rdata : ui_run;
        bi_hold   <= b_rdata;
        row_hold  <= s1_row;
        bank_hold <= s1_bank;
      end
    end
  end

  // ---------------------------------------------------------------- stage 2-3
  logic signed [ACCW-1:0] acc;
  logic                   acc_valid;

  fxp_mac #(.W(W), .N(N)) u_mac (
    .clk      (clk),
    .rst_n    (rst_n),
    .in_valid (s1_valid),
    .first    (s1_first),
    .last     (s1_last),
    .a        (h_rdata),
    .b        (u_rdata),
    .acc      (acc),
    .out_valid(acc_valid)
  );

  logic upd_sat, upd_zeroed;

  prox_update #(.W(W), .FRAC(FRAC), .N(N)) u_upd (
    .acc   (acc),
    .b_i   (bi_hold),
    .u_i   (ui_hold),
    .step  (step_q),
    .tau   (tau_q),
    .u_next(wb_data),
    .sat   (upd_sat),
    .zeroed(upd_zeroed)
  );

  always_comb begin
    wb_valid = acc_valid;
    wb_row   = row_hold;
    wb_bank  = ~bank_hold;
  end

  // sticky saturation flag
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)                    overflow <= 1'b0;
    else if (start && !busy)       overflow <= 1'b0;
    else if (wb_valid && upd_sat)  overflow <= 1'b1;
  end

  // number of non-zero coordinates written in the latest iteration; after
  // `done` it is the support size of the returned control sequence
  logic [IW:0] nnz_run;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      nnz_run <= '0;
      nnz     <= '0;
    end else if (wb_valid) begin
      if (wb_row == IW'(N - 1)) begin
        nnz     <= nnz_run + (IW+1)'(!upd_zeroed && wb_data != '0);
        nnz_run <= '0;
      end else begin
        nnz_run <= nnz_run + (IW+1)'(!upd_zeroed && wb_data != '0);
      end
    end
  end

endmodule

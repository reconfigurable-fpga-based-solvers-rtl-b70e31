// prox_update -- one coordinate of the approximate proximal-gradient step.
//
// Given the row product (H u)_i from the multiply-accumulate unit, the linear
// term b_i and the old coordinate u_i, it computes
//     g      = (H u)_i - b_i            gradient of the quadratic MPC cost
//     v      = u_i - s * g              gradient step, s = 1/lambda_u
//     u_next = S_tau(v),  tau = sigma*s soft threshold (l1 proximal step)
// which is the AxPGD update with the gradient of the tracking cost
// 0.5*(Phi u + F x - R_s)' Q (Phi u + F x - R_s) written as H u - b.
//
// Number format: every W-bit word has FRAC fraction bits; `acc` carries
// 2*FRAC fraction bits and the guard bits of fxp_mac. Products are reduced
// by an arithmetic right shift (truncation toward minus infinity), and g and
// v saturate to the W-bit range, raising `sat`. The source leaves rounding
// and overflow handling open ("approximation error associated with FPGA
// arbitrary precision"); truncation and saturation are this design's
// choices. `zeroed` reports that the threshold set the coordinate to zero.
// The block is combinational; the core registers its result into the
// iterate buffer.
module prox_update #(
  parameter int unsigned W     = axpgd_pkg::WORD_W,
  parameter int unsigned FRAC  = axpgd_pkg::WORD_W - axpgd_pkg::INT_BITS,
  parameter int unsigned N     = axpgd_pkg::N_VAR,
  localparam int unsigned ACCW = 2 * W + $clog2(N) + 1
) (
  input  logic signed [ACCW-1:0] acc,
  input  logic signed [W-1:0]    b_i,
  input  logic signed [W-1:0]    u_i,
  input  logic signed [W-1:0]    step,
  input  logic signed [W-1:0]    tau,
  output logic signed [W-1:0]    u_next,
  output logic                   sat,
  output logic                   zeroed
);

  localparam logic signed [W-1:0] WMAX = {1'b0, {(W-1){1'b1}}};
  localparam logic signed [W-1:0] WMIN = {1'b1, {(W-1){1'b0}}};

  logic signed [ACCW:0]   g_wide;
  logic signed [W-1:0]    g;
  logic signed [2*W-1:0]  sg_full;
  logic signed [2*W:0]    v_wide;
  logic signed [W-1:0]    v;
  logic                   g_sat, v_sat;

  always_comb begin
    // gradient, back to FRAC fraction bits
    g_wide = (ACCW+1)'(acc >>> FRAC) - (ACCW+1)'(b_i);
    g_sat  = 1'b1;
    if (g_wide > (ACCW+1)'(WMAX))      g = WMAX;
    else if (g_wide < (ACCW+1)'(WMIN)) g = WMIN;
    else begin
      g     = W'(g_wide);
      g_sat = 1'b0;
    end

    // gradient step
    sg_full = step * g;
    v_wide  = (2*W+1)'(u_i) - (2*W+1)'(sg_full >>> FRAC);
    v_sat   = 1'b1;
    if (v_wide > (2*W+1)'(WMAX))      v = WMAX;
    else if (v_wide < (2*W+1)'(WMIN)) v = WMIN;
    else begin
      v     = W'(v_wide);
      v_sat = 1'b0;
    end

    sat = g_sat | v_sat;
  end

  soft_threshold #(.W(W)) u_thr (
    .x     (v),
    .tau   (tau),
    .y     (u_next),
    .zeroed(zeroed)
  );

endmodule

// fxp_mac -- streaming fixed-point multiply-accumulate for one matrix row.
//
// Forms acc = sum_j a_j * b_j for one row of the Hessian-times-iterate
// product H u, which is the gradient of the quadratic MPC cost. One term
// enters per cycle; `first` marks the first term of a row and `last` the
// final one. Two pipeline stages: the product is registered, then added into
// the accumulator (or loaded into it on `first`). `out_valid` pulses for one
// cycle, two cycles after the `last` term entered, with `acc` holding the
// finished sum; `acc` then stays put until the next row's first term reaches
// it. The product keeps all 2*W bits and the accumulator has
// clog2(N)+1 guard bits, so a row of N terms cannot overflow. A single
// multiplier (one term per cycle) is this design's own choice; the source
// only fixes what is computed.
module fxp_mac #(
  parameter int unsigned W     = axpgd_pkg::WORD_W,
  parameter int unsigned N     = axpgd_pkg::N_VAR,
  localparam int unsigned ACCW = 2 * W + $clog2(N) + 1
) (
  input  logic                   clk,
  input  logic                   rst_n,
  input  logic                   in_valid,
  input  logic                   first,
  input  logic                   last,
  input  logic signed [W-1:0]    a,
  input  logic signed [W-1:0]    b,
  output logic signed [ACCW-1:0] acc,
  output logic                   out_valid
);

  logic signed [2*W-1:0] prod_q;
  logic                  p_valid, p_first, p_last;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      p_valid   <= 1'b0;
      p_first   <= 1'b0;
      p_last    <= 1'b0;
      prod_q    <= '0;
      acc       <= '0;
      out_valid <= 1'b0;
    end else begin
      p_valid   <= in_valid;
      p_first   <= in_valid & first;
      p_last    <= in_valid & last;
      if (in_valid) prod_q <= a * b;
      out_valid <= p_valid & p_last;
      if (p_valid) begin
        if (p_first) acc <= ACCW'(prod_q);
        else         acc <= acc + ACCW'(prod_q);
      end
    end
  end

endmodule

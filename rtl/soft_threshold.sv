// soft_threshold -- elementwise soft-thresholding operator S_tau(x).
//
// This is the proximal operator of tau*|x|, the step that makes the solver's
// control sequence sparse:
//     S_tau(x) = x - tau   if x >=  tau
//              = x + tau   if x <= -tau
//              = 0         otherwise
// The three cases are those of the l1 proximal step of the AxPGD iteration.
// The block is purely combinational and works on W-bit two's-complement
// fixed-point words; tau must be non-negative, in which case neither branch
// can overflow. `zeroed` is high when x falls inside the dead zone and the
// output is forced to zero. Having no register is this design's choice.
module soft_threshold #(
  parameter int unsigned W = axpgd_pkg::WORD_W
) (
  input  logic signed [W-1:0] x,
  input  logic signed [W-1:0] tau,
  output logic signed [W-1:0] y,
  output logic                zeroed
);

  always_comb begin
    zeroed = 1'b0;
    if (x >= tau) begin
      y = x - tau;
    end else if (x <= -tau) begin
      y = x + tau;
    end else begin
      y      = '0;
      zeroed = 1'b1;
    end
  end

endmodule

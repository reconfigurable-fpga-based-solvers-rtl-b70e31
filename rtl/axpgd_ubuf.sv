// axpgd_ubuf -- ping-pong buffer for the solver iterate u.
//
// The AxPGD update computes every coordinate of u^{k+1} from the complete
// old vector u^k, so the old vector must stay intact while the new one is
// written. The buffer holds two banks of N words in one RAM of 2N words
// (address {bank, index}). The controller reads u^k from bank `rd_bank` and
// writes u^{k+1} into bank `wr_bank`; swapping the roles every iteration
// costs no copy. Reads are synchronous (data one cycle after the address),
// writes take effect at the clock edge. The two-bank scheme is this design's
// own choice; the source gives only the update equation.
module axpgd_ubuf #(
  parameter int unsigned W     = axpgd_pkg::WORD_W,
  parameter int unsigned N     = axpgd_pkg::N_VAR,
  localparam int unsigned IW   = (N > 1) ? $clog2(N) : 1
) (
  input  logic          clk,
  // read port
  input  logic          rd_bank,
  input  logic [IW-1:0] raddr,
  output logic [W-1:0]  rdata,
  // write port
  input  logic          we,
  input  logic          wr_bank,
  input  logic [IW-1:0] waddr,
  input  logic [W-1:0]  wdata
);

  // Bank b, index i lives at address b*N + i.
  localparam int unsigned AW = $clog2(2 * N);

  logic [AW-1:0] ra, wa;

  always_comb begin
    ra = rd_bank ? AW'(N) + AW'(raddr) : AW'(raddr);
    wa = wr_bank ? AW'(N) + AW'(waddr) : AW'(waddr);
  end

  fxp_ram #(.WIDTH(W), .DEPTH(2 * N)) u_mem (
    .clk  (clk),
    .we   (we),
    .waddr(wa),
    .wdata(wdata),
    .raddr(ra),
    .rdata(rdata)
  );

endmodule

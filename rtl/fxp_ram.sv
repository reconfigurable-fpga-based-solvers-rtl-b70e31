// fxp_ram -- simple dual-port RAM with one write and one synchronous read port.
//
// Holds the solver's problem data: instantiated once for the N x N Hessian
// H = Phi' Q Phi (row-major, address i*N + j) and once for the length-N
// linear term b. A write takes effect at the clock edge; a read returns the
// word at `raddr` one cycle after the address is presented (registered
// output, as an FPGA block RAM). Reading and writing the same address in the
// same cycle returns the old word. The contents are not reset: the host loads
// them before a solve. Storing the full matrix rather than one triangle is
// this design's choice.
module fxp_ram #(
  parameter int unsigned WIDTH = axpgd_pkg::WORD_W,
  parameter int unsigned DEPTH = axpgd_pkg::N_VAR * axpgd_pkg::N_VAR,
  localparam int unsigned AW   = (DEPTH > 1) ? $clog2(DEPTH) : 1
) (
  input  logic             clk,
  input  logic             we,
  input  logic [AW-1:0]    waddr,
  input  logic [WIDTH-1:0] wdata,
  input  logic [AW-1:0]    raddr,
  output logic [WIDTH-1:0] rdata
);

  logic [WIDTH-1:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (we) mem[waddr] <= wdata;
    rdata <= mem[raddr];
  end

endmodule

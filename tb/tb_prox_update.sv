// tb_prox_update -- checks one coordinate update u_next = S_tau(u - s(acc/2^F - b)).
//
// Operands are random at the default 34-bit word with 18 fraction bits:
// ordinary MPC-sized values, values that drive the gradient or the updated
// value out of range (saturation, also with u near full scale), and values that land in the threshold
// dead zone. The expected word, saturation flag and zero flag come from the
// bit-exact model in axpgd_ref_pkg (floor division, explicit clipping).
module tb_prox_update;
  import axpgd_ref_pkg::*;

  localparam int W    = 34;
  localparam int FRAC = 18;
  localparam int N    = 40;
  localparam int ACCW = 2 * W + $clog2(N) + 1;

  logic signed [ACCW-1:0] acc;
  logic signed [W-1:0]    b_i, u_i, step, tau, u_next;
  logic                   sat, zeroed;

  prox_update #(.W(W), .FRAC(FRAC), .N(N)) dut (.*);

  int checks = 0, failures = 0;
  int n_sat = 0, n_zero = 0, n_plain = 0;
  logic clk = 1'b0;
  always #5 clk = ~clk;

  initial begin
    repeat (200_000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic wide_t rnd_range(longint lo, longint hi);
    longint span = hi - lo + 1;
    longint r = longint'({$urandom, $urandom} & 64'h7fff_ffff_ffff_ffff);
    return wide_t'(lo + (r % span));
  endfunction

  initial begin
    wide_t a, bv, uv, sv, tv, e;
    bit    es;
    for (int k = 0; k < 6000; k++) begin
      sv = rnd_range(1, 200);
      tv = rnd_range(0, 200);
      case (k % 4)
        0: begin  // ordinary: H u up to ~1e5 in 2F format
          a  = rnd_range(-(longint'(1) << 50), longint'(1) << 50);
          bv = rnd_range(-(longint'(1) << 24), longint'(1) << 24);
          uv = rnd_range(-(longint'(1) << 16), longint'(1) << 16);
        end
        1: begin  // huge product: gradient saturates
          a  = rnd_range(-(longint'(1) << 62), longint'(1) << 62) * 8;
          bv = rnd_range(-(longint'(1) << 30), longint'(1) << 30);
          uv = rnd_range(-(longint'(1) << 32), longint'(1) << 32);
        end
        3: begin  // u near full scale and a unit step: the update saturates
          sv = rnd_range(1 << 17, 1 << 19);
          uv = ($urandom_range(0, 1) != 0) ? rnd_range((longint'(1) << 33) - 100000, (longint'(1) << 33) - 1)
                                            : rnd_range(-(longint'(1) << 33), -(longint'(1) << 33) + 100000);
          a  = -uv * rnd_range(1 << 18, 1 << 20) * (longint'(1) << 18);
          bv = rnd_range(-1000, 1000);
        end
        default: begin  // small: lands near the dead zone
          a  = rnd_range(-(longint'(1) << 28), longint'(1) << 28);
          bv = rnd_range(-2000, 2000);
          uv = rnd_range(-300, 300);
        end
      endcase
      acc = ACCW'(a);
      b_i = W'(bv); u_i = W'(uv); step = W'(sv); tau = W'(tv);
      #1;
      es = 1'b0;
      e  = ref_update(a, bv, uv, sv, tv, W, FRAC, es);
      checks++;
      if (wide_t'(u_next) != e || sat != es) begin
        failures++;
        $display("FAIL acc=%0d b=%0d u=%0d s=%0d tau=%0d: got %0d sat %0b, expected %0d sat %0b",
                 a, bv, uv, sv, tv, u_next, sat, e, es);
      end
      if (es) n_sat++;
      else if (e == 0) n_zero++;
      else n_plain++;
      #1;
    end
    $display("cases: saturated %0d, zeroed %0d, plain %0d", n_sat, n_zero, n_plain);
    checks++;
    if (n_sat == 0 || n_zero == 0 || n_plain == 0) begin
      failures++;
      $display("FAIL a case class was never exercised");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

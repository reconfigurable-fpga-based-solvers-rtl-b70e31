// axpgd_pkg -- constants and helper functions shared by the AxPGD solver core.
//
// The solver runs the approximate proximal-gradient iteration
//     u <- S_tau( u - s * (H u - b) ),   tau = sigma * s
// in two's-complement fixed point with a configurable word length. The
// problem sizes below are those of the satellite attitude MPC the core was
// built for: four actuator inputs (three thruster voltages and one reaction
// wheel voltage), seven plant states and a control horizon of ten samples,
// giving 40 decision variables. The step s = 0.0002 and weight sigma = 1.5
// are the values used in that experiment; the 34-bit word is the
// configuration reported as the best power/stability trade-off. The split
// of the word into 16 integer bits (sign included) and W-16 fraction bits is
// this design's own choice: the Hessian entries of the MPC problem reach a
// few thousand, so they need that many integer bits.
package axpgd_pkg;

  // Problem dimensions of the satellite MPC.
  parameter int unsigned N_INPUTS = 4;   // tau_1, tau_2, tau_3, tau_w
  parameter int unsigned N_STATES = 7;   // roll, pitch, yaw, w1, w2, w3, w_w
  parameter int unsigned HORIZON  = 10;  // control horizon N_c in samples
  parameter int unsigned N_VAR    = N_INPUTS * HORIZON;

  // Number format.
  parameter int unsigned WORD_W   = 34;  // total word length W
  parameter int unsigned INT_BITS = 16;  // integer bits including sign

  // Algorithm constants of the experiment.
  parameter real STEP  = 0.0002;         // s = 1/lambda_u
  parameter real SIGMA = 1.5;            // l1 weight

  // Host address regions of the core.
  typedef enum logic [1:0] {
    REGION_H = 2'd0,                     // Hessian H = Phi' Q Phi, row major
    REGION_B = 2'd1,                     // linear term b = -Phi' Q (F x - R_s)
    REGION_U = 2'd2                      // initial iterate (warm start)
  } region_e;

  // Real value to fixed point with `frac` fraction bits, rounded to nearest.
  // (A real-to-integer cast rounds to nearest, ties away from zero.)
  function automatic longint to_fixed(real v, int unsigned frac);
    return longint'(v * (2.0 ** frac));
  endfunction

endpackage

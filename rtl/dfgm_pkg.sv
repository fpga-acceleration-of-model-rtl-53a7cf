// dfgm_pkg -- types and constants shared by the dual fast gradient (dFGM) QP
// solver. All arithmetic in the solver is IEEE-754 single precision; a value
// travels as a raw 32-bit word (fp32_t). The package also holds the helper
// functions for the sign/magnitude tests used by the projection step and the
// target codes of the host load port. The word format follows the paper
// (single precision); the load-port encoding is this design's own choice.
package dfgm_pkg;

  typedef logic [31:0] fp32_t;

  localparam fp32_t FP32_ZERO = 32'h0000_0000;
  localparam fp32_t FP32_INF  = 32'h7F80_0000;

  // Targets of the host load port of the solver.
  typedef enum logic [2:0] {
    LD_MZ   = 3'd0,  // primal map M_z (NZ x NC)
    LD_A    = 3'd1,  // constraint matrix A (NC x NZ)
    LD_Q    = 3'd2,  // primal offset q (NZ)
    LD_B    = 3'd3,  // constraint bound b (NC)
    LD_BETA = 3'd4,  // momentum coefficient per iteration (N_ITER)
    LD_STEP = 3'd5   // dual gradient step 1/L (scalar)
  } ld_sel_e;

  // Projection onto the non-negative orthant: max(x, 0). Negative values and
  // negative zero give +0.
  function automatic fp32_t fp32_max0(fp32_t x);
    return x[31] ? FP32_ZERO : x;
  endfunction

endpackage

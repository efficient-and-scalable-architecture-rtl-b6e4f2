// sb_pkg: number formats, configuration types and the fixed-point helpers
// shared by the simulated-bifurcation (SB) chip.
//
// Positions x and momenta p are 16-bit signed fixed point with XF = 12
// fractional bits (range about +-8). A coupling J_ij is one bit: 1 means +1,
// 0 means -1. The interaction sum sum_j J_ij*x_j is kept in ACCW-bit signed
// accumulators in the same scale as x. The SB coefficients are 16-bit signed
// with CF = 14 fractional bits (range about +-2).
// The 16-bit x/p and the 1-bit J follow the paper; the fraction widths, the
// accumulator width and the coefficient format are this design's choice.
//
// Lint note: a module that imports the package but uses only some of its
// constants makes verilator report UNUSEDPARAM for the others; expected.
package sb_pkg;

  localparam int unsigned XW   = 16;  // x, p width
  localparam int unsigned XF   = 12;  // x, p fractional bits
  localparam int unsigned ACCW = 32;  // interaction-sum accumulator width
  localparam int unsigned CW   = 16;  // coefficient width
  localparam int unsigned CF   = 14;  // coefficient fractional bits
  localparam int unsigned CHW  = 8;   // width of chip-id / chip-count fields
  localparam int unsigned STW  = 16;  // width of the SB step count

  typedef logic signed [XW-1:0]   xval_t;
  typedef logic signed [ACCW-1:0] acc_t;
  typedef logic signed [CW-1:0]   coef_t;

  // Per-run SB coefficients, written by the host before start.
  //   c0     = dt * gamma0, scales the interaction sum into a momentum kick
  //   alpha0 = detuning alpha_0
  //   dalpha = increment of alpha(t) per SB step
  //   beta0  = Kerr coefficient beta_0
  //   dt     = sub-step time delta_t
  typedef struct packed {
    coef_t c0;
    coef_t alpha0;
    coef_t dalpha;
    coef_t beta0;
    coef_t dt;
  } sb_coef_t;

  // Saturate a wide signed value to the 16-bit x/p range.
  function automatic xval_t sat_x(input logic signed [63:0] v);
    if (v > 64'sd32767)       return xval_t'(16'sh7fff);
    else if (v < -64'sd32768) return xval_t'(16'sh8000);
    else                      return xval_t'(v[XW-1:0]);
  endfunction

endpackage

// kura_pkg: types, constants and the sine-table generator shared by the
// SA-Kura drift accelerator.
//
// Number formats (all two's complement):
//   phase_t : Q1.15 phase, theta/pi, so [-1,1) covers [-pi,pi).  Integer
//             wrap-around of this format is exactly the 2*pi wrap of a phase.
//   q15_t   : Q1.15 sine/cosine sample or scalar coefficient.
//   acc_t   : 32-bit accumulator / neighbourhood core (Q16.15 after the
//             combine step).
// The 5x5 neighbourhood (M = 5), the 16-bit phase and the 32-bit accumulation
// follow the paper.  The Q formats of coefficients are this design's choice.
package kura_pkg;

  localparam int M        = 5;          // neighbourhood edge
  localparam int HALO     = M - 1;      // extra rows/columns of the halo field
  localparam int SWEEP    = M * M;      // offsets visited per tile
  localparam int CENTER_S = (M * M) / 2; // sweep index of offset (0,0)
  localparam int LUT_N    = 4096;       // quarter-wave sine samples
  localparam int NOISE_W  = 18;         // stochastic sample, Q3.15

  typedef logic signed [15:0] phase_t;
  typedef logic signed [15:0] q15_t;
  typedef logic signed [31:0] acc_t;
  typedef logic signed [NOISE_W-1:0] noise_t;

  // One transformed sample travelling through the buffers and the array.
  typedef struct packed {
    q15_t s;   // sin(theta)
    q15_t c;   // cos(theta)
  } sc_t;

  // What one PE hands to the drain chain after the combine step.
  typedef struct packed {
    acc_t core;     // unscaled neighbourhood core cos_i*S - sin_i*C  (drain_H)
    sc_t  center;   // captured centre components                    (drain_T)
  } drain_t;

  // sin(k * (pi/2) / LUT_N) rounded to Q1.15 (saturated at 32767).
  // Evaluated at elaboration only: Taylor series in Q30 integer arithmetic.
  function automatic logic [14:0] sin_q15(input int k);
    longint x, x2, term, sum, r;
    // round(pi/2 * 2^30)
    x    = (64'sd1686629713 * longint'(k)) / longint'(LUT_N);
    x2   = (x * x) >>> 30;
    term = x;
    sum  = x;
    for (int n = 1; n <= 9; n++) begin
      term = -((term * x2) >>> 30) / longint'((2 * n) * (2 * n + 1));
      sum  = sum + term;
    end
    r = (sum + 64'sd16384) >>> 15;
    if (r > 32767) r = 32767;
    if (r < 0) r = 0;
    return 15'(r);
  endfunction

endpackage

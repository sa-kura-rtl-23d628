// sincos_unit: converts one Q1.15 phase into sin(theta) and cos(theta).
//
// This is the "Sinusoidal Cal Unit" of the Streamer.  Following the paper it
// uses a quarter-wave table over [0, pi/2] holding 4096 sine samples, linear
// interpolation on the 2 phase bits below the table index, and quadrant
// decoding to cover the full circle.
//
// Phase bits, with p the 16-bit phase read as unsigned (p/65536 of a turn):
//   p[15:14] quadrant, p[13:2] table index, p[1:0] interpolation fraction.
// With f = p[13:0] and Q(g) = L[g>>2] + ((L[(g>>2)+1] - L[g>>2]) * g[1:0]) >>> 2,
// where L[k] = round(32768 * sin(k*pi/8192)) and L[4096] = 32767 (1.0 saturated):
//   quadrant 0:  sin =  Q(f)        cos =  Q(16384-f)
//   quadrant 1:  sin =  Q(16384-f)  cos = -Q(f)
//   quadrant 2:  sin = -Q(f)        cos = -Q(16384-f)
//   quadrant 3:  sin = -Q(16384-f)  cos =  Q(f)
// The table itself lives in sin_lut, shared by all units of the Streamer
// (the paper's shared LUT); this unit presents the two indices
// f>>2 and (16384-f)>>2 and receives the table pairs back.  The point at
// pi/2 and the handling of 1.0 are this design's choices.
//
// Purely combinational: the result is valid in the cycle the phase is.
module sincos_unit
  import kura_pkg::*;
(
  input  phase_t      theta_i,
  output logic [12:0] idx_a_o,    // table index for Q(f)
  output logic [12:0] idx_b_o,    // table index for Q(16384 - f)
  input  logic [14:0] a_lo_i,     // L[idx_a], L[idx_a + 1]
  input  logic [14:0] a_hi_i,
  input  logic [14:0] b_lo_i,     // L[idx_b], L[idx_b + 1]
  input  logic [14:0] b_hi_i,
  output sc_t         sc_o
);

  // Q(g) from the table pair around g>>2 and the fraction g[1:0]
  function automatic logic signed [16:0] interp(input logic [1:0]  fr,
                                                 input logic [14:0] lo,
                                                 input logic [14:0] hi);
    logic signed [16:0] d;
    d = $signed({2'b00, hi}) - $signed({2'b00, lo});
    return $signed({2'b00, lo}) + ((d * $signed({15'd0, fr})) >>> 2);
  endfunction

  logic [1:0]  quad;
  logic [13:0] f;
  logic [14:0] g_a, g_b;          // f and 16384 - f
  logic signed [16:0] qa, qb;     // Q(f), Q(16384 - f)

  always_comb begin
    quad    = theta_i[15:14];
    f       = theta_i[13:0];
    g_a     = {1'b0, f};
    g_b     = 15'd16384 - {1'b0, f};
    idx_a_o = g_a[14:2];
    idx_b_o = g_b[14:2];
    qa      = interp(g_a[1:0], a_lo_i, a_hi_i);
    qb      = interp(g_b[1:0], b_lo_i, b_hi_i);
    unique case (quad)
      2'd0:    begin sc_o.s = q15_t'( qa); sc_o.c = q15_t'( qb); end
      2'd1:    begin sc_o.s = q15_t'( qb); sc_o.c = q15_t'(-qa); end
      2'd2:    begin sc_o.s = q15_t'(-qa); sc_o.c = q15_t'(-qb); end
      default: begin sc_o.s = q15_t'(-qb); sc_o.c = q15_t'( qa); end
    endcase
  end

endmodule

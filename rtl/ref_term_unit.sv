// ref_term_unit: reference-attraction term of the drift, one lane per array
// row.
//
// ref = (kref_sin * cos(theta_i) - kref_cos * sin(theta_i)) >>> 15
//     = K_ref * sin(psi_ref - theta_i)   (scaled as the coefficients are)
// kref_sin = K_ref*sin(psi_ref) and kref_cos = K_ref*cos(psi_ref) are Q1.15
// per-step configuration values shared by all pixels, as in the paper; the
// centre components come from the PE array's drain (drain_T), so this path
// needs no memory access.  Output is Q16.15 in 32 bits (arithmetic shift,
// rounding toward minus infinity).  Combinational; the Theta Update Unit
// registers the sum.
module ref_term_unit
  import kura_pkg::*;
#(
  parameter int LANES = 20
) (
  input  q15_t              kref_sin_i,
  input  q15_t              kref_cos_i,
  input  sc_t  [LANES-1:0]  center_i,
  output acc_t [LANES-1:0]  ref_o
);

  for (genvar l = 0; l < LANES; l++) begin : g_lane
    logic signed [32:0] ks, kc, cs, ss, p;
    assign ks       = 33'(kref_sin_i);
    assign kc       = 33'(kref_cos_i);
    assign cs       = 33'(center_i[l].c);
    assign ss       = 33'(center_i[l].s);
    assign p        = ks * cs - kc * ss;
    assign ref_o[l] = acc_t'(p >>> 15);
  end

endmodule

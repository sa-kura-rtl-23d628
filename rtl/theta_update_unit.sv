// theta_update_unit: forms the drift-side update of each drained pixel.
//
//   nbr   = (k_nbr * core) >>> 15          neighbourhood term
//   noise = (sigma * z)    >>> 15          stochastic term
//   drift = nbr + ref + noise              (Q16.15, 32 bit)
// core is the PE's unscaled neighbourhood core, ref comes from the Ref Term
// Unit and z from the Random Number Generator.  k_nbr carries the paper's
// global factor K(t)/|N_i| (|N_i| = 25) together with the step size and the
// 1/pi of the phase format; sigma carries sqrt(2 D_t dt)/pi.  Both are Q1.15
// per-step configuration values computed by the host: folding dt and 1/pi
// into them is this design's choice, the paper only says that the scalar
// scaling is applied here, once, outside the PE array.
// One register stage: valid_o/drift_o follow valid_i by one cycle.
module theta_update_unit
  import kura_pkg::*;
#(
  parameter int LANES = 20
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic                  valid_i,
  input  q15_t                  k_nbr_i,
  input  q15_t                  sigma_i,
  input  acc_t   [LANES-1:0]    core_i,
  input  acc_t   [LANES-1:0]    ref_i,
  input  noise_t [LANES-1:0]    z_i,
  output logic                  valid_o,
  output acc_t   [LANES-1:0]    drift_o
);

  for (genvar l = 0; l < LANES; l++) begin : g_lane
    logic signed [47:0] kx, cx, pn;
    logic signed [33:0] sx, zx, pz;
    acc_t nbr, noise, sum;
    assign kx    = 48'(k_nbr_i);
    assign cx    = 48'(core_i[l]);
    assign sx    = 34'(sigma_i);
    assign zx    = 34'(z_i[l]);
    assign pn    = kx * cx;
    assign pz    = sx * zx;
    assign nbr   = acc_t'(pn >>> 15);
    assign noise = acc_t'(pz >>> 15);
    assign sum   = nbr + ref_i[l] + noise;
    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n)       drift_o[l] <= '0;
      else if (valid_i) drift_o[l] <= sum;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) valid_o <= 1'b0;
    else        valid_o <= valid_i;
  end

endmodule

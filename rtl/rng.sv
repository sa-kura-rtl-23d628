// rng: random number generator for the stochastic term, one lane per array
// row.
//
// Each lane is a 32-bit xorshift generator (x ^= x<<13; x ^= x>>17;
// x ^= x<<5).  Its sample is the sum of three signed 10-bit fields of the
// state, each read as a uniform value in [-1, 1): an Irwin-Hall
// approximation of a unit-variance Gaussian, returned in Q3.15 (18 bit).
// seed_load sets lane l to seed ^ (0x9E3779B9 * (l+1)) (a zero state is
// replaced by 1); next advances every lane by one step.  The sample is a
// function of the current state, so it is available without latency.
// The paper names this unit but does not describe it: generator, sample
// distribution and seeding are this design's choices.
module rng
  import kura_pkg::*;
#(
  parameter int LANES = 20
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic                  seed_load_i,
  input  logic [31:0]           seed_i,
  input  logic                  next_i,
  output noise_t [LANES-1:0]    z_o
);

  function automatic logic [31:0] xorshift(input logic [31:0] x);
    logic [31:0] y;
    y = x ^ (x << 13);
    y = y ^ (y >> 17);
    y = y ^ (y << 5);
    return y;
  endfunction

  for (genvar l = 0; l < LANES; l++) begin : g_lane
    logic [31:0] st, seeded;
    logic signed [11:0] sum;
    assign seeded = seed_i ^ (32'h9E37_79B9 * 32'(l + 1));
    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n)           st <= 32'(l + 1);
      else if (seed_load_i) st <= (seeded == 32'd0) ? 32'd1 : seeded;
      else if (next_i)      st <= xorshift(st);
    end
    assign sum    = 12'($signed(st[9:0])) + 12'($signed(st[19:10])) + 12'($signed(st[29:20]));
    assign z_o[l] = noise_t'(sum) <<< 6;
  end

endmodule

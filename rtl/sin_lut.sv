// sin_lut: the quarter-wave sine table shared by the Streamer's sinusoidal
// units.
//
// L[k] = round(32768 * sin(k * (pi/2) / 4096)) for k = 0..4095, saturated to
// 32767, as unsigned 15-bit values; the paper's quarter-wave LUT holds 4096
// samples over [0, pi/2].  Index 4096 (the point at pi/2 itself) reads as
// 32767 without a table entry.  Each of the NPORT read ports returns the pair
// L[i], L[i+1] needed for linear interpolation.  Combinational read.
// The contents are computed by kura_pkg::sin_q15 in an initial block, the
// usual way to describe a ROM's contents: synthesis turns the array into a
// read-only memory holding these values (no table file is needed).
module sin_lut
  import kura_pkg::*;
#(
  parameter int NPORT = 2
) (
  input  logic [NPORT-1:0][12:0] idx_i,
  output logic [NPORT-1:0][14:0] lo_o,
  output logic [NPORT-1:0][14:0] hi_o
);

  logic [14:0] rom [LUT_N];
  initial begin
    for (int k = 0; k < LUT_N; k++) rom[k] = sin_q15(k);
  end

  function automatic logic [14:0] tab(input logic [12:0] i);
    return (i >= 13'(LUT_N)) ? 15'd32767 : rom[i[11:0]];
  endfunction

  for (genvar p = 0; p < NPORT; p++) begin : g_port
    assign lo_o[p] = tab(idx_i[p]);
    assign hi_o[p] = tab(idx_i[p] + 13'd1);
  end

endmodule

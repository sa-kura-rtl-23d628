`timescale 1ns/1ps
// tb_sincos_unit: exhaustive check of the sine/cosine unit, with its shared
// table, over all 65536 phases.  The expected values are rebuilt here from $sin (table of rounded
// quarter-wave samples, same interpolation rule) and must match exactly; the
// result is also compared with the ideal sin/cos within 3 LSB.
module tb_sincos_unit;
  import kura_pkg::*;

  phase_t th;
  sc_t    sc;
  int     checks = 0, failures = 0;

  logic [1:0][12:0] idx;
  logic [1:0][14:0] lo, hi;
  sin_lut #(.NPORT(2)) u_lut (.idx_i(idx), .lo_o(lo), .hi_o(hi));
  sincos_unit dut (.theta_i(th), .idx_a_o(idx[0]), .idx_b_o(idx[1]),
                   .a_lo_i(lo[0]), .a_hi_i(hi[0]), .b_lo_i(lo[1]), .b_hi_i(hi[1]), .sc_o(sc));

  int lut [LUT_N+1];

  function automatic int q(int g);
    int i, fr;
    i  = g >> 2;
    fr = g & 3;
    return lut[i] + (((lut[i+1] - lut[i]) * fr) >>> 2);
  endfunction

  initial begin
    int qa, qb, es, ec, p;
    real a, ds, dc;
    for (int k = 0; k < LUT_N; k++) begin
      lut[k] = int'($floor(32768.0 * $sin(k * 3.14159265358979323846 / 8192.0) + 0.5));
      if (lut[k] > 32767) lut[k] = 32767;
    end
    lut[LUT_N] = 32767;
    for (p = 0; p < 65536; p++) begin
      th = phase_t'(p);
      #1;
      qa = q(p & 16383);
      qb = q(16384 - (p & 16383));
      case (p >> 14)
        0: begin es =  qa; ec =  qb; end
        1: begin es =  qb; ec = -qa; end
        2: begin es = -qa; ec = -qb; end
        default: begin es = -qb; ec =  qa; end
      endcase
      checks++;
      if (int'(sc.s) != es || int'(sc.c) != ec) begin
        failures++;
        if (failures < 10) $display("MISMATCH p=%0d sin=%0d/%0d cos=%0d/%0d", p, int'(sc.s), es, int'(sc.c), ec);
      end
      a  = real'(th) * 3.14159265358979323846 / 32768.0;
      ds = real'(sc.s) - 32768.0 * $sin(a);
      dc = real'(sc.c) - 32768.0 * $cos(a);
      checks++;
      if (ds > 3.0 || ds < -3.0 || dc > 3.0 || dc < -3.0) begin
        failures++;
        if (failures < 10) $display("ACCURACY p=%0d ds=%f dc=%f", p, ds, dc);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

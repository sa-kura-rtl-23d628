`timescale 1ns/1ps
// tb_theta_update_unit: random cores, reference terms, noise samples and
// coefficients; checks drift = (k*core>>>15) + ref + (sigma*z>>>15) and the
// one-cycle latency of valid and data, and that data holds without valid.
module tb_theta_update_unit;
  import kura_pkg::*;
  localparam int L = 3;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic vi = 0, vo;
  q15_t k = 0, sg = 0;
  acc_t [L-1:0] core = '0, rf = '0, drift;
  noise_t [L-1:0] z = '0;
  longint exp_d [L];
  int checks = 0, failures = 0;

  theta_update_unit #(.LANES(L)) dut (.clk, .rst_n, .valid_i(vi), .k_nbr_i(k), .sigma_i(sg),
    .core_i(core), .ref_i(rf), .z_i(z), .valid_o(vo), .drift_o(drift));

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int it = 0; it < 2000; it++) begin
      @(negedge clk);
      vi = ($urandom_range(3) != 0);
      k = q15_t'($urandom); sg = q15_t'($urandom);
      for (int l = 0; l < L; l++) begin
        core[l] = acc_t'($signed(20'($urandom)));
        rf[l]   = acc_t'($signed(17'($urandom)));
        z[l]    = noise_t'($urandom);
        if (vi) exp_d[l] = ((longint'(k) * longint'(core[l])) >>> 15) + longint'(rf[l])
                         + ((longint'(sg) * longint'(z[l])) >>> 15);
      end
      @(posedge clk); #1;
      checks++;
      if (vo != vi) failures++;
      for (int l = 0; l < L; l++) begin
        checks++;
        if (longint'(drift[l]) != exp_d[l]) begin
          failures++;
          if (failures < 5) $display("lane %0d got %0d expected %0d", l, drift[l], exp_d[l]);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

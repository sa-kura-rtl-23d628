`timescale 1ns/1ps
// tb_ref_term_unit: random coefficients and centre components; the expected
// value K_ref*(sin(psi)cos(theta) - cos(psi)sin(theta)) is computed here in
// 64-bit integers with the same Q1.15 scaling.
module tb_ref_term_unit;
  import kura_pkg::*;
  localparam int L = 3;
  q15_t ks, kc;
  sc_t  [L-1:0] ctr;
  acc_t [L-1:0] rf;
  int checks = 0, failures = 0;
  ref_term_unit #(.LANES(L)) dut (.kref_sin_i(ks), .kref_cos_i(kc), .center_i(ctr), .ref_o(rf));
  initial begin
    for (int it = 0; it < 3000; it++) begin
      ks = q15_t'($urandom); kc = q15_t'($urandom);
      if (it < 4) begin ks = (it[0]) ? -16'sd32768 : 16'sd32767; kc = (it[1]) ? -16'sd32768 : 16'sd32767; end
      for (int l = 0; l < L; l++) ctr[l] = sc_t'($urandom);
      #1;
      for (int l = 0; l < L; l++) begin
        longint e;
        e = (longint'(ks) * longint'(ctr[l].c) - longint'(kc) * longint'(ctr[l].s)) >>> 15;
        checks++;
        if (longint'(rf[l]) != e) begin
          failures++;
          if (failures < 5) $display("lane %0d got %0d expected %0d", l, rf[l], e);
        end
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

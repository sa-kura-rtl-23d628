`timescale 1ns/1ps
// tb_rng: checks the generator against an independent xorshift model (seed
// mixing, zero-seed rule, hold without next) and the statistics of the
// samples: mean near 0 and variance near 1 (in units of 2^15).
module tb_rng;
  import kura_pkg::*;
  localparam int L = 4;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic seed_load = 0, nxt = 0;
  logic [31:0] seed = 0;
  noise_t [L-1:0] z;
  logic [31:0] st [L];
  int checks = 0, failures = 0;
  real sum = 0, sum2 = 0;
  int n = 0;

  rng #(.LANES(L)) dut (.clk, .rst_n, .seed_load_i(seed_load), .seed_i(seed), .next_i(nxt), .z_o(z));

  function automatic logic [31:0] xs(logic [31:0] x);
    x = x ^ (x << 13); x = x ^ (x >> 17); x = x ^ (x << 5);
    return x;
  endfunction
  function automatic int zval(logic [31:0] s);
    return (int'($signed(s[9:0])) + int'($signed(s[19:10])) + int'($signed(s[29:20]))) * 64;
  endfunction

  task automatic load(logic [31:0] sd);
    @(negedge clk);
    seed = sd; seed_load = 1;
    for (int l = 0; l < L; l++) begin
      st[l] = sd ^ (32'h9E37_79B9 * 32'(l + 1));
      if (st[l] == 0) st[l] = 1;
    end
    @(negedge clk);
    seed_load = 0;
  endtask

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1;
    load(32'h9E37_79B9);       // makes lane 0's state zero -> replaced by 1
    load(32'hDEAD_BEEF);
    for (int it = 0; it < 20000; it++) begin
      @(negedge clk);
      for (int l = 0; l < L; l++) begin
        checks++;
        if (int'(z[l]) != zval(st[l])) begin
          failures++;
          if (failures < 5) $display("lane %0d it %0d got %0d expected %0d", l, it, z[l], zval(st[l]));
        end
        sum  += real'(z[l]) / 32768.0;
        sum2 += (real'(z[l]) / 32768.0) ** 2;
        n++;
      end
      nxt = ($urandom_range(3) != 0);
      if (nxt) for (int l = 0; l < L; l++) st[l] = xs(st[l]);
      @(posedge clk); #1;
      nxt = 0;
    end
    checks++;
    if (sum / n > 0.05 || sum / n < -0.05) begin failures++; $display("mean %f", sum / n); end
    checks++;
    if (sum2 / n > 1.1 || sum2 / n < 0.9) begin failures++; $display("variance %f", sum2 / n); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

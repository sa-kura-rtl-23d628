`timescale 1ns/1ps
// tb_sa_kura_configs: the 96 x 96 workload on other array shapes than the
// default 20 x 5.  The published evaluation sweeps N_h and N_w over
// {5, 10, 15, 20, 25}; this bench runs three corners of that sweep in
// parallel, each through sa_kura_config_run (one sampling step with noise,
// every pixel compared with the reference model, tile period checked):
//   * 5 x 5   - smallest array; a bank must hold 20 x 96 = 1920 words, so
//               the memory depth is raised to 2048 for this shape.
//   * 10 x 10 - square array, 1024-word banks; array-bound, 36 cycles per tile.
//   * 25 x 25 - largest array: 51 cycles per tile, except in the first row
//               of tiles, where the Streamer still reads each column in two
//               cycles and the period is 2 * 29 = 58 (checked explicitly).
module tb_sa_kura_configs;
  localparam int WATCHDOG = 400000;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic d0, d1, d2;
  int   c0, c1, c2, f0, f1, f2;

  sa_kura_config_run #(.NH(5),  .NW(5),  .DEPTH(2048)) u_h5w5   (.clk, .rst_n, .done_o(d0), .checks_o(c0), .failures_o(f0));
  sa_kura_config_run #(.NH(10), .NW(10), .DEPTH(1024)) u_h10w10 (.clk, .rst_n, .done_o(d1), .checks_o(c1), .failures_o(f1));
  sa_kura_config_run #(.NH(25), .NW(25), .DEPTH(1024)) u_h25w25 (.clk, .rst_n, .done_o(d2), .checks_o(c2), .failures_o(f2));

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1;
    wait (d0 && d1 && d2);
    $display("TB_RESULT checks=%0d failures=%0d", c0 + c1 + c2, f0 + f1 + f2);
    $finish;
  end

  initial begin
    repeat (WATCHDOG) @(posedge clk);
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", c0 + c1 + c2, f0 + f1 + f2 + 1);
    $finish;
  end
endmodule

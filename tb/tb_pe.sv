`timescale 1ns/1ps
// tb_pe: one PE through several complete 25-offset sweeps.  Samples arrive
// alternately on the left link (loaded with shift_h, used with sel_h) and on
// the upper link (loaded with down_en); the centre is captured at sweep index
// 12.  After combine, the drain register must hold
// (cos_i*S - sin_i*C) >>> 15 and the centre components, computed here from
// the same samples.  Also checks the forwarding outputs and the drain chain.
module tb_pe;
  import kura_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  sc_t left = '0, up = '0, h, cur;
  drain_t din = '0, dout;
  logic shift_h = 0, sel_h = 0, down_en = 0, acc_en = 0, acc_first = 0, capture = 0, combine = 0, dshift = 0;
  int checks = 0, failures = 0;

  pe dut (.clk, .rst_n, .left_i(left), .up_i(up), .h_o(h), .cur_o(cur), .drain_i(din), .drain_o(dout),
          .shift_h_i(shift_h), .sel_h_i(sel_h), .down_en_i(down_en), .acc_en_i(acc_en),
          .acc_first_i(acc_first), .capture_i(capture), .combine_i(combine), .drain_shift_i(dshift));

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int rep = 0; rep < 50; rep++) begin
      longint S, C, e;
      sc_t ctr, v;
      S = 0; C = 0;
      for (int s = 0; s < SWEEP; s++) begin
        v = sc_t'($urandom);
        if (rep == 0) v = '{s: 16'sh7FFF, c: -16'sh8000};   // extreme values
        // load the sample through one of the two links
        @(negedge clk);
        if (s % 2 == 0) begin left = v; shift_h = 1; end
        else            begin up = v; down_en = 1; end
        @(negedge clk);
        shift_h = 0; down_en = 0;
        checks++;
        if (s % 2 == 0 && h != v) failures++;
        sel_h = (s % 2 == 0);
        #0;
        checks++;
        if (cur != v) failures++;
        acc_en = 1; acc_first = (s == 0); capture = (s == CENTER_S);
        if (s == CENTER_S) ctr = v;
        else begin S += v.s; C += v.c; end
        @(negedge clk);
        acc_en = 0; acc_first = 0; capture = 0; sel_h = 0;
      end
      combine = 1;
      @(negedge clk);
      combine = 0;
      e = (longint'(ctr.c) * S - longint'(ctr.s) * C) >>> 15;
      checks++;
      if (longint'(dout.core) != e || dout.center != ctr) begin
        failures++;
        if (failures < 5) $display("rep %0d core %0d expected %0d", rep, dout.core, e);
      end
      // drain chain: the register takes the left neighbour's value
      din = drain_t'({$urandom, $urandom});
      dshift = 1;
      @(negedge clk);
      dshift = 0;
      checks++;
      if (dout != din) failures++;
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

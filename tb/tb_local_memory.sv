`timescale 1ns/1ps
// tb_local_memory: random half-word writes and reads on every bank against a
// behavioural copy of the memory; checks the one-cycle read latency and that
// a strobe touches only its half of the word.
module tb_local_memory;
  localparam int NB = 4, D = 16;
  logic clk = 0;
  always #5 clk = ~clk;
  logic [NB-1:0] re = '0;
  logic [NB-1:0][3:0] raddr = '0, waddr = '0;
  logic [NB-1:0][31:0] rdata, wdata = '0;
  logic [NB-1:0][1:0] wstrb = '0;
  int checks = 0, failures = 0;
  logic [31:0] model [NB][D];

  local_memory #(.NBANK(NB), .DEPTH(D)) dut (.clk, .re, .raddr, .rdata, .wstrb, .waddr, .wdata);

  initial begin
    // full writes first
    for (int a = 0; a < D; a++) begin
      @(negedge clk);
      for (int b = 0; b < NB; b++) begin
        model[b][a] = $urandom;
        wstrb[b] = 2'b11; waddr[b] = 4'(a); wdata[b] = model[b][a];
      end
    end
    @(negedge clk); wstrb = '0;
    for (int it = 0; it < 400; it++) begin
      @(negedge clk);
      for (int b = 0; b < NB; b++) begin
        int a;
        logic [31:0] w;
        a = $urandom_range(D - 1);
        w = $urandom;
        wstrb[b] = 2'($urandom);
        waddr[b] = 4'(a);
        wdata[b] = w;
        if (wstrb[b][0]) model[b][a][15:0]  = w[15:0];
        if (wstrb[b][1]) model[b][a][31:16] = w[31:16];
      end
      @(negedge clk);
      wstrb = '0;
      for (int b = 0; b < NB; b++) begin re[b] = 1'b1; raddr[b] = 4'($urandom_range(D - 1)); end
      @(posedge clk); #1;
      re = '0;
      for (int b = 0; b < NB; b++) begin
        checks++;
        if (rdata[b] !== model[b][raddr[b]]) begin
          failures++;
          if (failures < 5) $display("bank %0d addr %0d: %h expected %h", b, raddr[b], rdata[b], model[b][raddr[b]]);
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

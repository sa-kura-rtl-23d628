`timescale 1ns/1ps
// tb_column_buffer: random pushes and pops against a queue model; checks the
// order of columns, the split into Row Buffer (upper 4) and PE (lower NH)
// parts, the free-slot count and the empty flag.
module tb_column_buffer;
  import kura_pkg::*;
  localparam int NH = 4, D = 3;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic push = 0, pop = 0, empty;
  sc_t [NH+HALO-1:0] col = '0;
  sc_t [HALO-1:0] rbc;
  sc_t [NH-1:0] pec;
  logic [$clog2(D+1)-1:0] free;
  int checks = 0, failures = 0;
  sc_t [NH+HALO-1:0] q [$];

  column_buffer #(.NH(NH), .DEPTH(D)) dut (.clk, .rst_n, .push_i(push), .col_i(col), .pop_i(pop),
    .rb_col_o(rbc), .pe_col_o(pec), .empty_o(empty), .free_o(free));

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int it = 0; it < 2000; it++) begin
      @(negedge clk);
      checks++;
      if (free != ($bits(free))'(D - q.size()) || empty != (q.size() == 0)) begin
        failures++;
        if (failures < 5) $display("free %0d empty %0d, model size %0d", free, empty, q.size());
      end
      if (q.size() > 0) begin
        checks++;
        for (int k = 0; k < HALO; k++) if (rbc[k] != q[0][k]) begin failures++; break; end
        for (int r = 0; r < NH; r++) if (pec[r] != q[0][HALO + r]) begin failures++; break; end
      end
      pop  = (q.size() > 0) && ($urandom_range(2) != 0);
      push = ((q.size() < D) || pop) && ($urandom_range(1) != 0);
      for (int k = 0; k < NH + HALO; k++) col[k] = sc_t'($urandom);
      if (pop) void'(q.pop_front());
      if (push) q.push_back(col);
    end
    @(negedge clk); push = 0; pop = 0;
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

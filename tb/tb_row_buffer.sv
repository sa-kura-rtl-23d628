`timescale 1ns/1ps
// tb_row_buffer: shifts columns in from the left and runs vertical sweeps;
// the values fed to the array top row must be rows 3, 2, 1, 0 of the retained
// plane in the four sweep cycles, and the retained plane must be unchanged by
// a sweep (so that the next horizontal step starts from the right state).
module tb_row_buffer;
  import kura_pkg::*;
  localparam int NW = 3;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic shift_h = 0, sel_h = 0, down_en = 0;
  sc_t [HALO-1:0] col = '0;
  sc_t [NW-1:0] feed;
  sc_t hm [HALO][NW];
  int checks = 0, failures = 0;

  row_buffer #(.NW(NW)) dut (.clk, .rst_n, .shift_h_i(shift_h), .col_i(col), .sel_h_i(sel_h),
                             .down_en_i(down_en), .feed_o(feed));

  task automatic push_col();
    @(negedge clk);
    for (int k = 0; k < HALO; k++) col[k] = sc_t'($urandom);
    shift_h = 1;
    for (int c = NW - 1; c > 0; c--) for (int k = 0; k < HALO; k++) hm[k][c] = hm[k][c-1];
    for (int k = 0; k < HALO; k++) hm[k][0] = col[k];
    @(negedge clk);
    shift_h = 0;
  endtask

  initial begin
    for (int k = 0; k < HALO; k++) for (int c = 0; c < NW; c++) hm[k][c] = '0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int i = 0; i < NW; i++) push_col();
    for (int g = 0; g < 30; g++) begin
      for (int j = 0; j < 4; j++) begin
        @(negedge clk);
        sel_h = (j == 0); down_en = 1;
        #1;
        for (int c = 0; c < NW; c++) begin
          checks++;
          if (feed[c] != hm[HALO-1-j][c]) begin
            failures++;
            if (failures < 5) $display("g %0d j %0d col %0d wrong feed", g, j, c);
          end
        end
      end
      @(negedge clk);
      sel_h = 0; down_en = 0;
      push_col();
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

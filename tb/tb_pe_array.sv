`timescale 1ns/1ps
// tb_pe_array: the PE array together with a Row Buffer, driven through the
// tile schedule (prefill NW, 25-cycle offset sweep with column insertions,
// combine, drain overlapped with the next prefill) for several random
// halo fields.  Every PE's drained core must equal the 5x5 sums of its own
// centre computed here directly from the field, and the drained centre
// components must be the field value at the centre.
module tb_pe_array;
  import kura_pkg::*;
  localparam int NH = 3, NW = 4, TILES = 6;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  sc_t [NH-1:0] left = '0;
  sc_t [HALO-1:0] rbin = '0;
  sc_t [NW-1:0] top;
  logic shift_h = 0, sel_h = 0, down_en = 0, acc_en = 0, acc_first = 0, capture = 0, combine = 0, dshift = 0;
  acc_t [NH-1:0] dh;
  sc_t  [NH-1:0] dt;
  int checks = 0, failures = 0;
  sc_t f [TILES][NH+HALO][NW+HALO];

  row_buffer #(.NW(NW)) u_rb (.clk, .rst_n, .shift_h_i(shift_h), .col_i(rbin), .sel_h_i(sel_h),
                              .down_en_i(down_en), .feed_o(top));
  pe_array #(.NH(NH), .NW(NW)) dut (.clk, .rst_n, .left_col_i(left), .top_row_i(top),
    .shift_h_i(shift_h), .sel_h_i(sel_h), .down_en_i(down_en), .acc_en_i(acc_en),
    .acc_first_i(acc_first), .capture_i(capture), .combine_i(combine), .drain_shift_i(dshift),
    .drain_h_o(dh), .drain_t_o(dt));

  // column i of tile t enters in insertion order: field column NW+3-i
  task automatic load_col(int t, int i);
    for (int k = 0; k < HALO; k++) rbin[k] = f[t][k][NW + HALO - 1 - i];
    for (int r = 0; r < NH; r++) left[r] = f[t][HALO + r][NW + HALO - 1 - i];
  endtask

  function automatic longint core_of(int t, int r, int c);
    longint S, C;
    S = 0; C = 0;
    for (int dy = -2; dy <= 2; dy++)
      for (int dx = -2; dx <= 2; dx++)
        if (dy != 0 || dx != 0) begin
          S += f[t][r + 2 + dy][c + 2 + dx].s;
          C += f[t][r + 2 + dy][c + 2 + dx].c;
        end
    return (longint'(f[t][r+2][c+2].c) * S - longint'(f[t][r+2][c+2].s) * C) >>> 15;
  endfunction

  initial begin
    for (int t = 0; t < TILES; t++)
      for (int y = 0; y < NH + HALO; y++)
        for (int x = 0; x < NW + HALO; x++) f[t][y][x] = sc_t'($urandom);
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int t = 0; t <= TILES; t++) begin
      // prefill of tile t, drain of tile t-1
      for (int k = 0; k < NW; k++) begin
        if (t > 0) begin
          for (int r = 0; r < NH; r++) begin
            checks++;
            if (longint'(dh[r]) != core_of(t - 1, r, NW - 1 - k) || dt[r] != f[t-1][r+2][NW+1-k]) begin
              failures++;
              if (failures < 6) $display("tile %0d pe(%0d,%0d): core %0d expected %0d", t - 1, r, NW - 1 - k, dh[r], core_of(t - 1, r, NW - 1 - k));
            end
          end
        end
        if (t < TILES) begin load_col(t, k); shift_h = 1; end
        dshift = (t > 0);
        @(negedge clk);
        shift_h = 0; dshift = 0;
      end
      if (t == TILES) break;
      // sweep
      for (int s = 0; s < SWEEP; s++) begin
        acc_en = 1; acc_first = (s == 0); capture = (s == CENTER_S);
        sel_h = (s % M == 0); down_en = (s % M != M - 1);
        if (s % M == M - 1 && s / M != M - 1) begin load_col(t, NW + s / M); shift_h = 1; end
        @(negedge clk);
        acc_en = 0; acc_first = 0; capture = 0; sel_h = 0; down_en = 0; shift_h = 0;
      end
      combine = 1;
      @(negedge clk);
      combine = 0;
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

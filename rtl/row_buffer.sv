// row_buffer: the (M-1) x N_w store of halo rows above the PE array.
//
// Two register planes, as in the PE:
//   H (retained)  - shifts right by one column whenever a column is popped
//                   from the Column Buffer; its left column takes the upper
//                   HALO samples of that column.  H is not disturbed by the
//                   vertical sweep, so it still holds the right state when
//                   the next horizontal step comes (the paper's "snapshot and
//                   restore").
//   D (sweeping)  - on down_en the whole column (H or D, chosen by sel_h)
//                   moves down by one row.  Row HALO-1 is the row next to the
//                   array; its current value is fed into the PE array top
//                   row (feed_o).
// Row 0 is the topmost halo row.  feed_o is combinational from the registers.
// Keeping a separate sweep plane is this design's way of realising the
// restore; the paper names the mechanism but not its registers.
module row_buffer
  import kura_pkg::*;
#(
  parameter int NW = 5
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 shift_h_i,   // horizontal advance
  input  sc_t [HALO-1:0]       col_i,       // upper entries of the popped column
  input  logic                 sel_h_i,     // first cycle of a vertical sweep
  input  logic                 down_en_i,   // vertical shift
  output sc_t [NW-1:0]         feed_o       // into PE row 0
);

  sc_t h [HALO][NW];
  sc_t d [HALO][NW];

  for (genvar c = 0; c < NW; c++) begin : g_col
    assign feed_o[c] = sel_h_i ? h[HALO-1][c] : d[HALO-1][c];

    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n) begin
        for (int k = 0; k < HALO; k++) begin
          h[k][c] <= '0;
          d[k][c] <= '0;
        end
      end else begin
        if (shift_h_i) begin
          for (int k = 0; k < HALO; k++) h[k][c] <= (c == 0) ? col_i[k] : h[k][(c == 0) ? 0 : c-1];
        end
        if (down_en_i) begin
          d[0][c] <= '0;
          for (int k = 1; k < HALO; k++) d[k][c] <= sel_h_i ? h[k-1][c] : d[k-1][c];
        end
      end
    end
  end

endmodule

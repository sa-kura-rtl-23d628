// pe_array: the N_h x N_w systolic grid of PEs.
//
// Samples enter at the left edge (one per row, from the Column Buffer) and
// move right one PE per shift_h; they enter at the top (from the Row Buffer)
// and move down one PE per down_en, so the whole field shifts while every
// PE keeps its own centre pixel.  Every PE receives the same control word in
// the same cycle.  The drain chain of each row ends at the right edge: on
// each drain_shift the array presents the results of the next column, the
// rightmost column first, on drain_h_o (neighbourhood core) and drain_t_o
// (captured centre components).  The drain outputs are registered.
module pe_array
  import kura_pkg::*;
#(
  parameter int NH = 20,
  parameter int NW = 5
) (
  input  logic            clk,
  input  logic            rst_n,
  input  sc_t [NH-1:0]    left_col_i,
  input  sc_t [NW-1:0]    top_row_i,
  input  logic            shift_h_i,
  input  logic            sel_h_i,
  input  logic            down_en_i,
  input  logic            acc_en_i,
  input  logic            acc_first_i,
  input  logic            capture_i,
  input  logic            combine_i,
  input  logic            drain_shift_i,
  output acc_t [NH-1:0]   drain_h_o,
  output sc_t  [NH-1:0]   drain_t_o
);

  sc_t    h   [NH][NW];
  sc_t    cur [NH][NW];
  drain_t drn [NH][NW];

  for (genvar r = 0; r < NH; r++) begin : g_row
    for (genvar c = 0; c < NW; c++) begin : g_col
      sc_t    left_in, up_in;
      drain_t drain_in;
      if (c == 0) begin : g_l
        assign left_in  = left_col_i[r];
        assign drain_in = '0;
      end else begin : g_i
        assign left_in  = h[r][c-1];
        assign drain_in = drn[r][c-1];
      end
      if (r == 0) begin : g_t
        assign up_in = top_row_i[c];
      end else begin : g_u
        assign up_in = cur[r-1][c];
      end
      pe u_pe (
        .clk, .rst_n,
        .left_i(left_in), .up_i(up_in), .h_o(h[r][c]), .cur_o(cur[r][c]),
        .drain_i(drain_in), .drain_o(drn[r][c]),
        .shift_h_i, .sel_h_i, .down_en_i, .acc_en_i, .acc_first_i,
        .capture_i, .combine_i, .drain_shift_i
      );
    end
    assign drain_h_o[r] = drn[r][NW-1].core;
    assign drain_t_o[r] = drn[r][NW-1].center;
  end

endmodule

// streamer: reads the phase map tile by tile, converts it to sin/cos and
// pushes halo-extended columns into the Column Buffer.
//
// Structure (after the paper's Streamer figure): a scheduler that issues bank
// addresses, a read data buffer, NH+HALO parallel sinusoidal units and an
// emit buffer that performs the Column Buffer push.  The NH+HALO units share
// one quarter-wave table (sin_lut), as in the paper.
//
// Order.  Tiles are visited row of tiles by row of tiles (ty, then tx).  For
// each tile with origin (y0, x0) = (ty*NH, tx*NW) the streamer produces the
// NW+HALO columns of the halo field from right to left, x = x0+NW+1 down to
// x0-2, because the array shifts its contents to the right: the first column
// pushed ends in the rightmost PE column.  A column holds field rows
// y0-2 .. y0+NH+1, top first.  Samples outside the image are sent as
// sin = cos = 0, so they add nothing to the sums (border handling is this
// design's choice; the paper does not describe it).
//
// Bank access.  Pixel (y, x) is in bank y mod NH, word (y div NH)*IMG_W + x.
// The NH+4 rows of a column hit banks 0, 1, NH-2 and NH-1 twice, so they
// cannot all be read in one cycle.  In the first row of tiles a column takes
// two read cycles: cycle A reads the NH tile rows, cycle B the four halo rows
// (banks NH-2, NH-1 of the row of tiles above - outside the image here - and
// banks 0, 1 of the row below).  A line buffer (2 sets x IMG_W x 4 phases)
// keeps, for every image column, the four rows that a row of tiles shares
// with the next one: its last two tile rows and its lower halo, which are
// the next row's upper halo and first two tile rows.  From the second row of
// tiles on, a column is then read in a single cycle F (banks 2..NH-1 for tile
// rows 2..NH-1, banks 0, 1 for the lower halo) plus the line buffer.  One
// column per cycle always keeps up with the array; in the first row of tiles
// the two-cycle read keeps up while 2*(NW+4) <= NW+26, i.e. NW <= 18, and
// wider arrays see stalls there.  The paper names a "Read data buffer" but
// not this bank schedule or the line buffer: both are this design's choice.
// A column is issued only when the Column Buffer has room for it and for
// every column still in flight (cb_free_i).
//
// Timing: memory data returns the cycle after the address; the converted
// column is registered in the emit buffer and pushed 3 cycles after cycle A
// (or F).
// For the centre columns of a tile (x0 .. x0+NW-1) the raw phases of the NH
// tile rows are pushed on ctheta_o in the same cycle, for the final update.
module streamer
  import kura_pkg::*;
#(
  parameter int NH     = 20,
  parameter int NW     = 5,
  parameter int IMG_H  = 96,
  parameter int IMG_W  = 96,
  parameter int DEPTH  = 1024,
  parameter int CB_DEPTH = NW
) (
  input  logic                           clk,
  input  logic                           rst_n,
  input  logic                           start_i,
  input  logic                           parity_i,   // half holding current phases
  input  logic [$clog2(CB_DEPTH+1)-1:0]  cb_free_i,
  output logic [NH-1:0]                  re_o,
  output logic [NH-1:0][$clog2(DEPTH)-1:0] raddr_o,
  input  logic [NH-1:0][31:0]            rdata_i,
  output logic                           push_o,
  output sc_t  [NH+HALO-1:0]             col_o,
  output logic                           ctheta_push_o,
  output phase_t [NH-1:0]                ctheta_o,
  output logic                           busy_o
);

  localparam int NTY = (IMG_H + NH - 1) / NH;
  localparam int NTX = (IMG_W + NW - 1) / NW;
  localparam int AW  = $clog2(DEPTH);
  localparam int NC  = NW + HALO;          // columns per tile
  localparam int KH  = NH + HALO;          // column height

  // ---------------- scheduler ----------------
  logic                    active, ph_b;
  logic [$clog2(NTY+1)-1:0] ty;
  logic [$clog2(NTX+1)-1:0] tx;
  logic [$clog2(NC+1)-1:0]  ci;
  logic [1:0]               pend;
  logic                     issue_a, issue_b, issue_f, do_push;

  wire signed [31:0] x_cur, y0_cur;
  assign x_cur  = int'(tx) * NW + NW + 1 - int'(ci);
  assign y0_cur = int'(ty) * NH;
  logic x_ok;
  logic [NH-1:0] a_mask;       // tile rows inside the image
  logic [3:0]    b_mask;       // halo rows y0-2, y0-1, y0+NH, y0+NH+1

  always_comb begin
    x_ok   = (x_cur >= 0) && (x_cur < IMG_W);
    for (int r = 0; r < NH; r++) a_mask[r] = x_ok && (y0_cur + r < IMG_H);
    b_mask[0] = x_ok && (ty != 0);
    b_mask[1] = x_ok && (ty != 0);
    b_mask[2] = x_ok && (y0_cur + NH < IMG_H);
    b_mask[3] = x_ok && (y0_cur + NH + 1 < IMG_H);
  end

  // Row of tiles 0 uses the two-cycle A/B read; every later row of tiles
  // takes its four boundary rows from the line buffer and issues one
  // single-cycle read F per column.
  logic slow, room;
  assign slow    = (ty == '0);
  assign room    = ($bits(cb_free_i))'(pend) < cb_free_i;
  assign issue_a = active && slow && !ph_b && room;
  assign issue_b = active && slow && ph_b;
  assign issue_f = active && !slow && room;

  always_comb begin
    re_o    = '0;
    raddr_o = '0;
    if (issue_a) begin
      for (int r = 0; r < NH; r++) begin
        re_o[r]    = a_mask[r];
        raddr_o[r] = AW'(int'(ty) * IMG_W + x_cur);
      end
    end else if (issue_f) begin
      for (int r = 2; r < NH; r++) begin
        re_o[r]    = a_mask[r];
        raddr_o[r] = AW'(int'(ty) * IMG_W + x_cur);
      end
      re_o[0]    = b_mask[2];
      re_o[1]    = b_mask[3];
      raddr_o[0] = AW'((int'(ty) + 1) * IMG_W + x_cur);
      raddr_o[1] = AW'((int'(ty) + 1) * IMG_W + x_cur);
    end else if (issue_b) begin
      re_o[NH-2]    = b_mask[0];
      re_o[NH-1]    = b_mask[1];
      re_o[0]       = b_mask[2];
      re_o[1]       = b_mask[3];
      raddr_o[NH-2] = AW'((int'(ty) - 1) * IMG_W + x_cur);
      raddr_o[NH-1] = AW'((int'(ty) - 1) * IMG_W + x_cur);
      raddr_o[0]    = AW'((int'(ty) + 1) * IMG_W + x_cur);
      raddr_o[1]    = AW'((int'(ty) + 1) * IMG_W + x_cur);
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      active <= 1'b0;
      ph_b   <= 1'b0;
      ty     <= '0;
      tx     <= '0;
      ci     <= '0;
    end else if (start_i && !active) begin
      active <= 1'b1;
      ph_b   <= 1'b0;
      ty     <= '0;
      tx     <= '0;
      ci     <= '0;
    end else if (issue_a) begin
      ph_b <= 1'b1;
    end else if (issue_b || issue_f) begin
      ph_b <= 1'b0;
      if (ci == ($bits(ci))'(NC - 1)) begin
        ci <= '0;
        if (tx == ($bits(tx))'(NTX - 1)) begin
          tx <= '0;
          if (ty == ($bits(ty))'(NTY - 1)) active <= 1'b0;
          else                              ty <= ty + 1'b1;
        end else begin
          tx <= tx + 1'b1;
        end
      end else begin
        ci <= ci + 1'b1;
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) pend <= '0;
    else        pend <= pend + ((issue_a || issue_f) ? 2'd1 : 2'd0) - (do_push ? 2'd1 : 2'd0);
  end

  // ---------------- pipeline ----------------
  // stage 1: A data arrives (B issued this cycle); stage 2: B data arrives.
  localparam int XW = $clog2(IMG_W);
  logic          s1_v, s2_v;
  logic [NH-1:0] s1_amask, s2_amask;
  logic [3:0]    s1_bmask, s2_bmask;
  logic          s1_ctr, s2_ctr;
  logic          s1_fast, s2_fast;     // column read by a single F cycle
  logic          s1_t0, s2_t0;         // ty[0]: line-buffer set
  logic          s1_xok, s2_xok;
  logic [XW-1:0] s1_x, s2_x;
  phase_t [NH-1:0] rdbuf;             // read data buffer (tile rows)

  function automatic phase_t half(input logic [31:0] w, input logic sel);
    return sel ? phase_t'(w[31:16]) : phase_t'(w[15:0]);
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      s1_v <= 1'b0;
      s2_v <= 1'b0;
      s1_amask <= '0; s2_amask <= '0;
      s2_bmask <= '0;
      s1_ctr <= 1'b0; s2_ctr <= 1'b0;
      s1_bmask <= '0;
      s1_fast <= 1'b0; s2_fast <= 1'b0;
      s1_t0 <= 1'b0; s2_t0 <= 1'b0;
      s1_xok <= 1'b0; s2_xok <= 1'b0;
      s1_x <= '0; s2_x <= '0;
    end else begin
      s1_v     <= issue_a || issue_f;
      s1_amask <= a_mask;
      s1_bmask <= b_mask;
      s1_ctr   <= (ci >= ($bits(ci))'(2)) && (ci <= ($bits(ci))'(NW + 1));
      s1_fast  <= issue_f;
      s1_t0    <= ty[0];
      s1_xok   <= x_ok;
      s1_x     <= XW'(x_cur);
      s2_v     <= s1_v;
      s2_amask <= s1_amask;
      s2_bmask <= s1_bmask;
      s2_ctr   <= s1_ctr;
      s2_fast  <= s1_fast;
      s2_t0    <= s1_t0;
      s2_xok   <= s1_xok;
      s2_x     <= s1_x;
    end
  end

  // Line buffer: for every image column, the four rows that the next row of
  // tiles shares with the current one (its top halo y0'-2, y0'-1 and its
  // first two tile rows y0', y0'+1, with y0' = y0 + NH).  Written while the
  // current row of tiles streams, into the set the next one reads.
  phase_t [HALO-1:0] lb [2][IMG_W];
  phase_t [HALO-1:0] lb_rd;
  assign lb_rd = lb[s2_t0][s2_x];

  always_ff @(posedge clk) begin
    if (s1_v) begin
      for (int r = 0; r < NH; r++) rdbuf[r] <= half(rdata_i[r], parity_i);
    end
  end

  // stage 2: assemble the column and convert it
  phase_t [KH-1:0] th_col;
  logic   [KH-1:0] th_ok;
  sc_t    [KH-1:0] sc_col;

  always_comb begin
    th_ok[0]     = s2_bmask[0];
    th_ok[1]     = s2_bmask[1];
    th_ok[KH-2]  = s2_bmask[2];
    th_ok[KH-1]  = s2_bmask[3];
    for (int r = 0; r < NH; r++) begin
      th_col[2 + r] = rdbuf[r];
      th_ok[2 + r]  = s2_amask[r];
    end
    if (s2_fast) begin
      th_col[0]    = lb_rd[0];
      th_col[1]    = lb_rd[1];
      th_col[2]    = lb_rd[2];
      th_col[3]    = lb_rd[3];
      th_col[KH-2] = rdbuf[0];
      th_col[KH-1] = rdbuf[1];
    end else begin
      th_col[0]    = half(rdata_i[NH-2], parity_i);
      th_col[1]    = half(rdata_i[NH-1], parity_i);
      th_col[KH-2] = half(rdata_i[0], parity_i);
      th_col[KH-1] = half(rdata_i[1], parity_i);
    end
  end

  always_ff @(posedge clk) begin
    if (s2_v && s2_xok) lb[!s2_t0][s2_x] <= th_col[KH-1-:HALO];
  end

  logic [2*KH-1:0][12:0] lut_idx;
  logic [2*KH-1:0][14:0] lut_lo, lut_hi;

  sin_lut #(.NPORT(2 * KH)) u_lut (.idx_i(lut_idx), .lo_o(lut_lo), .hi_o(lut_hi));

  for (genvar k = 0; k < KH; k++) begin : g_sin
    sc_t sc_raw;
    sincos_unit u_sc (
      .theta_i(th_col[k]),
      .idx_a_o(lut_idx[2*k]),   .idx_b_o(lut_idx[2*k+1]),
      .a_lo_i(lut_lo[2*k]),     .a_hi_i(lut_hi[2*k]),
      .b_lo_i(lut_lo[2*k+1]),   .b_hi_i(lut_hi[2*k+1]),
      .sc_o(sc_raw)
    );
    assign sc_col[k] = th_ok[k] ? sc_raw : '0;
  end

  // emit buffer
  logic e_v, e_ctr;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      e_v   <= 1'b0;
      e_ctr <= 1'b0;
    end else begin
      e_v   <= s2_v;
      e_ctr <= s2_v && s2_ctr;
    end
  end
  always_ff @(posedge clk) begin
    if (s2_v) begin
      col_o    <= sc_col;
      ctheta_o <= th_col[NH+1:2];
    end
  end

  assign do_push       = e_v;
  assign push_o        = e_v;
  assign ctheta_push_o = e_ctr;
  assign busy_o        = active || s1_v || s2_v || e_v;

  initial begin
    assert (NH >= HALO) else $error("streamer needs NH >= 4 for the halo bank mapping");
    assert (NTY * IMG_W <= DEPTH) else $error("image does not fit the local memory");
  end

endmodule

// pe: one processing element of the SA-Kura array; owns one centre pixel.
//
// Registers (names as in the paper's PE diagram):
//   SRB/CRB (h_q)  right-going sin/cos sample.  Loaded from the left
//                  neighbour on shift_h and passed on to the right (h_o).
//   SDB/CDB (d_q)  down-going sin/cos sample.  Loaded from the PE above on
//                  down_en and passed downwards (cur_o).
//   ACC x2         S = sum sin(theta_j), C = sum cos(theta_j), 32 bit.
//   SCB/CCB        captured centre sin(theta_i), cos(theta_i).
//   drain          result register, part of the row's drain chain.
// The sample seen in a sweep cycle is cur = sel_h ? h_q : d_q (the input
// multiplexer in front of the accumulators).  On acc_en it is added to S and
// C (acc_first restarts the sums), except on capture, when it is written to
// SCB/CCB instead: the centre is not accumulated, which leaves the result
// unchanged because its self term is zero.
// On combine the PE forms core = (cos_i * S - sin_i * C) >>> 15 (Q16.15) and
// loads {core, sin_i, cos_i} into its drain register; on drain_shift the drain
// register takes the left neighbour's.  The PE at the right edge drives the
// array's drain_H (core) and drain_T (centre components) outputs.
// Separate drain registers, rather than reusing SRB/CRB as the figure's shared
// sin_R/drain_T and cos_R/drain_H ports suggest, let the drain of one tile
// run in the same cycles as the prefill of the next.
// All control inputs are synchronous and act at the next clock edge.
module pe
  import kura_pkg::*;
(
  input  logic   clk,
  input  logic   rst_n,
  // operand links
  input  sc_t    left_i,     // sin_L / cos_L
  input  sc_t    up_i,       // sin_U / cos_U
  output sc_t    h_o,        // sin_R / cos_R
  output sc_t    cur_o,      // sin_D / cos_D
  // drain chain
  input  drain_t drain_i,
  output drain_t drain_o,
  // control (broadcast)
  input  logic   shift_h_i,
  input  logic   sel_h_i,
  input  logic   down_en_i,
  input  logic   acc_en_i,
  input  logic   acc_first_i,
  input  logic   capture_i,
  input  logic   combine_i,
  input  logic   drain_shift_i
);

  sc_t    h_q, d_q, ctr_q;
  acc_t   s_acc, c_acc;
  drain_t drain_q;
  sc_t    cur;

  logic signed [48:0] cc_x, sc_x, s_x, c_x, prod_s, prod_c, diff;

  assign cur     = sel_h_i ? h_q : d_q;
  assign h_o     = h_q;
  assign cur_o   = cur;
  assign drain_o = drain_q;

  always_comb begin
    cc_x   = 49'(ctr_q.c);           // sign-extend before multiplying
    sc_x   = 49'(ctr_q.s);
    s_x    = 49'(s_acc);
    c_x    = 49'(c_acc);
    prod_s = cc_x * s_x;             // cos_i * S
    prod_c = sc_x * c_x;             // sin_i * C
    diff   = prod_s - prod_c;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      h_q     <= '0;
      d_q     <= '0;
      ctr_q   <= '0;
      s_acc   <= '0;
      c_acc   <= '0;
      drain_q <= '0;
    end else begin
      if (shift_h_i) h_q <= left_i;
      if (down_en_i) d_q <= up_i;
      if (acc_en_i) begin
        if (capture_i) begin
          ctr_q <= cur;
          if (acc_first_i) begin
            s_acc <= '0;
            c_acc <= '0;
          end
        end else begin
          s_acc <= (acc_first_i ? acc_t'(0) : s_acc) + acc_t'(cur.s);
          c_acc <= (acc_first_i ? acc_t'(0) : c_acc) + acc_t'(cur.c);
        end
      end
      if (combine_i) begin
        drain_q.core   <= acc_t'(diff >>> 15);
        drain_q.center <= ctr_q;
      end else if (drain_shift_i) begin
        drain_q <= drain_i;
      end
    end
  end

endmodule

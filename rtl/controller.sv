// controller: sequences the array tile by tile and writes theta_new back.
//
// One sampling step (start_i in IDLE):
//   * the per-step coefficients are latched into configuration registers and
//     the Streamer and Random Number Generator are (re)started;
//   * for every tile, a schedule of C_tile = NW + M*M + 1 cycles:
//       t = 0 .. NW-1        prefill: one column popped per cycle, shifted
//                            into Row Buffer and array (shift_h);
//       t = NW .. NW+24      offset sweep, s = t-NW, g = s div 5, j = s mod 5:
//                            j = 0 uses the retained (right-going) sample,
//                            j = 1..4 the downward-shifted ones; at j = 4 of
//                            g = 0..3 the next column is popped; s = 12 is
//                            offset (0,0) and captures the centre;
//       t = NW+25            combine: each PE forms its core and loads its
//                            drain register.
//     The drain of a tile (NW shifts) runs during the prefill of the next
//     one (drain-prefill overlap); the last tile is drained in FLUSH.
//   * a cycle in which a pop is due but the Column Buffer is empty is a
//     stall: nothing in the array moves and the schedule waits.
//   * after the last write, the half of the memory words that holds the
//     current phase is swapped (parity), so theta_new becomes current.
// Offset order: Dx = +2 .. -2 (one column entering from the left per step)
// and, within each, Dy = +2 .. -2 (the field moving down).  The paper starts
// its description at (-2,-2); the visiting order does not change the sums.
//
// Post-array merge: in a drain cycle the array presents one column of
// results (rightmost first); the controller pops the matching raw centre
// phases (pushed by the Streamer in the same column order), samples the
// externally computed score term for those pixels (score_req_o, score_y0_o,
// score_x_o out, score_i in the same cycle), and one cycle later, when the
// Theta Update Unit's drift is ready, writes
//   theta_new = theta + drift + score        (16-bit wrap = 2*pi wrap)
// into the non-current half of each word.  Rows/columns outside the image
// are not written.  The score term is expected already scaled to a Q1.15
// phase increment.
module controller
  import kura_pkg::*;
#(
  parameter int NH     = 20,
  parameter int NW     = 5,
  parameter int IMG_H  = 96,
  parameter int IMG_W  = 96,
  parameter int DEPTH  = 1024
) (
  input  logic                 clk,
  input  logic                 rst_n,
  // host side
  input  logic                 start_i,
  input  q15_t                 cfg_k_nbr_i,
  input  q15_t                 cfg_kref_sin_i,
  input  q15_t                 cfg_kref_cos_i,
  input  q15_t                 cfg_sigma_i,
  output logic                 busy_o,
  output logic                 done_o,
  output logic                 parity_o,
  output logic                 tile_done_o,
  output logic                 stall_o,
  // latched coefficients
  output q15_t                 k_nbr_o,
  output q15_t                 kref_sin_o,
  output q15_t                 kref_cos_o,
  output q15_t                 sigma_o,
  output logic                 seed_load_o,
  output logic                 rng_next_o,
  // streamer / column buffer
  output logic                 stream_start_o,
  input  logic                 cb_empty_i,
  output logic                 cb_pop_o,
  input  logic                 ctheta_push_i,
  input  phase_t [NH-1:0]      ctheta_i,
  // array and row buffer control
  output logic                 shift_h_o,
  output logic                 sel_h_o,
  output logic                 down_en_o,
  output logic                 acc_en_o,
  output logic                 acc_first_o,
  output logic                 capture_o,
  output logic                 combine_o,
  output logic                 drain_shift_o,
  // score term
  output logic                 score_req_o,
  output logic [15:0]          score_y0_o,
  output logic [15:0]          score_x_o,
  input  q15_t [NH-1:0]        score_i,
  // theta update result
  input  logic                 tu_valid_i,
  input  acc_t [NH-1:0]        drift_i,
  // write-back
  output logic [NH-1:0][1:0]   wstrb_o,
  output logic [NH-1:0][$clog2(DEPTH)-1:0] waddr_o,
  output logic [NH-1:0][31:0]  wdata_o
);

  localparam int NTY   = (IMG_H + NH - 1) / NH;
  localparam int NTX   = (IMG_W + NW - 1) / NW;
  localparam int TLEN  = NW + SWEEP + 1;       // C_tile
  localparam int CTD   = (4 * NW < 8) ? 8 : 4 * NW;
  localparam int AW    = $clog2(DEPTH);

  typedef enum logic [1:0] {S_IDLE, S_RUN, S_FLUSH, S_FIN} state_t;
  state_t state;

  logic [$clog2(TLEN+1)-1:0] t;
  logic [2:0] jc, gc;                       // offset counters within the sweep
  logic [4:0] sc;                           // sweep index
  logic [$clog2(NTY+1)-1:0] ty, dty;
  logic [$clog2(NTX+1)-1:0] tx, dtx;
  logic have_prev;
  logic [$clog2(NW+1)-1:0] fcnt;
  logic [1:0] fin_cnt;

  logic in_prefill, in_sweep, is_comb, pop_need, stall, adv, last_tile;
  logic drain_now;
  logic [$clog2(NW+1)-1:0] dk;              // drain column index

  always_comb begin
    in_prefill = (state == S_RUN) && (t < ($bits(t))'(NW));
    in_sweep   = (state == S_RUN) && (t >= ($bits(t))'(NW)) && (t < ($bits(t))'(NW + SWEEP));
    is_comb    = (state == S_RUN) && (t == ($bits(t))'(NW + SWEEP));
    pop_need   = in_prefill || (in_sweep && jc == 3'd4 && gc != 3'd4);
    stall      = pop_need && cb_empty_i;
    adv        = !stall;
    last_tile  = (ty == ($bits(ty))'(NTY - 1)) && (tx == ($bits(tx))'(NTX - 1));
    drain_now  = ((state == S_RUN) && have_prev && in_prefill && adv) || (state == S_FLUSH);
    dk         = (state == S_FLUSH) ? fcnt : ($bits(dk))'(t);
  end

  assign stall_o       = stall;
  assign cb_pop_o      = pop_need && adv;
  assign shift_h_o     = pop_need && adv;
  assign sel_h_o       = in_sweep && (jc == 3'd0);
  assign down_en_o     = in_sweep && adv && (jc != 3'd4);
  assign acc_en_o      = in_sweep && adv;
  assign acc_first_o   = (sc == 5'd0);
  assign capture_o     = (sc == 5'(CENTER_S));
  assign combine_o     = is_comb;
  assign tile_done_o   = is_comb;
  assign drain_shift_o = drain_now;
  assign rng_next_o    = drain_now;
  assign busy_o        = (state != S_IDLE);

  // ---------------- sequencing ----------------
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state     <= S_IDLE;
      t         <= '0;
      jc        <= '0;
      gc        <= '0;
      sc        <= '0;
      ty        <= '0;
      tx        <= '0;
      dty       <= '0;
      dtx       <= '0;
      have_prev <= 1'b0;
      fcnt      <= '0;
      fin_cnt   <= '0;
      parity_o  <= 1'b0;
      done_o    <= 1'b0;
      k_nbr_o   <= '0;
      kref_sin_o <= '0;
      kref_cos_o <= '0;
      sigma_o   <= '0;
    end else begin
      done_o <= 1'b0;
      unique case (state)
        S_IDLE: if (start_i) begin
          state      <= S_RUN;
          t          <= '0;
          jc         <= '0;
          gc         <= '0;
          sc         <= '0;
          ty         <= '0;
          tx         <= '0;
          have_prev  <= 1'b0;
          k_nbr_o    <= cfg_k_nbr_i;
          kref_sin_o <= cfg_kref_sin_i;
          kref_cos_o <= cfg_kref_cos_i;
          sigma_o    <= cfg_sigma_i;
        end
        S_RUN: if (adv) begin
          if (in_sweep) begin
            sc <= sc + 5'd1;
            if (jc == 3'd4) begin
              jc <= '0;
              gc <= gc + 3'd1;
            end else begin
              jc <= jc + 3'd1;
            end
          end
          if (is_comb) begin
            t         <= '0;
            jc        <= '0;
            gc        <= '0;
            sc        <= '0;
            have_prev <= 1'b1;
            dty       <= ty;
            dtx       <= tx;
            if (last_tile) begin
              state <= S_FLUSH;
              fcnt  <= '0;
            end else if (tx == ($bits(tx))'(NTX - 1)) begin
              tx <= '0;
              ty <= ty + 1'b1;
            end else begin
              tx <= tx + 1'b1;
            end
          end else begin
            t <= t + 1'b1;
          end
        end
        S_FLUSH: begin
          if (fcnt == ($bits(fcnt))'(NW - 1)) begin
            state   <= S_FIN;
            fin_cnt <= '0;
          end else begin
            fcnt <= fcnt + 1'b1;
          end
        end
        default: begin   // S_FIN: let the last write-back complete
          fin_cnt <= fin_cnt + 2'd1;
          if (fin_cnt == 2'd1) begin
            state    <= S_IDLE;
            parity_o <= ~parity_o;
            done_o   <= 1'b1;
          end
        end
      endcase
    end
  end

  assign seed_load_o    = (state == S_IDLE) && start_i;
  assign stream_start_o = (state == S_IDLE) && start_i;

  // ---------------- centre-phase FIFO ----------------
  phase_t [NH-1:0] ct_mem [CTD];
  logic [$clog2(CTD)-1:0] ct_wp, ct_rp;
  logic [$clog2(CTD+1)-1:0] ct_cnt;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      ct_wp  <= '0;
      ct_rp  <= '0;
      ct_cnt <= '0;
    end else begin
      if (ctheta_push_i) ct_wp <= (ct_wp == ($bits(ct_wp))'(CTD - 1)) ? '0 : ct_wp + 1'b1;
      if (drain_now)     ct_rp <= (ct_rp == ($bits(ct_rp))'(CTD - 1)) ? '0 : ct_rp + 1'b1;
      ct_cnt <= ct_cnt + ($bits(ct_cnt))'(ctheta_push_i) - ($bits(ct_cnt))'(drain_now);
    end
  end
  always_ff @(posedge clk) begin
    if (ctheta_push_i) ct_mem[ct_wp] <= ctheta_i;
  end

  // ---------------- drain stage 0 -> write stage ----------------
  wire signed [31:0] dx, dy0;
  assign dx          = int'(dtx) * NW + NW - 1 - int'(dk);
  assign dy0         = int'(dty) * NH;
  assign score_req_o = drain_now;
  assign score_y0_o  = 16'(dy0);
  assign score_x_o   = 16'(dx);

  logic            w_v;
  logic [NH-1:0]   w_mask;
  logic [AW-1:0]   w_addr;
  phase_t [NH-1:0] w_theta;
  q15_t   [NH-1:0] w_score;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      w_v    <= 1'b0;
      w_mask <= '0;
      w_addr <= '0;
    end else begin
      w_v    <= drain_now;
      w_addr <= AW'(int'(dty) * IMG_W + dx);
      for (int r = 0; r < NH; r++) w_mask[r] <= drain_now && (dx < IMG_W) && (dy0 + r < IMG_H);
    end
  end
  always_ff @(posedge clk) begin
    if (drain_now) begin
      w_theta <= ct_mem[ct_rp];
      w_score <= score_i;
    end
  end

  for (genvar r = 0; r < NH; r++) begin : g_wb
    phase_t th_new;
    assign th_new     = phase_t'(w_theta[r] + drift_i[r][15:0] + w_score[r]);
    assign wstrb_o[r] = (w_v && tu_valid_i && w_mask[r]) ? (parity_o ? 2'b01 : 2'b10) : 2'b00;
    assign waddr_o[r] = w_addr;
    assign wdata_o[r] = {th_new, th_new};
  end

  assert property (@(posedge clk) disable iff (!rst_n) !(drain_now && ct_cnt == 0))
    else $error("centre-phase FIFO underflow");
  assert property (@(posedge clk) disable iff (!rst_n) !(ctheta_push_i && ct_cnt == ($bits(ct_cnt))'(CTD)))
    else $error("centre-phase FIFO overflow");
  assert property (@(posedge clk) disable iff (!rst_n) w_v |-> tu_valid_i)
    else $error("theta update result not aligned with write-back");

endmodule

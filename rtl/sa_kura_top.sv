// sa_kura_top: SA-Kura drift coprocessor for locally coupled Kuramoto
// diffusion sampling.
//
// For every pixel i of an IMG_H x IMG_W phase map one sampling step computes
//   drift_i = k_nbr*(cos_i*S_i - sin_i*C_i) + K_ref*sin(psi_ref - theta_i)
//             + sigma*z_i
// with S_i, C_i the sums of sin and cos over the 5x5 neighbourhood, and
// writes theta_new = theta + drift + score back to local memory.  The
// trigonometric identity sin(a-b) = sin a cos b - cos a sin b lets the array
// accumulate plain sums, independent of the centre, and apply the centre only
// once at the end.
//
// Blocks and wiring: Local Memory (NH banks) -> Streamer (bank reads, sin/cos
// conversion) -> Column Buffer -> {Row Buffer, PE array (NH x NW)} -> drain
// -> Ref Term Unit + Random Number Generator + Theta Update Unit ->
// Controller (score merge, write-back) -> Local Memory.  The Controller also
// sequences prefill, offset sweep, combine and drain.
//
// Interfaces (plain ports):
//   * configuration, latched at start: k_nbr = K*dt/(25*pi), kref_sin/cos =
//     K_ref*dt*sin/cos(psi_ref)/pi, sigma = sqrt(2*D*dt)/pi (all Q1.15), seed.
//   * host_* : word access to the local memory while the engine is idle
//     (where the platform DMA would attach); reads return one cycle later.
//     Each word is {phase copy 1, phase copy 0}; parity_o says which copy
//     holds the current phase (flips at the end of every step).
//   * score_*: the score-side term, computed outside (host or score-network
//     accelerator), already scaled to a Q1.15 phase increment.  When
//     score_req_o is high, score_i[r] must hold the term for pixel
//     (score_y0_o + r, score_x_o) in the same cycle.
// Timing: one tile every NW + 26 cycles in steady state (prefill NW, sweep 25,
// combine 1, drain overlapped with the next prefill); done_o pulses when the
// whole map has been updated.
module sa_kura_top
  import kura_pkg::*;
#(
  parameter int NH     = 20,
  parameter int NW     = 5,
  parameter int IMG_H  = 96,
  parameter int IMG_W  = 96,
  parameter int DEPTH  = 1024,
  parameter int CB_DEPTH = NW
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 start_i,
  input  q15_t                 cfg_k_nbr_i,
  input  q15_t                 cfg_kref_sin_i,
  input  q15_t                 cfg_kref_cos_i,
  input  q15_t                 cfg_sigma_i,
  input  logic [31:0]          cfg_seed_i,
  output logic                 busy_o,
  output logic                 done_o,
  output logic                 parity_o,
  output logic                 tile_done_o,
  output logic                 stall_o,
  input  logic                 host_re_i,
  input  logic [1:0]           host_wstrb_i,
  input  logic [$clog2(NH)-1:0] host_bank_i,
  input  logic [$clog2(DEPTH)-1:0] host_addr_i,
  input  logic [31:0]          host_wdata_i,
  output logic [31:0]          host_rdata_o,
  output logic                 score_req_o,
  output logic [15:0]          score_y0_o,
  output logic [15:0]          score_x_o,
  input  q15_t [NH-1:0]        score_i
);

  localparam int AW = $clog2(DEPTH);

  // memory ports
  logic [NH-1:0]          m_re, s_re;
  logic [NH-1:0][AW-1:0]  m_raddr, s_raddr, c_waddr, m_waddr;
  logic [NH-1:0][31:0]    m_rdata, c_wdata, m_wdata;
  logic [NH-1:0][1:0]     c_wstrb, m_wstrb;

  // streamer / column buffer
  logic                   stream_busy, stream_start, cb_push, cb_pop, cb_empty, ct_push;
  logic [$clog2(CB_DEPTH+1)-1:0] cb_free;
  sc_t  [NH+HALO-1:0]     cb_col;
  sc_t  [HALO-1:0]        rb_col;
  sc_t  [NH-1:0]          pe_col;
  sc_t  [NW-1:0]          rb_feed;
  phase_t [NH-1:0]        ctheta;

  // control
  logic shift_h, sel_h, down_en, acc_en, acc_first, capture, combine, drain_shift;
  q15_t k_nbr, kref_sin, kref_cos, sigma;
  logic seed_load, rng_next, tu_valid;

  // post-array
  acc_t   [NH-1:0] drain_h, refv, drift;
  sc_t    [NH-1:0] drn_t;
  noise_t [NH-1:0] z;

  // host access while idle
  logic [$clog2(NH)-1:0] host_bank_q;
  always_comb begin
    for (int b = 0; b < NH; b++) begin
      if (busy_o) begin
        m_re[b]    = s_re[b];
        m_raddr[b] = s_raddr[b];
        m_wstrb[b] = c_wstrb[b];
        m_waddr[b] = c_waddr[b];
        m_wdata[b] = c_wdata[b];
      end else begin
        m_re[b]    = host_re_i && (host_bank_i == ($clog2(NH))'(b));
        m_raddr[b] = host_addr_i;
        m_wstrb[b] = (host_bank_i == ($clog2(NH))'(b)) ? host_wstrb_i : 2'b00;
        m_waddr[b] = host_addr_i;
        m_wdata[b] = host_wdata_i;
      end
    end
  end
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) host_bank_q <= '0;
    else if (host_re_i) host_bank_q <= host_bank_i;
  end
  assign host_rdata_o = m_rdata[host_bank_q];

  local_memory #(.NBANK(NH), .DEPTH(DEPTH)) u_mem (
    .clk, .re(m_re), .raddr(m_raddr), .rdata(m_rdata),
    .wstrb(m_wstrb), .waddr(m_waddr), .wdata(m_wdata)
  );

  streamer #(.NH(NH), .NW(NW), .IMG_H(IMG_H), .IMG_W(IMG_W), .DEPTH(DEPTH),
             .CB_DEPTH(CB_DEPTH)) u_streamer (
    .clk, .rst_n, .start_i(stream_start), .parity_i(parity_o), .cb_free_i(cb_free),
    .re_o(s_re), .raddr_o(s_raddr), .rdata_i(m_rdata),
    .push_o(cb_push), .col_o(cb_col), .ctheta_push_o(ct_push), .ctheta_o(ctheta),
    .busy_o(stream_busy)
  );

  column_buffer #(.NH(NH), .DEPTH(CB_DEPTH)) u_cb (
    .clk, .rst_n, .push_i(cb_push), .col_i(cb_col), .pop_i(cb_pop),
    .rb_col_o(rb_col), .pe_col_o(pe_col), .empty_o(cb_empty), .free_o(cb_free)
  );

  row_buffer #(.NW(NW)) u_rb (
    .clk, .rst_n, .shift_h_i(shift_h), .col_i(rb_col), .sel_h_i(sel_h),
    .down_en_i(down_en), .feed_o(rb_feed)
  );

  pe_array #(.NH(NH), .NW(NW)) u_array (
    .clk, .rst_n, .left_col_i(pe_col), .top_row_i(rb_feed),
    .shift_h_i(shift_h), .sel_h_i(sel_h), .down_en_i(down_en), .acc_en_i(acc_en),
    .acc_first_i(acc_first), .capture_i(capture), .combine_i(combine),
    .drain_shift_i(drain_shift), .drain_h_o(drain_h), .drain_t_o(drn_t)
  );

  ref_term_unit #(.LANES(NH)) u_ref (
    .kref_sin_i(kref_sin), .kref_cos_i(kref_cos), .center_i(drn_t), .ref_o(refv)
  );

  rng #(.LANES(NH)) u_rng (
    .clk, .rst_n, .seed_load_i(seed_load), .seed_i(cfg_seed_i), .next_i(rng_next), .z_o(z)
  );

  theta_update_unit #(.LANES(NH)) u_tu (
    .clk, .rst_n, .valid_i(drain_shift), .k_nbr_i(k_nbr), .sigma_i(sigma),
    .core_i(drain_h), .ref_i(refv), .z_i(z), .valid_o(tu_valid), .drift_o(drift)
  );

  controller #(.NH(NH), .NW(NW), .IMG_H(IMG_H), .IMG_W(IMG_W), .DEPTH(DEPTH)) u_ctrl (
    .clk, .rst_n, .start_i,
    .cfg_k_nbr_i, .cfg_kref_sin_i, .cfg_kref_cos_i, .cfg_sigma_i,
    .busy_o, .done_o, .parity_o, .tile_done_o, .stall_o,
    .k_nbr_o(k_nbr), .kref_sin_o(kref_sin), .kref_cos_o(kref_cos), .sigma_o(sigma),
    .seed_load_o(seed_load), .rng_next_o(rng_next),
    .stream_start_o(stream_start), .cb_empty_i(cb_empty), .cb_pop_o(cb_pop),
    .ctheta_push_i(ct_push), .ctheta_i(ctheta),
    .shift_h_o(shift_h), .sel_h_o(sel_h), .down_en_o(down_en), .acc_en_o(acc_en),
    .acc_first_o(acc_first), .capture_o(capture), .combine_o(combine),
    .drain_shift_o(drain_shift),
    .score_req_o, .score_y0_o, .score_x_o, .score_i,
    .tu_valid_i(tu_valid), .drift_i(drift),
    .wstrb_o(c_wstrb), .waddr_o(c_waddr), .wdata_o(c_wdata)
  );

  // every column the Streamer produced has been consumed when a step ends
  assert property (@(posedge clk) disable iff (!rst_n) done_o |-> !stream_busy)
    else $error("streamer still busy at end of step");

endmodule

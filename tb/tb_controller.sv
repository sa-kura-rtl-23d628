`timescale 1ns/1ps
// tb_controller: the Controller alone, with models of the Column Buffer
// (random column arrival, so stalls occur), of the Streamer's centre-phase
// pushes and of the Theta Update Unit.  Two steps are run, the second with
// columns always available.  Checked: NW+4 pops per tile; the tile period
// NW + M*M + 1 when no stall; nothing moves in a stall cycle; the centre is
// captured at the 13th sweep cycle; NW drain cycles per tile with the right
// pixel coordinates; each write-back equals theta + drift + score, in the
// non-current half, masked outside the image; done and the parity swap.
module tb_controller;
  import kura_pkg::*;
  localparam int NH = 4, NW = 3, IMG_H = 10, IMG_W = 11, DEPTH = 64;
  localparam int NTY = (IMG_H + NH - 1) / NH, NTX = (IMG_W + NW - 1) / NW, NT = NTY * NTX;
  localparam int AW = $clog2(DEPTH);
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic start = 0, busy, done, parity, tile_done, stall;
  q15_t kn, ks, kc, sg;
  logic seed_load, rng_next, stream_start, cb_empty, cb_pop, ctp = 0;
  phase_t [NH-1:0] cth = '0;
  logic shift_h, sel_h, down_en, acc_en, acc_first, capture, combine, dshift;
  logic score_req;
  logic [15:0] sy0, sx;
  q15_t [NH-1:0] score;
  logic tu_valid = 0;
  acc_t [NH-1:0] drift = '0;
  logic [NH-1:0][1:0] wstrb;
  logic [NH-1:0][AW-1:0] waddr;
  logic [NH-1:0][31:0] wdata;

  controller #(.NH(NH), .NW(NW), .IMG_H(IMG_H), .IMG_W(IMG_W), .DEPTH(DEPTH)) dut (
    .clk, .rst_n, .start_i(start), .cfg_k_nbr_i(16'sd1), .cfg_kref_sin_i(16'sd2),
    .cfg_kref_cos_i(16'sd3), .cfg_sigma_i(16'sd4),
    .busy_o(busy), .done_o(done), .parity_o(parity), .tile_done_o(tile_done), .stall_o(stall),
    .k_nbr_o(kn), .kref_sin_o(ks), .kref_cos_o(kc), .sigma_o(sg),
    .seed_load_o(seed_load), .rng_next_o(rng_next),
    .stream_start_o(stream_start), .cb_empty_i(cb_empty), .cb_pop_o(cb_pop),
    .ctheta_push_i(ctp), .ctheta_i(cth),
    .shift_h_o(shift_h), .sel_h_o(sel_h), .down_en_o(down_en), .acc_en_o(acc_en),
    .acc_first_o(acc_first), .capture_o(capture), .combine_o(combine), .drain_shift_o(dshift),
    .score_req_o(score_req), .score_y0_o(sy0), .score_x_o(sx), .score_i(score),
    .tu_valid_i(tu_valid), .drift_i(drift), .wstrb_o(wstrb), .waddr_o(waddr), .wdata_o(wdata));

  function automatic int score_of(int y, int x);
    return ((y * 13 + x * 7) % 41) - 20;
  endfunction
  always_comb for (int r = 0; r < NH; r++) score[r] = q15_t'(score_of(int'(sy0) + r, int'(sx)));

  int checks = 0, failures = 0;
  int avail = 0;
  bit always_avail = 0;
  assign cb_empty = (avail == 0) && !always_avail;

  phase_t [NH-1:0] thq [$];
  int push_left = 0;
  int pops_tile = 0, tile_start = 0, cyc = 0, stalls_tile = 0, acc_cnt = 0;
  int drains = 0, n_stall = 0, n_writes = 0, n_period = 0;
  // pending write expectation
  bit pend = 0;
  int p_ty, p_x;
  phase_t [NH-1:0] p_th;
  q15_t [NH-1:0] p_sc;

  // Theta Update Unit model: one-cycle latency
  acc_t [NH-1:0] nxt_drift = '0;
  always @(posedge clk) begin
    tu_valid <= dshift;
    if (dshift) drift <= nxt_drift;
  end

  task automatic fail(string m);
    failures++;
    if (failures < 8) $display("cycle %0d: %s", cyc, m);
  endtask

  always @(negedge clk) if (rst_n) begin
    cyc++;
    // ---- check the write of the previous drain cycle ----
    if (pend) begin
      for (int r = 0; r < NH; r++) begin
        bit in_img;
        logic [15:0] e;
        in_img = (p_ty * NH + r < IMG_H) && (p_x < IMG_W);
        e = 16'(int'(p_th[r]) + int'(drift[r]) + int'(p_sc[r]));
        checks++;
        if (wstrb[r] != (in_img ? (parity ? 2'b01 : 2'b10) : 2'b00)) fail("write strobe");
        if (in_img) begin
          checks++;
          if ((parity ? wdata[r][15:0] : wdata[r][31:16]) != e || waddr[r] != AW'(p_ty * IMG_W + p_x))
            fail("write data/address");
          n_writes++;
        end
      end
    end else begin
      for (int r = 0; r < NH; r++) if (wstrb[r] != 0) fail("spurious write");
    end
    pend = 0;
    // ---- observe this cycle's outputs ----
    if (stall) begin
      n_stall++; stalls_tile++;
      checks++;
      if (shift_h || acc_en || cb_pop || down_en) fail("activity during stall");
    end
    if (cb_pop) begin
      pops_tile++;
      checks++;
      if (cb_empty) fail("pop while empty");
      if (!always_avail) avail--;
    end
    if (acc_en) begin
      if (capture) begin checks++; if (acc_cnt != CENTER_S) fail("capture position"); end
      acc_cnt++;
    end
    if (acc_en && acc_first) push_left = NW;
    if (dshift) begin
      int t, k;
      t = drains / NW; k = drains % NW;
      p_ty = (t % NT) / NTX; p_x = ((t % NT) % NTX) * NW + NW - 1 - k;
      checks++;
      if (!score_req || int'(sy0) != p_ty * NH || int'(sx) != p_x) fail("score request");
      p_th = thq.pop_front();
      p_sc = score;
      pend = 1;
      drains++;
      for (int r = 0; r < NH; r++) nxt_drift[r] = acc_t'($signed(24'($urandom)));
    end
    if (tile_done) begin
      checks++;
      if (pops_tile != NW + HALO) fail("pops per tile");
      checks++;
      if (acc_cnt != SWEEP) fail("sweep length");
      if (stalls_tile == 0 && tile_start > 0) begin
        checks++;
        n_period++;
        if (cyc - tile_start != NW + M * M + 1) fail($sformatf("tile period %0d", cyc - tile_start));
      end
      pops_tile = 0; acc_cnt = 0; stalls_tile = 0;
      tile_start = cyc;
    end
    // ---- drive next cycle's inputs ----
    ctp = 0;
    if (push_left > 0) begin
      for (int r = 0; r < NH; r++) cth[r] = phase_t'($urandom);
      thq.push_back(cth);
      ctp = 1;
      push_left--;
    end
    if (avail < 5 && $urandom_range(1) == 0) avail++;
  end

  task automatic run_step();
    logic p0;
    p0 = parity;
    @(negedge clk); start = 1;
    @(negedge clk); start = 0;
    tile_start = 0;
    wait (done);
    @(negedge clk);
    checks++;
    if (parity == p0) fail("parity");
    checks++;
    if (kn != 1 || ks != 2 || kc != 3 || sg != 4) fail("configuration registers");
  endtask

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1;
    run_step();
    always_avail = 1;
    run_step();
    repeat (3) @(negedge clk);
    checks++;
    if (drains != 2 * NT * NW) fail($sformatf("drains %0d", drains));
    checks++;
    if (n_stall == 0) fail("no stall seen");
    checks++;
    if (n_period == 0) fail("no stall-free tile");
    checks++;
    if (busy) fail("busy after done");
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

`timescale 1ns/1ps
// sa_kura_config_run: test harness that runs one 96 x 96 sampling step on an
// SA-Kura instance of a given array shape (NH x NW) and memory depth, and
// compares every written phase with the same reference model as
// tb_sa_kura_full.  It is instantiated by tb_sa_kura_configs, once per array
// shape.  Tile period: the array needs NW + M*M + 1 cycles per tile.  In the
// first row of tiles the Streamer delivers a column every 2 cycles, i.e.
// 2*(NW+4) cycles per tile, so there the expected period is the larger of
// the two (it differs only for NW > 18); later rows of tiles must run at
// exactly NW + M*M + 1.  The first two tiles (pipeline start) are skipped.
// Interface: clk and rst_n from the parent; done_o rises when the check is
// complete, checks_o/failures_o then hold the counts.
module sa_kura_config_run #(
  parameter int NH    = 10,
  parameter int NW    = 10,
  parameter int DEPTH = 1024,
  parameter int IMG_H = 96,
  parameter int IMG_W = 96
) (
  input  logic clk,
  input  logic rst_n,
  output logic done_o,
  output int   checks_o,
  output int   failures_o
);
  import kura_pkg::*;

  localparam int NTY = (IMG_H + NH - 1) / NH, NTX = (IMG_W + NW - 1) / NW;
  localparam int PERIOD  = NW + M * M + 1;
  localparam int PERIOD0 = (2 * (NW + HALO) > PERIOD) ? 2 * (NW + HALO) : PERIOD;

  logic start = 0;
  q15_t k_nbr, kref_s, kref_c, sigma;
  logic [31:0] seed;
  logic busy, done, parity, tile_done, stall;
  logic host_re = 0;
  logic [1:0] host_wstrb = 0;
  logic [$clog2(NH)-1:0] host_bank = 0;
  logic [$clog2(DEPTH)-1:0] host_addr = 0;
  logic [31:0] host_wdata = 0, host_rdata;
  logic score_req;
  logic [15:0] score_y0, score_x;
  q15_t [NH-1:0] score;

  sa_kura_top #(.NH(NH), .NW(NW), .IMG_H(IMG_H), .IMG_W(IMG_W), .DEPTH(DEPTH)) dut (
    .clk, .rst_n, .start_i(start),
    .cfg_k_nbr_i(k_nbr), .cfg_kref_sin_i(kref_s), .cfg_kref_cos_i(kref_c),
    .cfg_sigma_i(sigma), .cfg_seed_i(seed),
    .busy_o(busy), .done_o(done), .parity_o(parity), .tile_done_o(tile_done), .stall_o(stall),
    .host_re_i(host_re), .host_wstrb_i(host_wstrb), .host_bank_i(host_bank),
    .host_addr_i(host_addr), .host_wdata_i(host_wdata), .host_rdata_o(host_rdata),
    .score_req_o(score_req), .score_y0_o(score_y0), .score_x_o(score_x), .score_i(score)
  );

  // score term supplied by the "outside world": a fixed function of the pixel
  function automatic int score_of(int y, int x);
    return ((y * 37 + x * 11) % 61) - 30;
  endfunction
  always_comb for (int r = 0; r < NH; r++) score[r] = q15_t'(score_of(int'(score_y0) + r, int'(score_x)));

  int checks = 0, failures = 0;
  assign checks_o   = checks;
  assign failures_o = failures;
  int cyc = 0;
  always @(posedge clk) cyc++;

  // ---------------- reference model ----------------
  int lut [LUT_N+1];
  int theta [IMG_H][IMG_W];
  int sn [IMG_H][IMG_W], cs [IMG_H][IMG_W];
  int expect_th [IMG_H][IMG_W];
  logic [31:0] rstate [NH];

  function automatic int q(int g);
    return lut[g >> 2] + (((lut[(g >> 2) + 1] - lut[g >> 2]) * (g & 3)) >>> 2);
  endfunction
  function automatic void sincos(int p, output int s, output int c);
    int f, qa, qb;
    p  = p & 16'hFFFF;
    f  = p & 16383;
    qa = q(f);
    qb = q(16384 - f);
    case (p >> 14)
      0: begin s =  qa; c =  qb; end
      1: begin s =  qb; c = -qa; end
      2: begin s = -qa; c = -qb; end
      default: begin s = -qb; c =  qa; end
    endcase
  endfunction
  function automatic logic [31:0] xs(logic [31:0] x);
    x = x ^ (x << 13); x = x ^ (x >> 17); x = x ^ (x << 5);
    return x;
  endfunction
  function automatic int zval(logic [31:0] st);
    return (int'($signed(st[9:0])) + int'($signed(st[19:10])) + int'($signed(st[29:20]))) * 64;
  endfunction

  task automatic model_step(int kn, int ks, int kc, int sg, logic [31:0] sd);
    longint S, C, core, nbr, rf, nz, drift;
    for (int y = 0; y < IMG_H; y++)
      for (int x = 0; x < IMG_W; x++) sincos(theta[y][x], sn[y][x], cs[y][x]);
    for (int r = 0; r < NH; r++) begin
      rstate[r] = sd ^ (32'h9E37_79B9 * 32'(r + 1));
      if (rstate[r] == 0) rstate[r] = 1;
    end
    for (int ty = 0; ty < NTY; ty++)
      for (int tx = 0; tx < NTX; tx++)
        for (int k = 0; k < NW; k++) begin
          int x;
          x = tx * NW + NW - 1 - k;
          for (int r = 0; r < NH; r++) begin
            int y;
            y = ty * NH + r;
            if (y < IMG_H && x < IMG_W) begin
              S = 0; C = 0;
              for (int dy = -2; dy <= 2; dy++)
                for (int dx = -2; dx <= 2; dx++) begin
                  int yy, xx;
                  yy = y + dy; xx = x + dx;
                  if ((dy != 0 || dx != 0) && yy >= 0 && yy < IMG_H && xx >= 0 && xx < IMG_W) begin
                    S += sn[yy][xx]; C += cs[yy][xx];
                  end
                end
              core  = (longint'(cs[y][x]) * S - longint'(sn[y][x]) * C) >>> 15;
              nbr   = (longint'(kn) * core) >>> 15;
              rf    = (longint'(ks) * cs[y][x] - longint'(kc) * sn[y][x]) >>> 15;
              nz    = (longint'(sg) * zval(rstate[r])) >>> 15;
              drift = nbr + rf + nz;
              expect_th[y][x] = int'(16'(theta[y][x] + drift + score_of(y, x)));
            end
            rstate[r] = xs(rstate[r]);
          end
        end
  endtask

  // ---------------- mechanism counters ----------------
  int n_tiles = 0, n_stall = 0, n_period_ok = 0, n_period_bad = 0, last_tile_cyc = -1;
  always @(posedge clk) if (rst_n) begin
    if (stall) n_stall++;
    if (tile_done) begin
      n_tiles++;
      if (n_tiles > 2) begin
        if (cyc - last_tile_cyc == ((n_tiles <= NTX) ? PERIOD0 : PERIOD)) n_period_ok++;
        else begin
          n_period_bad++;
          if (n_period_bad < 5)
            $display("H%0dW%0d: tile %0d period %0d, expected %0d", NH, NW, n_tiles, cyc - last_tile_cyc, (n_tiles <= NTX) ? PERIOD0 : PERIOD);
        end
      end
      last_tile_cyc = cyc;
    end
  end

  // ---------------- host helpers ----------------
  task automatic host_write(int y, int x, logic [31:0] w);
    @(negedge clk);
    host_bank = ($clog2(NH))'(y % NH);
    host_addr = ($clog2(DEPTH))'((y / NH) * IMG_W + x);
    host_wdata = w;
    host_wstrb = 2'b11;
    @(negedge clk);
    host_wstrb = 2'b00;
  endtask
  task automatic host_read(int y, int x, output logic [31:0] w);
    @(negedge clk);
    host_bank = ($clog2(NH))'(y % NH);
    host_addr = ($clog2(DEPTH))'((y / NH) * IMG_W + x);
    host_re = 1;
    @(negedge clk);
    host_re = 0;
    w = host_rdata;
  endtask

  task automatic run_step(int kn, int ks, int kc, int sg, logic [31:0] sd);
    logic par0;
    logic [31:0] w;
    int got, bad;
    par0 = parity;
    model_step(kn, ks, kc, sg, sd);
    @(negedge clk);
    k_nbr = q15_t'(kn); kref_s = q15_t'(ks); kref_c = q15_t'(kc); sigma = q15_t'(sg); seed = sd;
    start = 1;
    @(negedge clk);
    start = 0;
    wait (done);
    @(negedge clk);
    checks++;
    if (parity == par0) begin failures++; $display("parity did not swap"); end
    bad = 0;
    for (int y = 0; y < IMG_H; y++)
      for (int x = 0; x < IMG_W; x++) begin
        host_read(y, x, w);
        got = parity ? int'($signed(w[31:16])) : int'($signed(w[15:0]));
        checks++;
        if (got != expect_th[y][x]) begin
          failures++;
          bad++;
          if (bad < 8) $display("pixel (%0d,%0d): got %0d expected %0d", y, x, got, expect_th[y][x]);
        end
        theta[y][x] = expect_th[y][x];
      end
  endtask

  initial begin
    done_o = 1'b0;
    for (int k = 0; k < LUT_N; k++) begin
      lut[k] = int'($floor(32768.0 * $sin(k * 3.14159265358979323846 / 8192.0) + 0.5));
      if (lut[k] > 32767) lut[k] = 32767;
    end
    lut[LUT_N] = 32767;
    k_nbr = 0; kref_s = 0; kref_c = 0; sigma = 0; seed = 0;
    wait (rst_n);
    for (int y = 0; y < IMG_H; y++)
      for (int x = 0; x < IMG_W; x++) begin
        theta[y][x] = int'(16'($urandom));
        host_write(y, x, {16'(theta[y][x]), 16'(theta[y][x])});
      end
    run_step(-2500, -300, 2000, 900, 32'hCAFE_F00D ^ 32'(NH * 64 + NW));
    checks++;
    if (n_tiles != NTY * NTX) begin failures++; $display("H%0dW%0d: tiles %0d", NH, NW, n_tiles); end
    checks++;
    if (n_period_ok == 0 || n_period_bad != 0) begin
      failures++;
      $display("H%0dW%0d: periods ok %0d bad %0d", NH, NW, n_period_ok, n_period_bad);
    end
    $display("H%0dW%0d: %0d tiles, %0d cycles per tile (%0d in the first row of tiles), %0d stall cycles, %0d checks, %0d failures",
             NH, NW, n_tiles, PERIOD, PERIOD0, n_stall, checks, failures);
    done_o = 1'b1;
  end
endmodule

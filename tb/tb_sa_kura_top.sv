`timescale 1ns/1ps
// tb_sa_kura_top: end-to-end test of the drift coprocessor on a small array
// and an image whose size is not a multiple of the tile (borders and partial
// tiles are exercised).
//
// The phase map is loaded through the host port, two sampling steps are run
// with different coefficients (the second with noise), and after each step
// every pixel is read back from the current half and compared with a
// reference computed here directly from the definition: 5x5 sums of sin and
// cos (zero outside the image, centre excluded), the centre combine, the
// scalar terms and an independent model of the random generator.  sin/cos are
// rebuilt from $sin with the table rule of the sine unit.
// Also checked: the steady-state tile period NW + M*M + 1, the parity swap,
// and that each mechanism occurred (prefill, centre capture, drain-prefill
// overlap, column-buffer stall, border masking, noise).
module tb_sa_kura_top;
  import kura_pkg::*;

  localparam int NH = 4, NW = 3, IMG_H = 10, IMG_W = 11, DEPTH = 64;
  localparam int NTY = (IMG_H + NH - 1) / NH, NTX = (IMG_W + NW - 1) / NW;
  localparam int WATCHDOG = 200000;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

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
  int n_prefill = 0, n_capture = 0, n_overlap = 0, n_stall = 0, n_masked = 0, n_tiles = 0;
  int n_period_ok = 0, n_period_bad = 0, last_tile_cyc = -1, last_stalls = 0;
  always @(posedge clk) if (rst_n) begin
    if (dut.u_ctrl.in_prefill && dut.shift_h) n_prefill++;
    if (dut.capture && dut.acc_en) n_capture++;
    if (dut.drain_shift && dut.shift_h) n_overlap++;
    if (stall) n_stall++;
    foreach (dut.c_wstrb[r]) if (dut.u_ctrl.w_v && dut.c_wstrb[r] == 2'b00) n_masked++;
    if (tile_done) begin
      n_tiles++;
      if (last_tile_cyc >= 0 && n_stall == last_stalls) begin
        if (cyc - last_tile_cyc == NW + M * M + 1) n_period_ok++;
        else begin
          n_period_bad++;
          $display("tile period %0d, expected %0d", cyc - last_tile_cyc, NW + M * M + 1);
        end
      end
      last_tile_cyc = cyc;
      last_stalls   = n_stall;
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
    for (int k = 0; k < LUT_N; k++) begin
      lut[k] = int'($floor(32768.0 * $sin(k * 3.14159265358979323846 / 8192.0) + 0.5));
      if (lut[k] > 32767) lut[k] = 32767;
    end
    lut[LUT_N] = 32767;
    k_nbr = 0; kref_s = 0; kref_c = 0; sigma = 0; seed = 0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int y = 0; y < IMG_H; y++)
      for (int x = 0; x < IMG_W; x++) begin
        theta[y][x] = int'(16'($urandom));
        host_write(y, x, {16'(theta[y][x]), 16'(theta[y][x])});
      end
    run_step(3000, 1200, -800, 0, 32'h1234_5678);
    run_step(-2500, -300, 2000, 900, 32'hCAFE_F00D);

    // every mechanism must have occurred
    checks++; if (n_prefill == 0) begin failures++; $display("no prefill"); end
    checks++; if (n_capture != 2 * NTY * NTX) begin failures++; $display("captures %0d", n_capture); end
    checks++; if (n_overlap == 0) begin failures++; $display("no drain-prefill overlap"); end
    checks++; if (n_stall == 0) begin failures++; $display("no stall"); end
    checks++; if (n_masked == 0) begin failures++; $display("no masked write"); end
    checks++; if (n_tiles != 2 * NTY * NTX) begin failures++; $display("tiles %0d", n_tiles); end
    checks++; if (n_period_ok == 0 || n_period_bad != 0) begin failures++; $display("periods ok %0d bad %0d", n_period_ok, n_period_bad); end
    $display("mechanisms: prefill=%0d capture=%0d overlap=%0d stall=%0d masked=%0d tiles=%0d periods_ok=%0d",
             n_prefill, n_capture, n_overlap, n_stall, n_masked, n_tiles, n_period_ok);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (WATCHDOG) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

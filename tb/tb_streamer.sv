`timescale 1ns/1ps
// tb_streamer: the Streamer reading a small banked memory model (synchronous
// read, current phases in the upper half) into a Column Buffer model that
// drains at random times.  Every pushed column must be the sin/cos of the
// expected halo-field column (tiles in order, columns right to left, zero
// outside the image), every centre column must also appear on ctheta with
// its raw phases, the buffer must never overflow, and the reads must never
// use a bank twice in a cycle (implied by one port per bank, checked here by
// the read pattern).
module tb_streamer;
  import kura_pkg::*;
  localparam int NH = 4, NW = 3, IMG_H = 10, IMG_W = 7, DEPTH = 32, CBD = 3;
  localparam int NTY = (IMG_H + NH - 1) / NH, NTX = (IMG_W + NW - 1) / NW;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic start = 0, push, ctp, busy;
  logic [$clog2(CBD+1)-1:0] cb_free;
  logic [NH-1:0] re;
  logic [NH-1:0][$clog2(DEPTH)-1:0] raddr;
  logic [NH-1:0][31:0] rdata;
  sc_t [NH+HALO-1:0] col;
  phase_t [NH-1:0] cth;
  int checks = 0, failures = 0;
  int occ = 0;
  logic [31:0] mem [NH][DEPTH];
  int theta [IMG_H][IMG_W];
  int lut [LUT_N+1];
  int ncol = 0, nct = 0;

  streamer #(.NH(NH), .NW(NW), .IMG_H(IMG_H), .IMG_W(IMG_W), .DEPTH(DEPTH), .CB_DEPTH(CBD)) dut (
    .clk, .rst_n, .start_i(start), .parity_i(1'b1), .cb_free_i(cb_free),
    .re_o(re), .raddr_o(raddr), .rdata_i(rdata), .push_o(push), .col_o(col),
    .ctheta_push_o(ctp), .ctheta_o(cth), .busy_o(busy));

  always_ff @(posedge clk) for (int b = 0; b < NH; b++) if (re[b]) rdata[b] <= mem[b][raddr[b]];
  assign cb_free = ($bits(cb_free))'(CBD - occ);

  function automatic int q(int g);
    return lut[g >> 2] + (((lut[(g >> 2) + 1] - lut[g >> 2]) * (g & 3)) >>> 2);
  endfunction
  function automatic void sincos(int p, output int s, output int c);
    int f, qa, qb;
    p = p & 16'hFFFF; f = p & 16383; qa = q(f); qb = q(16384 - f);
    case (p >> 14)
      0: begin s =  qa; c =  qb; end
      1: begin s =  qb; c = -qa; end
      2: begin s = -qa; c = -qb; end
      default: begin s = -qb; c =  qa; end
    endcase
  endfunction

  // column buffer model: random pops
  always @(posedge clk) if (rst_n) begin
    int o;
    o = occ;
    if (push) begin
      int t, i, ty, tx, x;
      t = ncol / (NW + HALO); i = ncol % (NW + HALO);
      ty = t / NTX; tx = t % NTX; x = tx * NW + NW + 1 - i;
      for (int k = 0; k < NH + HALO; k++) begin
        int y, es, ec;
        y = ty * NH - 2 + k;
        es = 0; ec = 0;
        if (y >= 0 && y < IMG_H && x >= 0 && x < IMG_W) sincos(theta[y][x], es, ec);
        checks++;
        if (int'(col[k].s) != es || int'(col[k].c) != ec) begin
          failures++;
          if (failures < 6) $display("col %0d k %0d: (%0d,%0d) expected (%0d,%0d)", ncol, k, col[k].s, col[k].c, es, ec);
        end
      end
      ncol++;
      o++;
      checks++;
      if (o > CBD) begin failures++; $display("column buffer overflow"); end
    end
    if (ctp) begin
      int t, i, ty, tx, x;
      t = nct / NW; i = nct % NW;
      ty = t / NTX; tx = t % NTX; x = tx * NW + NW - 1 - i;
      for (int r = 0; r < NH; r++) begin
        if (ty * NH + r < IMG_H && x < IMG_W) begin
          checks++;
          if (int'(cth[r]) != theta[ty * NH + r][x]) failures++;
        end
      end
      nct++;
    end
    if (o > 0 && $urandom_range(2) == 0) o--;
    occ <= o;
  end

  initial begin
    for (int k = 0; k < LUT_N; k++) begin
      lut[k] = int'($floor(32768.0 * $sin(k * 3.14159265358979323846 / 8192.0) + 0.5));
      if (lut[k] > 32767) lut[k] = 32767;
    end
    lut[LUT_N] = 32767;
    for (int b = 0; b < NH; b++) for (int a = 0; a < DEPTH; a++) mem[b][a] = $urandom;
    for (int y = 0; y < IMG_H; y++)
      for (int x = 0; x < IMG_W; x++) begin
        theta[y][x] = int'($signed(16'($urandom)));
        mem[y % NH][(y / NH) * IMG_W + x][31:16] = 16'(theta[y][x]);
      end
    repeat (2) @(negedge clk);
    rst_n = 1;
    @(negedge clk); start = 1;
    @(negedge clk); start = 0;
    wait (!busy);
    repeat (3) @(negedge clk);
    checks++;
    if (ncol != NTY * NTX * (NW + HALO)) begin failures++; $display("columns %0d", ncol); end
    checks++;
    if (nct != NTY * NTX * NW) begin failures++; $display("centre columns %0d", nct); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

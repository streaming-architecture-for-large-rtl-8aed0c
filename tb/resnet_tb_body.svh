// resnet_tb_body.svh: shared body of the ResNet-18 end-to-end testbenches.
//
// The including module defines the localparams IMG, IN_CH, IN_BITS, BASE_CH,
// NUM_CLASSES, N_IMAGES, RANDOM_STALLS and WATCHDOG, and instantiates
// resnet18_top as `dut` after this file. The body builds random binary
// weights (sent as 32-bit floats) and normalization thresholds, random
// images, computes the expected class scores with a plain loop-based model of
// the network (no line buffers, no streaming), streams everything into the
// design and compares every score. It also counts how often each streaming
// mechanism occurred and fails if one never did.

import qnn_pkg::*;

localparam int ACT = 2;
localparam int NB  = 8;
localparam int NL  = 2 * NB + 2;  // conv1, (convA, residual) x 8, fc

logic clk = 1'b0;
always #5 clk = ~clk;
logic rst_n;

logic              param_valid;
param_t            param_data;
logic              loaded;
logic              img_valid, img_ready;
logic [IN_BITS-1:0] img_data;
logic              score_valid, score_ready;
sum_t              score_data;
logic [CNT_W-1:0]  score_class;

int checks = 0, failures = 0;
longint cycle = 0;

// layer geometry
int L_I[NL], L_O[NL], L_K[NL];
bit L_BN[NL];
longint woff[NL];
bit     wflat[$];
int     tau_q[NL][$];
int     del_q[NL][$];
param_t plist[$];
int     pix[$];
int     expect_q[$];

function automatic int chs(int s); return BASE_CH << s; endfunction
function automatic int hws(int s); return (IMG / 4) >> s; endfunction

function automatic int isqrt(longint v);
  int r = 0;
  while (longint'(r + 1) * (r + 1) <= v) r++;
  return r;
endfunction

function automatic int bn_ref(int s, int tau, int delta, int bits);
  int cnt = 0;
  for (int j = 1; j < (1 << bits); j++)
    if (longint'(s) >= longint'(tau) + longint'(j - (1 << (bits - 1))) * longint'(delta)) cnt++;
  return cnt;
endfunction

function automatic int sat16(longint v);
  if (v > 32767) return 32767;
  if (v < -32768) return -32768;
  return int'(v);
endfunction

// Convolution of a code tensor (H x W x I) with layer lay's binary weights:
// raw sums, Ho x Wo x O, padding value -1.
function automatic void conv_ref(input int inp[$], input int H, input int W, input int lay,
                                 input int S, input int P, input int bits,
                                 output int outp[$], output int Ho);
  int I = L_I[lay], O = L_O[lay], K = L_K[lay];
  int Wo;
  Ho = (H + 2 * P - K) / S + 1;
  Wo = (W + 2 * P - K) / S + 1;
  outp = {};
  for (int oy = 0; oy < Ho; oy++)
    for (int ox = 0; ox < Wo; ox++)
      for (int o = 0; o < O; o++) begin
        int s = 0;
        for (int ky = 0; ky < K; ky++)
          for (int kx = 0; kx < K; kx++) begin
            int iy = oy * S + ky - P;
            int ix = ox * S + kx - P;
            for (int c = 0; c < I; c++) begin
              int v, w;
              if (iy >= 0 && iy < H && ix >= 0 && ix < W)
                v = 2 * inp[(iy * W + ix) * I + c] - ((1 << bits) - 1);
              else
                v = -1;
              w = wflat[woff[lay] + ((o * K + ky) * K + kx) * I + c] ? 1 : -1;
              s += w * v;
            end
          end
        outp.push_back(s);
      end
endfunction

function automatic void make_params();
  L_I[0] = IN_CH; L_O[0] = BASE_CH; L_K[0] = 7; L_BN[0] = 1;
  for (int k = 0; k < NB; k++) begin
    int st = k / 2;
    bit down = (k % 2 == 0) && (st > 0);
    L_I[1+2*k] = down ? chs(st - 1) : chs(st); L_O[1+2*k] = chs(st); L_K[1+2*k] = 3; L_BN[1+2*k] = 1;
    L_I[2+2*k] = chs(st); L_O[2+2*k] = chs(st); L_K[2+2*k] = 3; L_BN[2+2*k] = 1;
  end
  L_I[NL-1] = chs(3); L_O[NL-1] = NUM_CLASSES; L_K[NL-1] = 1; L_BN[NL-1] = 0;
  for (int l = 0; l < NL; l++) begin
    int n = L_K[l] * L_K[l] * L_I[l];
    int rms = (l == 0) ? (1 << (IN_BITS - 1)) : 2;
    int sigma = isqrt(longint'(n)) * rms + 1;
    woff[l] = wflat.size();
    for (int i = 0; i < n * L_O[l]; i++) begin
      bit b = 1'($urandom);
      wflat.push_back(b);
      // Sign of the float decides the weight; the magnitude is irrelevant.
      if (b && ($urandom % 16 == 0)) plist.push_back(32'h0000_0000);  // +0.0 -> +1
      else plist.push_back({~b, 8'h7d + 8'($urandom % 4), 23'($urandom)});
    end
    if (L_BN[l])
      for (int o = 0; o < L_O[l]; o++) begin
        int t = int'($urandom % (sigma + 1)) - sigma / 2;
        int d = sigma / 3 + 1 + int'($urandom % (sigma / 4 + 1));
        tau_q[l].push_back(t);
        del_q[l].push_back(d);
        plist.push_back(t);
        plist.push_back(d);
      end
  end
endfunction

// Whole-network reference for one image; appends NUM_CLASSES scores.
function automatic void network_ref(input int img[$]);
  int a[$], s[$], t[$], skip[$], nskip[$];
  int h, h2, c;
  // conv1 + BN
  conv_ref(img, IMG, IMG, 0, 2, 3, IN_BITS, s, h);
  a = {};
  for (int i = 0; i < s.size(); i++) a.push_back(bn_ref(s[i], tau_q[0][i % BASE_CH], del_q[0][i % BASE_CH], ACT));
  // max pool 3x3 / 2, pad 1 (padding never wins)
  h2 = (h + 2 - 3) / 2 + 1;
  t = {};
  for (int oy = 0; oy < h2; oy++)
    for (int ox = 0; ox < h2; ox++)
      for (int ch = 0; ch < BASE_CH; ch++) begin
        int m = 0;
        for (int ky = 0; ky < 3; ky++)
          for (int kx = 0; kx < 3; kx++) begin
            int iy = oy * 2 + ky - 1, ix = ox * 2 + kx - 1;
            if (iy >= 0 && iy < h && ix >= 0 && ix < h && a[(iy * h + ix) * BASE_CH + ch] > m)
              m = a[(iy * h + ix) * BASE_CH + ch];
          end
        t.push_back(m);
      end
  a = t; h = h2; c = BASE_CH;
  skip = {};
  foreach (a[i]) skip.push_back(2 * a[i] - 3);
  for (int k = 0; k < NB; k++) begin
    int st = k / 2;
    bit down = (k % 2 == 0) && (st > 0);
    int co = chs(st);
    int la = 1 + 2 * k, lr = 2 + 2 * k;
    int ho;
    conv_ref(a, h, h, la, down ? 2 : 1, 1, ACT, s, ho);
    t = {};
    for (int i = 0; i < s.size(); i++) t.push_back(bn_ref(s[i], tau_q[la][i % co], del_q[la][i % co], ACT));
    if (down) begin
      nskip = {};
      for (int r = 0; r < ho; r++)
        for (int q = 0; q < ho; q++)
          for (int ch = 0; ch < co; ch++)
            nskip.push_back(ch < c ? skip[((2 * r) * h + 2 * q) * c + ch] : 0);
      skip = nskip;
    end
    conv_ref(t, ho, ho, lr, 1, 1, ACT, s, h2);
    a = {};
    nskip = {};
    for (int i = 0; i < s.size(); i++) begin
      int v = sat16(longint'(s[i]) + longint'(skip[i]));
      nskip.push_back(v);
      a.push_back(bn_ref(v, tau_q[lr][i % co], del_q[lr][i % co], ACT));
    end
    skip = nskip; h = ho; c = co;
  end
  // global average pool, rounded to the nearest code
  t = {};
  for (int ch = 0; ch < c; ch++) begin
    int sum = 0;
    for (int i = 0; i < h * h; i++) sum += a[i * c + ch];
    t.push_back((sum + (h * h) / 2) / (h * h));
  end
  conv_ref(t, 1, 1, NL - 1, 1, 0, ACT, s, h2);
  foreach (s[i]) expect_q.push_back(s[i]);
endfunction

// ---------------- stimulus ----------------
int  pidx = 0, iidx = 0, oidx = 0;
bit  pgate, igate, ogate;
bit  started = 0;

always_comb begin
  param_valid = started && (pidx < plist.size()) && pgate;
  param_data  = (pidx < plist.size()) ? plist[pidx] : '0;
  img_valid   = started && loaded && (iidx < pix.size()) && igate;  // images after loading
  img_data    = (iidx < pix.size()) ? IN_BITS'(pix[iidx]) : '0;
  score_ready = ogate;
end

always @(posedge clk) begin
  cycle <= cycle + 1;
  pgate <= RANDOM_STALLS ? ($urandom % 8 != 0) : 1'b1;
  igate <= RANDOM_STALLS ? ($urandom % 4 != 0) : 1'b1;
  ogate <= RANDOM_STALLS ? ($urandom % 4 != 0) : 1'b1;
  if (param_valid) pidx <= pidx + 1;
  if (img_valid && img_ready) iidx <= iidx + 1;
  if (score_valid && score_ready) begin
    checks++;
    if (score_data !== expect_q[oidx] || score_class != CNT_W'(oidx % NUM_CLASSES)) begin
      failures++;
      if (failures < 10)
        $display("score %0d: got %0d class %0d, expected %0d class %0d", oidx, score_data,
                 score_class, expect_q[oidx], oidx % NUM_CLASSES);
    end
    oidx <= oidx + 1;
  end
end

// ---------------- mechanism counters ----------------
longint n_halt = 0, n_pad = 0, n_stride = 0, n_skipadd = 0, n_dszero = 0;
longint n_maxpool = 0, n_avgpool = 0, n_fwd = 0, n_backp = 0, n_fifo_wait = 0;

always @(posedge clk) begin
  if (dut.u_conv1.out_valid && img_valid) n_halt++;  // computing, input held off
  if (dut.u_conv1.shift_en && dut.u_conv1.is_pad) n_pad++;
  if (dut.u_conv1.shift_en && dut.u_conv1.last_ch && !dut.u_conv1.win_ok &&
      dut.u_conv1.row >= 6 && dut.u_conv1.col >= 6) n_stride++;
  if (dut.g_blk[0].u_res.fire) n_skipadd++;
  if (dut.g_blk[0].u_res.f_valid && !dut.g_blk[0].u_res.c_valid) n_fifo_wait++;
  if (dut.g_blk[2].g_down.u_ds.zeros && dut.g_blk[2].g_down.u_ds.out_ready) n_dszero++;
  if (dut.u_pool1.out_valid && dut.u_pool1.out_ready) n_maxpool++;
  if (dut.u_pool2.out_valid && dut.u_pool2.out_ready) n_avgpool++;
  if (dut.u_conv1.fwd) n_fwd++;
  if (score_valid && !score_ready) n_backp++;
end

task automatic need(string name, longint n);
  checks++;
  $display("mechanism %-28s %0d", name, n);
  if (n == 0) begin
    failures++;
    $display("mechanism %s never happened", name);
  end
endtask

initial begin
  rst_n = 1'b1;
  #1 rst_n = 1'b0;
  make_params();
  for (int im = 0; im < N_IMAGES; im++) begin
    automatic int img[$];
    for (int i = 0; i < IMG * IMG * IN_CH; i++) img.push_back(int'($urandom % (1 << IN_BITS)));
    network_ref(img);
    foreach (img[i]) pix.push_back(img[i]);
  end
  $display("parameters: %0d words, pixels: %0d, expected scores: %0d", plist.size(), pix.size(),
           expect_q.size());
  repeat (3) @(posedge clk);
  rst_n <= 1'b1;
  @(posedge clk);
  started <= 1'b1;
  wait (loaded);
  $display("all layers loaded at cycle %0d", cycle);
  checks++;
  if (pidx != plist.size()) begin
    failures++;
    $display("loaded before all parameters were sent (%0d of %0d)", pidx, plist.size());
  end
  begin
    automatic longint t0 = cycle;
    wait (oidx == expect_q.size());
    $display("%0d image(s) classified in %0d cycles after loading", N_IMAGES, cycle - t0);
    // Without stalls the pipeline runs at the pace of conv1, its slowest
    // layer: (IMG+6)^2*IN_CH + (IMG/2)^2*BASE_CH cycles per image. One image
    // must take at least that and at most a quarter more (fill and drain).
    if (!RANDOM_STALLS) begin
      automatic longint c1 = longint'(IMG + 6) * (IMG + 6) * IN_CH + longint'(IMG / 2) * (IMG / 2) * BASE_CH;
      checks++;
      if (cycle - t0 < c1 * N_IMAGES || cycle - t0 > c1 * N_IMAGES + c1 / 4) begin
        failures++;
        $display("latency %0d outside [%0d, %0d]", cycle - t0, c1 * N_IMAGES, c1 * N_IMAGES + c1 / 4);
      end
    end
  end
  repeat (5) @(posedge clk);
  need("input halt (conv1)", n_halt);
  need("padding insertion (conv1)", n_pad);
  need("stride skip (conv1)", n_stride);
  need("skip add (block 0)", n_skipadd);
  need("skip buffer holding (block 0)", n_fifo_wait);
  need("downsample zero channels", n_dszero);
  need("max pool outputs", n_maxpool);
  need("average pool outputs", n_avgpool);
  need("parameter forwarding", n_fwd);
  if (RANDOM_STALLS) need("output back-pressure", n_backp);
  $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
  $finish;
end

initial begin
  repeat (WATCHDOG) @(posedge clk);
  failures++;
  $display("watchdog expired at cycle %0d (scores %0d of %0d)", cycle, oidx, expect_q.size());
  $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
  $finish;
end

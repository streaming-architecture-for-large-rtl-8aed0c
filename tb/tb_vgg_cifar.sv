// tb_vgg_cifar: the VGG-like CIFAR-10 network built from the same layer
// kernels as the ResNet, run end to end at reduced size.
//
// Network: three groups of (3x3 conv, 3x3 conv, 2x2/2 max pool), all
// convolutions padded by 1 with BatchNorm + 2-bit activation, then three
// fully connected layers written as convolutions: FC1 covers the whole final
// map (K = map size, no padding), FC2 and FC3 are 1x1. FC3 has no BatchNorm
// and gives raw class scores. The group structure follows the evaluated
// network; the widths here (4, 8, 8 maps; 16, 16 neurons; 10 classes) and the
// 16x16 input are reduced so the test runs in seconds (the evaluated sizes
// are 32x32 and 64/128/256 maps).
//
// The testbench streams random float weights and thresholds along the
// parameter daisy chain of all nine convolution layers, then random 8-bit
// images, and compares every class score with a loop-based model of the
// network. Random stalls on the input and output streams exercise the
// back-pressure between the kernels.
module tb_vgg_cifar;
  import qnn_pkg::*;
  localparam int IMG = 16, IN_CH = 3, IN_BITS = 8, ACT = 2;
  localparam int C1 = 4, C2 = 8, C3 = 8, F1 = 16, F2 = 16, NCLS = 10;
  localparam int NL = 9, N_IMAGES = 2;

  logic clk = 1'b0;
  always #5 clk = ~clk;
  logic rst_n;
  int checks = 0, failures = 0;
  longint cycle = 0;
  always @(posedge clk) cycle++;

  // ---------------- layer table ----------------
  int L_I[NL] = '{IN_CH, C1, C1, C2, C2, C3, C3, F1, F2};
  int L_O[NL] = '{C1, C1, C2, C2, C3, C3, F1, F2, NCLS};
  int L_K[NL] = '{3, 3, 3, 3, 3, 3, IMG / 8, 1, 1};
  int L_P[NL] = '{1, 1, 1, 1, 1, 1, 0, 0, 0};
  bit L_BN[NL] = '{1, 1, 1, 1, 1, 1, 1, 1, 0};
  longint woff[NL];
  bit     wflat[$];
  int     tau_q[NL][$];
  int     del_q[NL][$];
  param_t plist[$];
  int     pix[$];
  int     expect_q[$];

  function automatic int isqrt(longint v);
    int r = 0;
    while (longint'(r + 1) * (r + 1) <= v) r++;
    return r;
  endfunction

  function automatic int bn_ref(int s, int tau, int delta);
    int cnt = 0;
    for (int j = 1; j < (1 << ACT); j++)
      if (longint'(s) >= longint'(tau) + longint'(j - (1 << (ACT - 1))) * longint'(delta)) cnt++;
    return cnt;
  endfunction

  // layer lay on an H x H x I code tensor; returns codes (BN) or raw sums
  function automatic void layer_ref(input int inp[$], input int H, input int lay, input int bits,
                                    output int outp[$], output int Ho);
    int I = L_I[lay], O = L_O[lay], K = L_K[lay], P = L_P[lay];
    Ho = H + 2 * P - K + 1;
    outp = {};
    for (int oy = 0; oy < Ho; oy++)
      for (int ox = 0; ox < Ho; ox++)
        for (int o = 0; o < O; o++) begin
          int s = 0;
          for (int ky = 0; ky < K; ky++)
            for (int kx = 0; kx < K; kx++)
              for (int c = 0; c < I; c++) begin
                int iy = oy + ky - P, ix = ox + kx - P, v;
                if (iy >= 0 && iy < H && ix >= 0 && ix < H) v = 2 * inp[(iy * H + ix) * I + c] - ((1 << bits) - 1);
                else v = -1;
                s += (wflat[woff[lay] + ((o * K + ky) * K + kx) * I + c] ? 1 : -1) * v;
              end
          outp.push_back(L_BN[lay] ? bn_ref(s, tau_q[lay][o], del_q[lay][o]) : s);
        end
  endfunction

  function automatic void pool_ref(input int inp[$], input int H, input int C,
                                   output int outp[$]);
    outp = {};
    for (int oy = 0; oy < H / 2; oy++)
      for (int ox = 0; ox < H / 2; ox++)
        for (int c = 0; c < C; c++) begin
          int m = 0;
          for (int ky = 0; ky < 2; ky++)
            for (int kx = 0; kx < 2; kx++)
              if (inp[((2 * oy + ky) * H + 2 * ox + kx) * C + c] > m) m = inp[((2 * oy + ky) * H + 2 * ox + kx) * C + c];
          outp.push_back(m);
        end
  endfunction

  function automatic void make_params();
    for (int l = 0; l < NL; l++) begin
      int n = L_K[l] * L_K[l] * L_I[l];
      int sigma = isqrt(longint'(n)) * ((l == 0) ? (1 << (IN_BITS - 1)) : 2) + 1;
      woff[l] = wflat.size();
      for (int i = 0; i < n * L_O[l]; i++) begin
        bit b = 1'($urandom);
        wflat.push_back(b);
        plist.push_back({~b, 8'h7e, 23'($urandom)});  // sign decides the weight
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

  function automatic void network_ref(input int img[$]);
    int a[$], b[$], h, h2;
    h = IMG;
    a = img;
    for (int g = 0; g < 3; g++) begin
      layer_ref(a, h, 2 * g, (g == 0) ? IN_BITS : ACT, b, h2);
      layer_ref(b, h2, 2 * g + 1, ACT, a, h);
      pool_ref(a, h, L_O[2 * g + 1], b);
      a = b;
      h = h / 2;
    end
    for (int l = 6; l < NL; l++) begin
      layer_ref(a, h, l, ACT, b, h2);
      a = b;
      h = h2;
    end
    foreach (a[i]) expect_q.push_back(a[i]);
  endfunction

  // ---------------- the network ----------------
  logic   pv [0:NL];
  param_t pd [0:NL];
  logic   ld [0:NL-1];
  // stream k is the input of stage k (stages: c0 c1 p0 c2 c3 p1 c4 c5 p2 f6 f7 f8)
  localparam int NS = 12;
  logic         sv [0:NS];
  logic         sr [0:NS];
  logic [7:0]   sd [0:NS];
  sum_t         score;
  logic [CNT_W-1:0] score_ch;

  for (genvar g = 0; g < 3; g++) begin : g_grp
    localparam int H = IMG >> g;
    localparam int LA = 2 * g, LB = 2 * g + 1;
    localparam int IA = (g == 0) ? IN_CH : ((g == 1) ? C1 : C2);
    localparam int OA = (g == 0) ? C1 : ((g == 1) ? C2 : C3);
    sum_t a_sum, b_sum;
    logic [CNT_W-1:0] a_ch, b_ch;
    logic [ACT-1:0] a_act, b_act, p_out;
    conv_layer #(.IN_BITS(g == 0 ? IN_BITS : ACT), .ACT_BITS(ACT), .I(IA), .O(OA), .H(H), .W(H),
                 .K(3), .S(1), .P(1), .HAS_BN(1'b1)) u_a (
      .clk, .rst_n, .param_in_valid(pv[LA]), .param_in_data(pd[LA]),
      .param_out_valid(pv[LA+1]), .param_out_data(pd[LA+1]), .loaded(ld[LA]),
      .in_valid(sv[3*g]), .in_ready(sr[3*g]), .in_data(sd[3*g][(g == 0 ? IN_BITS : ACT)-1:0]),
      .out_valid(sv[3*g+1]), .out_ready(sr[3*g+1]), .out_sum(a_sum), .out_act(a_act), .out_ch(a_ch));
    assign sd[3*g+1] = 8'(a_act);
    conv_layer #(.IN_BITS(ACT), .ACT_BITS(ACT), .I(OA), .O(OA), .H(H), .W(H),
                 .K(3), .S(1), .P(1), .HAS_BN(1'b1)) u_b (
      .clk, .rst_n, .param_in_valid(pv[LB]), .param_in_data(pd[LB]),
      .param_out_valid(pv[LB+1]), .param_out_data(pd[LB+1]), .loaded(ld[LB]),
      .in_valid(sv[3*g+1]), .in_ready(sr[3*g+1]), .in_data(sd[3*g+1][ACT-1:0]),
      .out_valid(sv[3*g+2]), .out_ready(sr[3*g+2]), .out_sum(b_sum), .out_act(b_act), .out_ch(b_ch));
    assign sd[3*g+2] = 8'(b_act);
    pool_layer #(.BITS(ACT), .I(OA), .H(H), .W(H), .K(2), .S(2), .P(0), .MODE(POOL_MAX)) u_p (
      .clk, .rst_n, .in_valid(sv[3*g+2]), .in_ready(sr[3*g+2]), .in_data(sd[3*g+2][ACT-1:0]),
      .out_valid(sv[3*g+3]), .out_ready(sr[3*g+3]), .out_data(p_out));
    assign sd[3*g+3] = 8'(p_out);
  end

  for (genvar f = 0; f < 3; f++) begin : g_fc
    localparam int L = 6 + f;
    localparam int HI = (f == 0) ? IMG / 8 : 1;
    localparam int FI = (f == 0) ? C3 : ((f == 1) ? F1 : F2);
    localparam int FO = (f == 0) ? F1 : ((f == 1) ? F2 : NCLS);
    sum_t o_sum;
    logic [ACT-1:0] o_act;
    logic [CNT_W-1:0] o_ch;
    conv_layer #(.IN_BITS(ACT), .ACT_BITS(ACT), .I(FI), .O(FO), .H(HI), .W(HI),
                 .K(HI), .S(1), .P(0), .HAS_BN(f != 2)) u_fc (
      .clk, .rst_n, .param_in_valid(pv[L]), .param_in_data(pd[L]),
      .param_out_valid(pv[L+1]), .param_out_data(pd[L+1]), .loaded(ld[L]),
      .in_valid(sv[9+f]), .in_ready(sr[9+f]), .in_data(sd[9+f][ACT-1:0]),
      .out_valid(sv[10+f]), .out_ready(sr[10+f]), .out_sum(o_sum), .out_act(o_act), .out_ch(o_ch));
    if (f < 2) begin : g_act
      assign sd[10+f] = 8'(o_act);
    end else begin : g_score
      assign sd[10+f] = '0;
      assign score    = o_sum;
      assign score_ch = o_ch;
    end
  end

  logic loaded;
  always_comb begin
    loaded = 1'b1;
    for (int i = 0; i < NL; i++) loaded &= ld[i];
  end

  // ---------------- drivers ----------------
  bit started = 0;
  int pidx = 0, iidx = 0, oidx = 0;
  bit igate, ogate;
  longint n_backp = 0, n_halt = 0;
  always_comb begin
    pv[0]    = started && (pidx < plist.size());
    pd[0]    = (pidx < plist.size()) ? plist[pidx] : '0;
    sv[0]    = started && loaded && (iidx < pix.size()) && igate;
    sd[0]    = (iidx < pix.size()) ? 8'(pix[iidx]) : '0;
    sr[NS]   = ogate;
  end
  always @(posedge clk) begin
    igate <= ($urandom % 8) != 0;
    ogate <= ($urandom % 4) != 0;
    if (pv[0]) pidx <= pidx + 1;
    if (sv[0] && sr[0]) iidx <= iidx + 1;
    if (sv[NS] && !sr[NS]) n_backp++;
    if (g_grp[0].u_a.out_valid && sv[0]) n_halt++;
    if (sv[NS] && sr[NS]) begin
      checks++;
      if (oidx >= expect_q.size() || score !== expect_q[oidx] || int'(score_ch) != oidx % NCLS) begin
        failures++;
        $display("score %0d: got %0d class %0d", oidx, score, score_ch);
      end
      oidx <= oidx + 1;
    end
  end

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
    repeat (3) @(posedge clk);
    rst_n <= 1'b1;
    @(posedge clk);
    started <= 1'b1;
    wait (loaded);
    checks++;
    if (pidx != plist.size()) failures++;
    wait (oidx == expect_q.size());
    repeat (10) @(posedge clk);
    checks += 3;
    if (pv[NL]) failures++;             // nothing left over on the chain
    if (n_backp == 0) failures++;
    if (n_halt == 0) failures++;
    $display("%0d images, %0d scores, back-pressure %0d, conv halts %0d", N_IMAGES, oidx, n_backp, n_halt);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2_000_000) @(posedge clk);
    failures++;
    $display("watchdog expired (scores %0d of %0d)", oidx, expect_q.size());
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

// tb_conv_layer: a small strided, padded convolution (6 x 5 x 3 input,
// 4 filters, 3x3, stride 2, pad 1). Loads weights and normalization words
// through the parameter port, checks that the words after them come out of
// param_out in order, streams four images and compares every raw sum,
// activation code and channel index with a loop-based reference. The first
// two images run without stalls, and the distance between the first outputs
// of image 0 and image 1 must be (H+2P)*(W+2P)*I + Ho*Wo*O cycles; the last
// two run with random gaps on both streams.
module tb_conv_layer;
  import qnn_pkg::*;
  localparam int IB = 2, I = 3, O = 4, H = 6, W = 5, K = 3, S = 2, P = 1;
  localparam int HO = (H + 2 * P - K) / S + 1, WO = (W + 2 * P - K) / S + 1;
  localparam int NIMG = 4, EXTRA = 5;

  logic clk = 1'b0;
  always #5 clk = ~clk;
  logic rst_n, param_in_valid, param_out_valid, loaded;
  param_t param_in_data, param_out_data;
  logic in_valid, in_ready, out_valid, out_ready;
  logic [IB-1:0] in_data;
  sum_t out_sum;
  logic [1:0] out_act;
  logic [CNT_W-1:0] out_ch;

  conv_layer #(.IN_BITS(IB), .ACT_BITS(2), .I(I), .O(O), .H(H), .W(W), .K(K), .S(S), .P(P),
               .HAS_BN(1'b1)) dut (.*);

  int checks = 0, failures = 0;
  bit wt[O][K][K][I];
  int tau[O], del[O];
  param_t plist[$];
  int pix[$], exp_sum[$], exp_act[$], exp_ch[$];
  int pidx = 0, iidx = 0, oidx = 0, fwd_idx = 0;
  bit stall;
  bit ig, og;
  longint cycle = 0, first_out[NIMG];

  function automatic int bn_ref(int s, int t, int d);
    int n = 0;
    for (int j = 1; j < 4; j++) if (s >= t + (j - 2) * d) n++;
    return n;
  endfunction

  initial begin
    for (int o = 0; o < O; o++)
      for (int ky = 0; ky < K; ky++)
        for (int kx = 0; kx < K; kx++)
          for (int c = 0; c < I; c++) begin
            wt[o][ky][kx][c] = 1'($urandom);
            plist.push_back({~wt[o][ky][kx][c], 8'h7f, 23'($urandom)});
          end
    for (int o = 0; o < O; o++) begin
      tau[o] = int'($urandom % 9) - 4;
      del[o] = int'($urandom % 4) + 3;
      plist.push_back(tau[o]);
      plist.push_back(del[o]);
    end
    for (int e = 0; e < EXTRA; e++) plist.push_back(32'hA000_0000 + e);
    for (int n = 0; n < NIMG; n++) begin
      automatic int img[H][W][I];
      foreach (img[y, x, c]) begin
        img[y][x][c] = int'($urandom % 4);
        pix.push_back(img[y][x][c]);
      end
      for (int oy = 0; oy < HO; oy++)
        for (int ox = 0; ox < WO; ox++)
          for (int o = 0; o < O; o++) begin
            automatic int s = 0;
            for (int ky = 0; ky < K; ky++)
              for (int kx = 0; kx < K; kx++)
                for (int c = 0; c < I; c++) begin
                  automatic int iy = oy * S + ky - P, ix = ox * S + kx - P;
                  automatic int v = (iy >= 0 && iy < H && ix >= 0 && ix < W) ? 2 * img[iy][ix][c] - 3 : -1;
                  s += wt[o][ky][kx][c] ? v : -v;
                end
            exp_sum.push_back(s);
            exp_act.push_back(bn_ref(s, tau[o], del[o]));
            exp_ch.push_back(o);
          end
    end
  end

  assign stall = (iidx >= 2 * H * W * I);
  always_comb begin
    param_in_valid = rst_n && (pidx < plist.size());
    param_in_data  = (pidx < plist.size()) ? plist[pidx] : '0;
    in_valid       = (iidx < pix.size()) && (!stall || ig);
    in_data        = (iidx < pix.size()) ? IB'(pix[iidx]) : '0;
    out_ready      = !stall || og;
  end

  always @(posedge clk) begin
    cycle <= cycle + 1;
    ig <= ($urandom % 3 != 0);
    og <= ($urandom % 3 != 0);
    if (param_in_valid) pidx <= pidx + 1;
    if (param_out_valid) begin
      checks++;
      if (param_out_data !== 32'hA000_0000 + fwd_idx) failures++;
      fwd_idx <= fwd_idx + 1;
    end
    if (in_valid && in_ready) iidx <= iidx + 1;
    if (out_valid && out_ready) begin
      checks++;
      if (oidx % (HO * WO * O) == 0) first_out[oidx / (HO * WO * O)] = cycle;
      if (out_sum !== exp_sum[oidx] || out_act !== 2'(exp_act[oidx]) || out_ch != CNT_W'(exp_ch[oidx])) begin
        failures++;
        $display("out %0d: sum %0d act %0d ch %0d, expected %0d %0d %0d", oidx, out_sum, out_act,
                 out_ch, exp_sum[oidx], exp_act[oidx], exp_ch[oidx]);
      end
      oidx <= oidx + 1;
    end
  end

  initial begin
    rst_n = 1; #1 rst_n = 0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    wait (oidx == NIMG * HO * WO * O);
    repeat (3) @(posedge clk);
    checks += 2;
    if (fwd_idx != EXTRA) failures++;
    if (first_out[1] - first_out[0] != (H + 2 * P) * (W + 2 * P) * I + HO * WO * O) begin
      failures++;
      $display("image period %0d cycles, expected %0d", first_out[1] - first_out[0],
               (H + 2 * P) * (W + 2 * P) * I + HO * WO * O);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

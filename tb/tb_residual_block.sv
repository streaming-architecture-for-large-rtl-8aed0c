// tb_residual_block: a 4 x 5 x 3 residual block. Loads the convolution's
// weights and the block's normalization words, checks the forwarding of the
// words after them, then streams three images on the regular input and the
// matching skip values on the skip input, with random gaps on all four
// streams. Every skip output must equal the saturated sum of the raw
// convolution and the skip input, every regular output its quantized value;
// some skip values are chosen near the 16-bit limits so saturation happens.
module tb_residual_block;
  import qnn_pkg::*;
  localparam int I = 3, H = 4, W = 5, K = 3, P = 1, NIMG = 3, EXTRA = 3;

  logic clk = 1'b0;
  always #5 clk = ~clk;
  logic rst_n = 1'b1;
  logic param_in_valid, param_out_valid, loaded;
  param_t param_in_data, param_out_data;
  logic reg_in_valid, reg_in_ready, skip_in_valid, skip_in_ready;
  logic reg_out_valid, reg_out_ready, skip_out_valid, skip_out_ready;
  logic [1:0] reg_in_data, reg_out_data;
  skip_t skip_in_data, skip_out_data;

  residual_block #(.I(I), .H(H), .W(W), .K(K), .P(P), .ACT_BITS(2)) dut (.*);

  int checks = 0, failures = 0, sats = 0, fwd = 0;
  bit wt[I][K][K][I];
  int tau[I], del[I];
  param_t plist[$];
  int rpix[$], spix[$], exp_skip[$], exp_reg[$];
  int pi = 0, ri = 0, si = 0, oi = 0, ro = 0, so = 0;
  bit g1, g2, g3, g4;

  function automatic int bn_ref(int s, int t, int d);
    int n = 0;
    for (int j = 1; j < 4; j++) if (s >= t + (j - 2) * d) n++;
    return n;
  endfunction

  initial begin
    for (int o = 0; o < I; o++)
      for (int ky = 0; ky < K; ky++)
        for (int kx = 0; kx < K; kx++)
          for (int c = 0; c < I; c++) begin
            wt[o][ky][kx][c] = 1'($urandom);
            plist.push_back({~wt[o][ky][kx][c], 8'h80, 23'($urandom)});
          end
    for (int o = 0; o < I; o++) begin
      tau[o] = int'($urandom % 21) - 10;
      del[o] = int'($urandom % 6) + 4;
      plist.push_back(tau[o]);
      plist.push_back(del[o]);
    end
    for (int e = 0; e < EXTRA; e++) plist.push_back(32'h5000_0000 + e);
    for (int n = 0; n < NIMG; n++) begin
      automatic int img[H][W][I];
      foreach (img[y, x, c]) begin
        img[y][x][c] = int'($urandom % 4);
        rpix.push_back(img[y][x][c]);
      end
      for (int oy = 0; oy < H; oy++)
        for (int ox = 0; ox < W; ox++)
          for (int o = 0; o < I; o++) begin
            automatic int s = 0, sk, v;
            for (int ky = 0; ky < K; ky++)
              for (int kx = 0; kx < K; kx++)
                for (int c = 0; c < I; c++) begin
                  automatic int iy = oy + ky - P, ix = ox + kx - P;
                  automatic int a = (iy >= 0 && iy < H && ix >= 0 && ix < W) ? 2 * img[iy][ix][c] - 3 : -1;
                  s += wt[o][ky][kx][c] ? a : -a;
                end
            case ($urandom % 8)
              0: sk = 32767 - int'($urandom % 40);
              1: sk = -32768 + int'($urandom % 40);
              default: sk = int'($urandom % 41) - 20;
            endcase
            spix.push_back(sk);
            v = s + sk;
            if (v > 32767) begin v = 32767; sats++; end
            if (v < -32768) begin v = -32768; sats++; end
            exp_skip.push_back(v);
            exp_reg.push_back(bn_ref(v, tau[o], del[o]));
          end
    end
  end

  always_comb begin
    param_in_valid = rst_n && (pi < plist.size());
    param_in_data  = (pi < plist.size()) ? plist[pi] : '0;
    reg_in_valid   = rst_n && (ri < rpix.size()) && g1;
    reg_in_data    = (ri < rpix.size()) ? 2'(rpix[ri]) : '0;
    skip_in_valid  = rst_n && (si < spix.size()) && g2;
    skip_in_data   = (si < spix.size()) ? 16'(spix[si]) : '0;
    reg_out_ready  = g3;
    skip_out_ready = g4;
  end

  always @(posedge clk) begin
    g1 <= ($urandom % 4 != 0); g2 <= ($urandom % 4 != 0);
    g3 <= ($urandom % 4 != 0); g4 <= ($urandom % 4 != 0);
    if (param_in_valid) pi <= pi + 1;
    if (param_out_valid) begin
      checks++;
      if (param_out_data !== 32'h5000_0000 + fwd) failures++;
      fwd <= fwd + 1;
    end
    if (reg_in_valid && reg_in_ready) ri <= ri + 1;
    if (skip_in_valid && skip_in_ready) si <= si + 1;
    // the two outputs must be transferred together
    checks++;
    if ((reg_out_valid && reg_out_ready) != (skip_out_valid && skip_out_ready)) failures++;
    if (skip_out_valid && skip_out_ready) begin
      checks += 2;
      if (skip_out_data !== 16'(exp_skip[oi])) begin
        failures++;
        $display("skip %0d: %0d expected %0d", oi, skip_out_data, exp_skip[oi]);
      end
      if (reg_out_data !== 2'(exp_reg[oi])) failures++;
      oi <= oi + 1;
    end
  end

  initial begin
    #1 rst_n = 1'b0;
    repeat (2) @(posedge clk);
    rst_n <= 1'b1;
    wait (oi == exp_skip.size());
    repeat (3) @(posedge clk);
    checks += 2;
    if (fwd != EXTRA) failures++;
    if (sats == 0) failures++;
    $display("saturated sums: %0d", sats);
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

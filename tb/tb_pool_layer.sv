// tb_pool_layer: a 3x3 / stride 2 / pad 1 max pool and a 2x2 / stride 2
// average pool on 6 x 5 x 3 inputs, two images each, against loop-based
// references. The first image runs without stalls and must take exactly
// (H+2P)*(W+2P)*I cycles from the first entry to the next image's first
// entry; the second runs with random gaps on input and output. Each output
// must appear in the same cycle as the input entry that completes it.
module tb_pool_layer;
  import qnn_pkg::*;
  localparam int I = 3, H = 6, W = 5;
  localparam int NIMG = 2;

  logic clk = 1'b0;
  always #5 clk = ~clk;
  logic rst_n = 1'b1;
  int checks = 0, failures = 0;

  // ---- max pool instance (m) and average pool instance (a) ----
  logic m_iv, m_ir, m_ov, m_or, a_iv, a_ir, a_ov, a_or;
  logic [1:0] m_id, m_od, a_id, a_od;

  pool_layer #(.BITS(2), .I(I), .H(H), .W(W), .K(3), .S(2), .P(1), .MODE(POOL_MAX)) u_max (
    .clk, .rst_n, .in_valid(m_iv), .in_ready(m_ir), .in_data(m_id),
    .out_valid(m_ov), .out_ready(m_or), .out_data(m_od));
  pool_layer #(.BITS(2), .I(I), .H(H), .W(W), .K(2), .S(2), .P(0), .MODE(POOL_AVG)) u_avg (
    .clk, .rst_n, .in_valid(a_iv), .in_ready(a_ir), .in_data(a_id),
    .out_valid(a_ov), .out_ready(a_or), .out_data(a_od));

  int pix[$], exp_m[$], exp_a[$];
  int mi = 0, mo = 0, ai = 0, ao = 0;
  bit g1, g2, g3, g4;
  longint cycle = 0, m_first[NIMG];
  int same_cycle = 0;

  initial begin
    for (int n = 0; n < NIMG; n++) begin
      automatic int img[H][W][I];
      foreach (img[y, x, c]) begin
        img[y][x][c] = int'($urandom % 4);
        pix.push_back(img[y][x][c]);
      end
      for (int oy = 0; oy < (H + 2 - 3) / 2 + 1; oy++)
        for (int ox = 0; ox < (W + 2 - 3) / 2 + 1; ox++)
          for (int c = 0; c < I; c++) begin
            automatic int m = 0;
            for (int ky = 0; ky < 3; ky++)
              for (int kx = 0; kx < 3; kx++) begin
                automatic int iy = oy * 2 + ky - 1, ix = ox * 2 + kx - 1;
                if (iy >= 0 && iy < H && ix >= 0 && ix < W && img[iy][ix][c] > m) m = img[iy][ix][c];
              end
            exp_m.push_back(m);
          end
      for (int oy = 0; oy < H / 2; oy++)
        for (int ox = 0; ox < W / 2; ox++)
          for (int c = 0; c < I; c++) begin
            automatic int s = img[2*oy][2*ox][c] + img[2*oy][2*ox+1][c] + img[2*oy+1][2*ox][c] +
                              img[2*oy+1][2*ox+1][c];
            exp_a.push_back((s + 2) / 4);
          end
    end
  end

  always_comb begin
    automatic bit st_m = (mi > H * W * I);
    automatic bit st_a = (ai > H * W * I);
    m_iv = rst_n && (mi < pix.size()) && (!st_m || g1);
    m_id = (mi < pix.size()) ? 2'(pix[mi]) : '0;
    m_or = !st_m || g2;
    a_iv = rst_n && (ai < pix.size()) && (!st_a || g3);
    a_id = (ai < pix.size()) ? 2'(pix[ai]) : '0;
    a_or = !st_a || g4;
  end

  // Outputs are sampled just before the edge that transfers them.
  logic       m_x = 0, a_x = 0, m_in_x = 0, a_in_x = 0;
  logic [1:0] m_q, a_q;
  always @(negedge clk) begin
    m_x = rst_n && m_ov && m_or;  a_x = rst_n && a_ov && a_or;
    m_in_x = rst_n && m_iv && m_ir;  a_in_x = rst_n && a_iv && a_ir;
    m_q = m_od;  a_q = a_od;
  end

  always @(posedge clk) begin
    cycle <= cycle + 1;
    g1 <= 1'($urandom); g2 <= 1'($urandom); g3 <= 1'($urandom); g4 <= 1'($urandom);
    if (m_in_x) begin
      mi <= mi + 1;
      if (mi % (H * W * I) == 0) m_first[mi / (H * W * I)] = cycle;
    end
    if (a_in_x) ai <= ai + 1;
    if (m_x) begin
      checks++;
      if (m_q != 2'(exp_m[mo])) begin failures++; $display("max %0d: %0d exp %0d", mo, m_q, exp_m[mo]); end
      mo <= mo + 1;
    end
    if (a_x) begin
      checks++;
      // the average pool has no padding: its output leaves with an input entry
      if (a_in_x) same_cycle++;
      if (a_q != 2'(exp_a[ao])) begin failures++; $display("avg %0d: %0d exp %0d ai %0d row %0d col %0d", ao, a_q, exp_a[ao], ai, u_avg.row, u_avg.col); end
      ao <= ao + 1;
    end
  end

  initial begin
    #1 rst_n = 1'b0;
    repeat (2) @(posedge clk);
    rst_n <= 1'b1;
    wait (mo == exp_m.size() && ao == exp_a.size());
    repeat (2) @(posedge clk);
    checks += 2;
    // one entry per cycle; the first pixel of each image is preceded by the
    // top padding row and the left padding column
    if (m_first[1] - m_first[0] != (H + 2) * (W + 2) * I) begin
      failures++;
      $display("max pool image period %0d, expected %0d", m_first[1] - m_first[0], (H + 2) * (W + 2) * I);
    end
    if (same_cycle != exp_a.size()) failures++;
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

// tb_skip_downsample: two 4 x 6 x 2 skip images with random stalls; the
// output must be the even-row, even-column pixels, each followed by two zero
// channels.
module tb_skip_downsample;
  localparam int I_IN = 2, I_OUT = 4, H = 4, W = 6;
  logic clk = 1'b0;
  always #5 clk = ~clk;
  logic rst_n = 1'b1;
  logic in_valid, in_ready, out_valid, out_ready;
  logic signed [15:0] in_data, out_data;
  int checks = 0, failures = 0;
  int pix[$], expq[$];
  int ii = 0, oi = 0;
  bit g1, g2;

  skip_downsample #(.I_IN(I_IN), .I_OUT(I_OUT), .H(H), .W(W)) dut (.*);

  initial begin
    for (int n = 0; n < 2; n++)
      for (int r = 0; r < H; r++)
        for (int c = 0; c < W; c++) begin
          for (int ch = 0; ch < I_IN; ch++) begin
            automatic int v = int'($urandom % 60000) - 30000;
            pix.push_back(v);
            if (r % 2 == 0 && c % 2 == 0) expq.push_back(v);
          end
          if (r % 2 == 0 && c % 2 == 0)
            for (int ch = I_IN; ch < I_OUT; ch++) expq.push_back(0);
        end
  end

  always_comb begin
    in_valid  = rst_n && (ii < pix.size()) && g1;
    in_data   = (ii < pix.size()) ? 16'(pix[ii]) : '0;
    out_ready = g2;
  end

  always @(posedge clk) begin
    g1 <= ($urandom % 4 != 0);
    g2 <= ($urandom % 4 != 0);
    if (in_valid && in_ready) ii <= ii + 1;
    if (out_valid && out_ready) begin
      checks++;
      if (out_data !== 16'(expq[oi])) failures++;
      oi <= oi + 1;
    end
  end

  initial begin
    #1 rst_n = 1'b0;
    repeat (2) @(posedge clk);
    rst_n <= 1'b1;
    wait (oi == expq.size() && ii == pix.size());
    repeat (5) @(posedge clk);
    checks++;
    if (oi != expq.size()) failures++;
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

// tb_window_buffer: pushes random entries into two line buffers (a
// convolution window, and a pooling window in look-ahead mode) and compares
// every window entry with the entry of the expected age in a model history.
// The window is checked in its plane-major layout: bit p of entry j at
// window[p*NW + j].
module tb_window_buffer;
  localparam int EW = 2, I = 3, WP = 5, K = 3;
  logic clk = 1'b0;
  always #5 clk = ~clk;
  logic          shift_en;
  logic [EW-1:0] din;
  logic [K*K*I*EW-1:0] win_c;
  logic [K*K*EW-1:0]   win_p;
  int checks = 0, failures = 0;
  logic [EW-1:0] hist[$];  // hist[0] = newest stored entry

  window_buffer #(.EW(EW), .I(I), .WP(WP), .K(K), .TAP_CH(I), .LOOKAHEAD(1'b0)) u_conv (
    .clk, .shift_en, .din, .window(win_c));
  window_buffer #(.EW(EW), .I(I), .WP(WP), .K(K), .TAP_CH(1), .LOOKAHEAD(1'b1)) u_pool (
    .clk, .shift_en, .din, .window(win_p));

  initial begin
    shift_en = 0; din = 0;
    for (int n = 0; n < 400; n++) begin
      @(negedge clk);
      shift_en = ($urandom % 3 != 0);
      din = EW'($urandom);
      #1;
      if (hist.size() >= I * ((K - 1) * WP + K)) begin
        for (int ky = 0; ky < K; ky++)
          for (int kx = 0; kx < K; kx++) begin
            for (int t = 0; t < I; t++) begin
              automatic int age = ((K - 1 - ky) * WP + (K - 1 - kx)) * I + (I - 1 - t);
              checks++;
              for (int p = 0; p < EW; p++)  // plane-major window layout
                if (win_c[p * K * K * I + (ky * K + kx) * I + t] !== hist[age][p]) failures++;
            end
            begin
              automatic int age = ((K - 1 - ky) * WP + (K - 1 - kx)) * I;  // 0 = din
              automatic logic [EW-1:0] e = (age == 0) ? din : hist[age - 1];
              checks++;
              for (int p = 0; p < EW; p++)
                if (win_p[p * K * K + ky * K + kx] !== e[p]) failures++;
            end
          end
      end
      @(posedge clk);
      if (shift_en) hist.push_front(din);
    end
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

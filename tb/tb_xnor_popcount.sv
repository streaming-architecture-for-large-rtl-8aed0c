// tb_xnor_popcount: random windows and filters for 2-bit and 8-bit
// activations; the result must equal the plain sum of w_j * level(act_j).
// Codes are drawn per entry and packed in the plane-major layout the unit
// expects (bit p of entry j at act[p*N + j]).
module tb_xnor_popcount;
  import qnn_pkg::*;
  localparam int N = 27;
  logic [N*2-1:0] act2;
  logic [N*8-1:0] act8;
  logic [N-1:0]   w;
  sum_t s2, s8;
  int checks = 0, failures = 0;
  logic [1:0] c2 [N];
  logic [7:0] c8 [N];

  xnor_popcount #(.N(N), .BITS(2)) u2 (.act(act2), .w, .sum(s2));
  xnor_popcount #(.N(N), .BITS(8)) u8 (.act(act8), .w, .sum(s8));

  initial begin
    for (int n = 0; n < 500; n++) begin
      automatic int e2 = 0, e8 = 0;
      for (int j = 0; j < N; j++) begin
        c2[j] = 2'($urandom);
        c8[j] = 8'($urandom);
        w[j] = 1'($urandom);
        if (n == 0) begin c2[j] = 2'd3; w[j] = 1'b1; end  // all +3 * +1
        for (int p = 0; p < 2; p++) act2[p*N + j] = c2[j][p];
        for (int p = 0; p < 8; p++) act8[p*N + j] = c8[j][p];
      end
      for (int j = 0; j < N; j++) begin
        automatic int sg = w[j] ? 1 : -1;
        e2 += sg * (2 * int'(c2[j]) - 3);
        e8 += sg * (2 * int'(c8[j]) - 255);
      end
      #1;
      checks += 2;
      if (s2 !== e2) failures++;
      if (s8 !== e8) failures++;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

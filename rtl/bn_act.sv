// bn_act: BatchNorm followed by an n-bit uniform activation, folded into
// comparisons against thresholds.
//
// BatchNorm(a) = gamma*(a - mu)*i + B is 0 at a = tau and grows by one
// quantization step d every delta = d/(gamma*i) in a. With 2^n output levels
// centred on 0, the range boundaries in pre-activation units are
// t_j = tau + (j - 2^(n-1))*delta for j = 1 .. 2^n - 1, and the output code is
// the number of boundaries a has reached (a >= t_j). The code is found by a
// binary search, one comparison per output bit from the top bit down: for
// n = 2 the top bit is (a >= tau), the low bit compares with tau + delta or
// tau - delta. Only tau and delta are stored, as in the paper.
//
// delta is assumed positive (gamma*i > 0); a negative scale can be folded
// into the sign of the layer's weights by the host. Combinational.
module bn_act #(
  parameter int BITS = 2,
  parameter int IN_W = 32
) (
  input  logic signed [IN_W-1:0] a,
  input  logic signed [31:0]     tau,
  input  logic signed [31:0]     delta,
  output logic [BITS-1:0]        code
);

  always_comb begin
    logic [BITS-1:0]   c;
    logic signed [63:0] t;
    c = '0;
    for (int b = BITS - 1; b >= 0; b--) begin
      // candidate boundary index j = c | 2^b
      t = 64'(tau) + (64'(signed'({1'b0, c | BITS'(1 << b)})) - 64'(1 << (BITS - 1))) * 64'(delta);
      if (64'(a) >= t) c[b] = 1'b1;
    end
    code = c;
  end

endmodule

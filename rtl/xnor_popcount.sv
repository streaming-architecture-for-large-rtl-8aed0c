// xnor_popcount: dot product of a binary filter with a multi-bit activation
// window, done with XNOR and popcount instead of multiplications.
//
// act holds N entries of BITS bits in bit-plane order (bit p of entry j at
// act[p*N + j], the layout window_buffer produces); w holds the N matching
// weight bits (1 = +1, 0 = -1). Each activation bit plane p is
// a vector of +-1 values, so its dot product with w is
// 2*popcount(XNOR(w, plane_p)) - N; the planes are weighted by 2^p and added.
// This equals sum_j w_j * (2*act_j - (2^BITS - 1)), the dot product with the
// activation levels defined in qnn_pkg. Purely combinational.
module xnor_popcount #(
  parameter int N    = 576,   // window entries (K*K*I)
  parameter int BITS = 2      // activation bits
) (
  input  logic [N*BITS-1:0]       act,
  input  logic [N-1:0]            w,
  output qnn_pkg::sum_t           sum
);
  import qnn_pkg::*;

  always_comb begin
    sum_t acc;
    acc = '0;
    for (int p = 0; p < BITS; p++)
      acc += sum_t'((2 * $countones(~(w ^ act[p*N +: N])) - N) <<< p);
    sum = acc;
  end

endmodule

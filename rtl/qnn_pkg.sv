// qnn_pkg: constants and helper functions shared by the streaming QNN layers.
//
// Number formats used throughout the design:
//  * Weights are 1 bit: bit 1 stands for +1, bit 0 for -1 (the Sign of the
//    32-bit float weight received from the host, Sign(0) = +1).
//  * An n-bit activation code c is read as n "bit planes" b_p, each standing
//    for +1 (b_p = 1) or -1 (b_p = 0); its value is sum_p 2^p * (2*b_p - 1)
//    = 2*c - (2^n - 1). For 2 bits the levels are -3, -1, +1, +3. This lets
//    the dot product with binary weights be done as one XNOR-popcount per
//    plane. The level encoding is this design's choice; the paper gives only
//    1-bit weights, 2-bit activations and XNOR-popcount.
//  * Padding uses the value -1, as in the paper; in this encoding that is the
//    code 2^(n-1) - 1.
//  * Convolution sums are 32-bit signed; the skip path carries 16-bit signed
//    integers, as in the paper.
package qnn_pkg;

  localparam int SUM_W   = 32;  // width of a raw convolution sum
  localparam int SKIP_W  = 16;  // width of skip-connection data (paper: 16-bit)
  localparam int PARAM_W = 32;  // width of one parameter word from the host
  localparam int CNT_W   = 16;  // width of position / channel counters

  typedef logic signed [SUM_W-1:0]  sum_t;
  typedef logic signed [SKIP_W-1:0] skip_t;
  typedef logic [PARAM_W-1:0]       param_t;

  // One entry of a layer's normalization cache: threshold tau and step delta.
  typedef struct packed {
    logic signed [31:0] tau;
    logic signed [31:0] delta;
  } bn_entry_t;

  typedef enum logic [0:0] {POOL_MAX = 1'b0, POOL_AVG = 1'b1} pool_mode_e;

  // Code whose value is -1 (the padding value) for an n-bit activation.
  function automatic int pad_code(int bits);
    return (1 << (bits - 1)) - 1;
  endfunction

  // Signed value of an activation code: 2*c - (2^n - 1).
  function automatic int act_value(int code, int bits);
    return 2 * code - ((1 << bits) - 1);
  endfunction

endpackage

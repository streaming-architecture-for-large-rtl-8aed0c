// skip_source: starts the skip path of a residual network.
//
// The first residual block needs a 16-bit skip input, but the layer before
// it (the max pooling after conv1) produces 2-bit activation codes. This
// module forks that stream: the code goes on unchanged as the regular stream,
// and its signed level value 2*c - (2^BITS - 1) (qnn_pkg::act_value), sign-
// extended to 16 bits, goes out as the skip stream. The paper does not say
// what feeds the first skip connection; using the activation values is this
// design's choice.
//
// Fork rule: an input is taken only in a cycle in which both outputs are
// ready; each output sees valid only then.
module skip_source #(
  parameter int BITS = 2
) (
  input  logic            in_valid,
  output logic            in_ready,
  input  logic [BITS-1:0] in_data,
  output logic            reg_valid,
  input  logic            reg_ready,
  output logic [BITS-1:0] reg_data,
  output logic            skip_valid,
  input  logic            skip_ready,
  output qnn_pkg::skip_t  skip_data
);
  import qnn_pkg::*;

  assign in_ready   = reg_ready && skip_ready;
  assign reg_valid  = in_valid && skip_ready;
  assign skip_valid = in_valid && reg_ready;
  assign reg_data   = in_data;
  assign skip_data  = SKIP_W'(act_value(int'(in_data), BITS));

endmodule

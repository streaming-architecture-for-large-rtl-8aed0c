// residual_block: the skip-connection stage of a residual network.
//
// It has two inputs, the 2-bit regular stream (the output of the previous
// convolution) and the 16-bit skip stream (the un-quantized sum that entered
// that previous convolution's block). The regular input goes through a
// convolution whose BatchNorm and activation are not applied (conv_layer with
// HAS_BN = 0). Each raw convolution sum is added to the oldest entry of the
// skip buffer (skip_fifo), which holds the skip stream back until the regular
// path has caught up. The sum, saturated to 16 bits, is split two ways: as is
// to skip_out, and through this block's own BatchNorm + activation (bn_cache,
// bn_act) to reg_out. The next convolution takes reg_out; the next residual
// block takes its output together with skip_out.
//
// Parameters arrive on the daisy chain: the convolution's weights, then 2*I
// normalization words for the block's own BatchNorm, then everything else is
// forwarded.
//
// The two outputs leave together: a result is transferred only in a cycle
// where both consumers are ready, and each consumer sees valid only then.
// The block needs I == O (the paper's stated condition). Skip buffer depth
// defaults to the paper's I*(W*(K-1) + K). Saturation of the 16-bit sum is
// this design's choice; the paper only says the skip data are 16-bit.
module residual_block #(
  parameter int I          = 64,
  parameter int H          = 56,
  parameter int W          = 56,
  parameter int K          = 3,
  parameter int P          = 1,
  parameter int ACT_BITS   = 2,
  parameter int FIFO_DEPTH = I * (W * (K - 1) + K)
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    param_in_valid,
  input  qnn_pkg::param_t         param_in_data,
  output logic                    param_out_valid,
  output qnn_pkg::param_t         param_out_data,
  output logic                    loaded,
  // regular (quantized) input and skip input
  input  logic                    reg_in_valid,
  output logic                    reg_in_ready,
  input  logic [ACT_BITS-1:0]     reg_in_data,
  input  logic                    skip_in_valid,
  output logic                    skip_in_ready,
  input  qnn_pkg::skip_t          skip_in_data,
  // regular and skip outputs
  output logic                    reg_out_valid,
  input  logic                    reg_out_ready,
  output logic [ACT_BITS-1:0]     reg_out_data,
  output logic                    skip_out_valid,
  input  logic                    skip_out_ready,
  output qnn_pkg::skip_t          skip_out_data
);
  import qnn_pkg::*;

  localparam int AW = $clog2(I + 1);

  logic              c_valid, c_ready, c_loaded;
  sum_t              c_sum;
  logic [ACT_BITS-1:0] c_act_unused;
  logic [CNT_W-1:0]  c_ch;
  logic              cp_valid;
  param_t            cp_data;
  logic              b_full;
  bn_entry_t         bn;
  logic              f_valid, f_ready;
  skip_t             f_data;
  logic              both, fire;
  logic signed [SUM_W:0] wide;
  skip_t             sum16;

  conv_layer #(
    .IN_BITS(ACT_BITS), .ACT_BITS(ACT_BITS), .I(I), .O(I), .H(H), .W(W),
    .K(K), .S(1), .P(P), .HAS_BN(1'b0)
  ) u_conv (
    .clk, .rst_n,
    .param_in_valid, .param_in_data,
    .param_out_valid(cp_valid), .param_out_data(cp_data), .loaded(c_loaded),
    .in_valid(reg_in_valid), .in_ready(reg_in_ready), .in_data(reg_in_data),
    .out_valid(c_valid), .out_ready(c_ready), .out_sum(c_sum), .out_act(c_act_unused),
    .out_ch(c_ch)
  );

  // The block's own BatchNorm parameters follow the convolution's weights.
  bn_cache #(.DEPTH(I)) u_bcache (
    .clk, .rst_n, .load_valid(cp_valid && !b_full), .load_data(cp_data), .full(b_full),
    .rd_addr(AW'(c_ch)), .rd_data(bn)
  );

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      param_out_valid <= 1'b0;
      param_out_data  <= '0;
    end else begin
      param_out_valid <= cp_valid && b_full;
      param_out_data  <= cp_data;
    end
  end
  assign loaded = c_loaded && b_full;

  skip_fifo #(.DW(SKIP_W), .DEPTH(FIFO_DEPTH)) u_fifo (
    .clk, .rst_n,
    .in_valid(skip_in_valid), .in_ready(skip_in_ready), .in_data(skip_in_data),
    .out_valid(f_valid), .out_ready(f_ready), .out_data(f_data)
  );

  // Adder with saturation to the 16-bit skip format.
  always_comb begin
    wide = (SUM_W+1)'(c_sum) + (SUM_W+1)'(f_data);
    if (wide > (SUM_W+1)'(32767))       sum16 = 16'sh7fff;
    else if (wide < -(SUM_W+1)'(32768)) sum16 = 16'sh8000;
    else                                sum16 = wide[SKIP_W-1:0];
  end

  bn_act #(.BITS(ACT_BITS), .IN_W(SKIP_W)) u_act (
    .a(sum16), .tau(bn.tau), .delta(bn.delta), .code(reg_out_data)
  );

  // Join (conv result + skip entry) and fork (skip out + regular out).
  assign both           = c_valid && f_valid;
  assign fire           = both && reg_out_ready && skip_out_ready;
  assign c_ready        = fire;
  assign f_ready        = fire;
  assign reg_out_valid  = both && skip_out_ready;
  assign skip_out_valid = both && reg_out_ready;
  assign skip_out_data  = sum16;

endmodule

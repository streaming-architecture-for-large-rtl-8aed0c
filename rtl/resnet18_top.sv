// resnet18_top: a complete ResNet-18 classifier as one streaming pipeline.
//
// Every layer is its own kernel, and the feature map flows from kernel to
// kernel pixel by pixel, depth-first, over valid/ready streams; a layer starts
// as soon as its line buffer holds enough data, so all layers work at once
// on different parts of the same image. The layer list follows the ResNet-18
// table (input IMG x IMG x 3, all sizes below for IMG = 224):
//
//   conv1   7x7, BASE_CH maps, stride 2, pad 3            -> 112 x 112
//   pool1   3x3 max, stride 2, pad 1                      ->  56 x  56
//   stage s = 0..3 (conv2_x .. conv5_x), two blocks each, BASE_CH<<s maps:
//     convA  3x3 with BatchNorm+activation (stride 2 in the first block of
//            stages 1..3), then
//     residual_block: 3x3 convolution, plus the skip stream, split into the
//            16-bit skip output and the 2-bit regular output
//   pool2   average over the final IMG/32 x IMG/32 map    ->   1 x 1
//   fc      NUM_CLASSES-way fully connected layer, as a 1x1 convolution,
//           giving raw 32-bit class scores (softmax is left to the host)
//
// The skip stream starts at pool1's output (skip_source); in the stride-2
// blocks it is reduced by skip_downsample. The final block's skip output is
// not needed and is always accepted.
//
// Parameters: all layers take their weights and normalization words from one
// 32-bit host stream (param_*), which passes along the daisy chain conv1,
// convA/residual of each block in order, fc. loaded rises once every layer has
// its parameters. Each layer accepts pixels as soon as its own parameters are
// in, so an image sent early simply waits (back-pressure) at the first layer
// still loading. Image pixels are IN_BITS-bit channel codes, depth-first;
// each code c is read as the value 2c - (2^IN_BITS - 1).
//
// Output: NUM_CLASSES scores per image, in class order (score_class).
module resnet18_top #(
  parameter int IMG         = 224,
  parameter int IN_CH       = 3,
  parameter int IN_BITS     = 8,
  parameter int BASE_CH     = 64,
  parameter int NUM_CLASSES = 1000,
  parameter int ACT_BITS    = 2
) (
  input  logic                        clk,
  input  logic                        rst_n,
  input  logic                        param_valid,
  input  qnn_pkg::param_t             param_data,
  output logic                        loaded,
  input  logic                        img_valid,
  output logic                        img_ready,
  input  logic [IN_BITS-1:0]          img_data,
  output logic                        score_valid,
  input  logic                        score_ready,
  output qnn_pkg::sum_t               score_data,
  output logic [qnn_pkg::CNT_W-1:0]   score_class
);
  import qnn_pkg::*;

  localparam int C1H = IMG / 2;
  localparam int P1H = IMG / 4;
  localparam int LASTH = IMG / 32;
  localparam int NB  = 8;

  function automatic int ch_of(int s);  return BASE_CH << s; endfunction
  function automatic int hw_of(int s);  return P1H >> s;     endfunction

  // parameter chain: 0 conv1, 1+2k convA of block k, 2+2k residual k, 17 fc
  logic   pv [0:2*NB+2];
  param_t pd [0:2*NB+2];
  logic   ld [0:2*NB+1];

  assign pv[0] = param_valid;
  assign pd[0] = param_data;

  // conv1 -> pool1
  logic c1_valid, c1_ready;
  logic [ACT_BITS-1:0] c1_act;
  sum_t c1_sum_unused;
  logic [CNT_W-1:0] c1_ch_unused;

  conv_layer #(
    .IN_BITS(IN_BITS), .ACT_BITS(ACT_BITS), .I(IN_CH), .O(BASE_CH), .H(IMG), .W(IMG),
    .K(7), .S(2), .P(3), .HAS_BN(1'b1)
  ) u_conv1 (
    .clk, .rst_n,
    .param_in_valid(pv[0]), .param_in_data(pd[0]),
    .param_out_valid(pv[1]), .param_out_data(pd[1]), .loaded(ld[0]),
    .in_valid(img_valid), .in_ready(img_ready), .in_data(img_data),
    .out_valid(c1_valid), .out_ready(c1_ready), .out_sum(c1_sum_unused),
    .out_act(c1_act), .out_ch(c1_ch_unused)
  );

  logic p1_valid, p1_ready;
  logic [ACT_BITS-1:0] p1_data;

  pool_layer #(
    .BITS(ACT_BITS), .I(BASE_CH), .H(C1H), .W(C1H), .K(3), .S(2), .P(1), .MODE(POOL_MAX)
  ) u_pool1 (
    .clk, .rst_n,
    .in_valid(c1_valid), .in_ready(c1_ready), .in_data(c1_act),
    .out_valid(p1_valid), .out_ready(p1_ready), .out_data(p1_data)
  );

  // Streams at block boundaries: index k is the input of block k.
  logic                rv [0:NB];
  logic                rr [0:NB];
  logic [ACT_BITS-1:0] rd [0:NB];
  logic                sv [0:NB];
  logic                sr [0:NB];
  skip_t               sd [0:NB];

  skip_source #(.BITS(ACT_BITS)) u_src (
    .in_valid(p1_valid), .in_ready(p1_ready), .in_data(p1_data),
    .reg_valid(rv[0]), .reg_ready(rr[0]), .reg_data(rd[0]),
    .skip_valid(sv[0]), .skip_ready(sr[0]), .skip_data(sd[0])
  );

  for (genvar k = 0; k < NB; k++) begin : g_blk
    localparam int  ST    = k / 2;
    localparam bit  DOWN  = (k % 2 == 0) && (ST > 0);
    localparam int  CI    = DOWN ? ch_of(ST - 1) : ch_of(ST);
    localparam int  HI    = DOWN ? hw_of(ST - 1) : hw_of(ST);
    localparam int  CO    = ch_of(ST);
    localparam int  HO    = hw_of(ST);

    logic                a_valid, a_ready;
    logic [ACT_BITS-1:0] a_act;
    sum_t                a_sum_unused;
    logic [CNT_W-1:0]    a_ch_unused;
    logic                d_valid, d_ready;
    skip_t               d_data;
    logic                la, lr;

    conv_layer #(
      .IN_BITS(ACT_BITS), .ACT_BITS(ACT_BITS), .I(CI), .O(CO), .H(HI), .W(HI),
      .K(3), .S(DOWN ? 2 : 1), .P(1), .HAS_BN(1'b1)
    ) u_conva (
      .clk, .rst_n,
      .param_in_valid(pv[1+2*k]), .param_in_data(pd[1+2*k]),
      .param_out_valid(pv[2+2*k]), .param_out_data(pd[2+2*k]), .loaded(la),
      .in_valid(rv[k]), .in_ready(rr[k]), .in_data(rd[k]),
      .out_valid(a_valid), .out_ready(a_ready), .out_sum(a_sum_unused),
      .out_act(a_act), .out_ch(a_ch_unused)
    );

    if (DOWN) begin : g_down
      skip_downsample #(.I_IN(CI), .I_OUT(CO), .H(HI), .W(HI)) u_ds (
        .clk, .rst_n,
        .in_valid(sv[k]), .in_ready(sr[k]), .in_data(sd[k]),
        .out_valid(d_valid), .out_ready(d_ready), .out_data(d_data)
      );
    end else begin : g_same
      assign d_valid = sv[k];
      assign sr[k]   = d_ready;
      assign d_data  = sd[k];
    end

    residual_block #(.I(CO), .H(HO), .W(HO), .K(3), .P(1), .ACT_BITS(ACT_BITS)) u_res (
      .clk, .rst_n,
      .param_in_valid(pv[2+2*k]), .param_in_data(pd[2+2*k]),
      .param_out_valid(pv[3+2*k]), .param_out_data(pd[3+2*k]), .loaded(lr),
      .reg_in_valid(a_valid), .reg_in_ready(a_ready), .reg_in_data(a_act),
      .skip_in_valid(d_valid), .skip_in_ready(d_ready), .skip_in_data(d_data),
      .reg_out_valid(rv[k+1]), .reg_out_ready(rr[k+1]), .reg_out_data(rd[k+1]),
      .skip_out_valid(sv[k+1]), .skip_out_ready(sr[k+1]), .skip_out_data(sd[k+1])
    );

    assign ld[1+2*k] = la;
    assign ld[2+2*k] = lr;
  end

  // The last block's skip output has no consumer.
  assign sr[NB] = 1'b1;

  logic p2_valid, p2_ready;
  logic [ACT_BITS-1:0] p2_data;

  pool_layer #(
    .BITS(ACT_BITS), .I(ch_of(3)), .H(LASTH), .W(LASTH), .K(LASTH), .S(1), .P(0),
    .MODE(POOL_AVG)
  ) u_pool2 (
    .clk, .rst_n,
    .in_valid(rv[NB]), .in_ready(rr[NB]), .in_data(rd[NB]),
    .out_valid(p2_valid), .out_ready(p2_ready), .out_data(p2_data)
  );

  logic [ACT_BITS-1:0] fc_act_unused;

  conv_layer #(
    .IN_BITS(ACT_BITS), .ACT_BITS(ACT_BITS), .I(ch_of(3)), .O(NUM_CLASSES), .H(1), .W(1),
    .K(1), .S(1), .P(0), .HAS_BN(1'b0)
  ) u_fc (
    .clk, .rst_n,
    .param_in_valid(pv[2*NB+1]), .param_in_data(pd[2*NB+1]),
    .param_out_valid(pv[2*NB+2]), .param_out_data(pd[2*NB+2]), .loaded(ld[2*NB+1]),
    .in_valid(p2_valid), .in_ready(p2_ready), .in_data(p2_data),
    .out_valid(score_valid), .out_ready(score_ready), .out_sum(score_data),
    .out_act(fc_act_unused), .out_ch(score_class)
  );

  always_comb begin
    loaded = 1'b1;
    for (int i = 0; i <= 2 * NB + 1; i++) loaded &= ld[i];
  end

endmodule

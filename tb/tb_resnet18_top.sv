// tb_resnet18_top: end-to-end test of the ResNet-18 pipeline at a reduced
// size (64 x 64 input, 2..16 maps per stage, 10 classes), two images back to
// back, with random gaps on the parameter, image and score streams. All the
// checking lives in resnet_tb_body.svh.
module tb_resnet18_top;
  localparam int IMG           = 64;
  localparam int IN_CH         = 3;
  localparam int IN_BITS       = 8;
  localparam int BASE_CH       = 2;
  localparam int NUM_CLASSES   = 10;
  localparam int N_IMAGES      = 2;
  localparam bit RANDOM_STALLS = 1'b1;
  localparam int WATCHDOG      = 2_000_000;

  `include "resnet_tb_body.svh"

  resnet18_top #(
    .IMG(IMG), .IN_CH(IN_CH), .IN_BITS(IN_BITS), .BASE_CH(BASE_CH), .NUM_CLASSES(NUM_CLASSES)
  ) dut (
    .clk, .rst_n, .param_valid, .param_data, .loaded, .img_valid, .img_ready, .img_data,
    .score_valid, .score_ready, .score_data, .score_class
  );
endmodule

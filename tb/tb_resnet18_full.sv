// tb_resnet18_full: one complete classification with the design at its
// default size (224 x 224 x 3 input, 64..512 maps, 1000 classes): all
// parameters are loaded, one image is streamed through and all 1000 scores
// are compared with the loop-based reference model in resnet_tb_body.svh.
module tb_resnet18_full;
  localparam int IMG           = 224;
  localparam int IN_CH         = 3;
  localparam int IN_BITS       = 8;
  localparam int BASE_CH       = 64;
  localparam int NUM_CLASSES   = 1000;
  localparam int N_IMAGES      = 1;
  localparam bit RANDOM_STALLS = 1'b0;
  localparam int WATCHDOG      = 40_000_000;

  `include "resnet_tb_body.svh"

  resnet18_top dut (
    .clk, .rst_n, .param_valid, .param_data, .loaded, .img_valid, .img_ready, .img_data,
    .score_valid, .score_ready, .score_data, .score_class
  );
endmodule

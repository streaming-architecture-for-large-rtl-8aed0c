// weight_cache: on-chip store of one layer's binarized weights.
//
// The host sends every weight as a 32-bit IEEE float, filter after filter,
// each filter depth-first (ky, then kx, then input channel fastest). The cache
// keeps only the Sign of each float (bit 1 for >= 0, bit 0 for < 0, taken
// from the float's sign bit) and packs the N = K*K*I bits of one filter into
// one word, so the memory has O = DEPTH words of N bits and one read returns a
// whole filter, as the paper describes. The first float of a filter lands in
// bit 0, matching the window entry order of window_buffer.
//
// Interface: load_valid/load_data accept one float per cycle while full is
// low; full rises after DEPTH*N floats and stays high until reset. rd_addr
// selects the filter, rd_data is combinational (a distributed-RAM style read;
// a block RAM would add one cycle).
module weight_cache #(
  parameter int N     = 576,  // bits per word, K*K*I
  parameter int DEPTH = 64    // words, O
) (
  input  logic                       clk,
  input  logic                       rst_n,
  input  logic                       load_valid,
  input  qnn_pkg::param_t            load_data,
  output logic                       full,
  input  logic [$clog2(DEPTH+1)-1:0] rd_addr,
  output logic [N-1:0]               rd_data
);
  import qnn_pkg::*;

  localparam int AW = $clog2(DEPTH + 1);
  localparam int BW = $clog2(N + 1);

  logic [N-1:0]  mem [DEPTH];
  logic [N-1:0]  word;
  logic [BW-1:0] bit_cnt;
  logic [AW-1:0] wr_addr;
  logic [N-1:0]  next_word;

  // Shift the new sign bit in at the top so the first one ends in bit 0.
  if (N > 1) begin : g_wide
    assign next_word = {~load_data[31], word[N-1:1]};
  end else begin : g_one
    assign next_word = ~load_data[31];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      bit_cnt <= '0;
      wr_addr <= '0;
      full    <= 1'b0;
    end else if (load_valid && !full) begin
      if (bit_cnt == BW'(N - 1)) begin
        bit_cnt <= '0;
        wr_addr <= wr_addr + 1'b1;
        if (wr_addr == AW'(DEPTH - 1)) full <= 1'b1;
      end else begin
        bit_cnt <= bit_cnt + 1'b1;
      end
    end
  end

  always_ff @(posedge clk) begin
    if (load_valid && !full) begin
      word <= next_word;
      if (bit_cnt == BW'(N - 1)) mem[wr_addr[$clog2(DEPTH)-1:0]] <= next_word;
    end
  end

  assign rd_data = mem[rd_addr[$clog2(DEPTH)-1:0]];

endmodule

// bn_cache: on-chip store of one layer's normalization parameters.
//
// Each output map k has two 32-bit integers, stored together as one 64-bit
// entry as in the paper: tau_k, the pre-activation value where BatchNorm
// gives 0, and delta_k = d/(gamma_k*i_k), the width of one quantization range
// in pre-activation units (see bn_act). The host sends tau_k then delta_k for
// k = 0..DEPTH-1, one 32-bit word per cycle; the order within a pair is this
// design's choice. full rises after 2*DEPTH words. rd_data is combinational.
module bn_cache #(
  parameter int DEPTH = 64
) (
  input  logic                       clk,
  input  logic                       rst_n,
  input  logic                       load_valid,
  input  qnn_pkg::param_t            load_data,
  output logic                       full,
  input  logic [$clog2(DEPTH+1)-1:0] rd_addr,
  output qnn_pkg::bn_entry_t         rd_data
);
  import qnn_pkg::*;

  localparam int AW = $clog2(DEPTH + 1);

  bn_entry_t     mem [DEPTH];
  logic [31:0]   tau_hold;
  logic          second;
  logic [AW-1:0] wr_addr;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      second  <= 1'b0;
      wr_addr <= '0;
      full    <= 1'b0;
    end else if (load_valid && !full) begin
      second <= ~second;
      if (second) begin
        wr_addr <= wr_addr + 1'b1;
        if (wr_addr == AW'(DEPTH - 1)) full <= 1'b1;
      end
    end
  end

  always_ff @(posedge clk) begin
    if (load_valid && !full) begin
      if (!second) tau_hold <= load_data;
      else         mem[wr_addr[$clog2(DEPTH)-1:0]] <= '{tau: tau_hold, delta: load_data};
    end
  end

  assign rd_data = mem[rd_addr[$clog2(DEPTH)-1:0]];

endmodule

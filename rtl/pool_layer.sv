// pool_layer: streaming K x K pooling, max or average, per channel.
//
// Built like conv_layer: the depth-first input stream is scanned over its
// padded extent and shifted into a line buffer, padding entries being made
// inside while the input is held off. Pooling has no parameters and each
// output depends on one channel only, so nothing waits for a whole position:
// the line buffer runs in look-ahead mode and, when the entry arriving is the
// bottom-right pixel of a valid window for its channel, the pooled value
// leaves in the same clock cycle. The layer therefore never halts its input
// by itself; it only passes on back-pressure from its output.
//
// MODE = POOL_MAX takes the largest code (codes are ordered like the values
// they stand for); padding then uses code 0, the lowest level, so it never
// wins. MODE = POOL_AVG takes the mean of the K*K codes rounded to the nearest
// code, which is the nearest activation level to the mean value; the paper
// uses average pooling only for the last pooling of ResNet-18, which has no
// padding. The padding code and the rounding are this design's choices.
//
// Timing: (H+2P)*(W+2P)*I cycles per image without back-pressure; output
// order is depth-first, like the input.
module pool_layer #(
  parameter int                  BITS = 2,
  parameter int                  I    = 64,
  parameter int                  H    = 112,
  parameter int                  W    = 112,
  parameter int                  K    = 3,
  parameter int                  S    = 2,
  parameter int                  P    = 1,
  parameter qnn_pkg::pool_mode_e MODE = qnn_pkg::POOL_MAX
) (
  input  logic            clk,
  input  logic            rst_n,
  input  logic            in_valid,
  output logic            in_ready,
  input  logic [BITS-1:0] in_data,
  output logic            out_valid,
  input  logic            out_ready,
  output logic [BITS-1:0] out_data
);
  import qnn_pkg::*;

  localparam int HP = H + 2 * P;
  localparam int WP = W + 2 * P;
  localparam int KK = K * K;
  localparam int SW = $clog2(KK * (1 << BITS) + 1);

  logic [CNT_W-1:0]    row, col, ch;
  logic                is_pad, win_ok, due, shift_en;
  logic [BITS-1:0]     din;
  logic [KK*BITS-1:0]  window;

  assign is_pad = (row < CNT_W'(P)) || (row >= CNT_W'(H + P)) ||
                  (col < CNT_W'(P)) || (col >= CNT_W'(W + P));
  assign win_ok = (row >= CNT_W'(K - 1)) && (col >= CNT_W'(K - 1)) &&
                  ((row - CNT_W'(K - 1)) % CNT_W'(S) == 0) &&
                  ((col - CNT_W'(K - 1)) % CNT_W'(S) == 0);
  assign due    = win_ok;
  assign din    = is_pad ? '0 : in_data;

  assign shift_en  = (is_pad || in_valid) && (!due || out_ready);
  assign in_ready  = !is_pad && (!due || out_ready);
  assign out_valid = due && (is_pad || in_valid);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      row <= '0;
      col <= '0;
      ch  <= '0;
    end else if (shift_en) begin
      if (ch != CNT_W'(I - 1)) begin
        ch <= ch + 1'b1;
      end else begin
        ch <= '0;
        if (col == CNT_W'(WP - 1)) begin
          col <= '0;
          row <= (row == CNT_W'(HP - 1)) ? '0 : row + 1'b1;
        end else begin
          col <= col + 1'b1;
        end
      end
    end
  end

  window_buffer #(.EW(BITS), .I(I), .WP(WP), .K(K), .TAP_CH(1), .LOOKAHEAD(1'b1)) u_buf (
    .clk, .shift_en, .din, .window
  );

  always_comb begin
    logic [BITS-1:0] m;
    logic [SW-1:0]   s;
    m = '0;
    s = '0;
    for (int j = 0; j < KK; j++) begin
      logic [BITS-1:0] e;
      for (int p = 0; p < BITS; p++) e[p] = window[p*KK + j];  // planes -> code
      if (e > m) m = e;
      s = s + SW'(e);
    end
    if (MODE == POOL_MAX) out_data = m;
    else                  out_data = BITS'((s + SW'(KK / 2)) / SW'(KK));
  end

endmodule

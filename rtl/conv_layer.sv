// conv_layer: one streaming convolution kernel (also used for fully
// connected layers, written as convolutions over the whole input).
//
// Operation. After reset the layer first takes its parameters from a 32-bit
// parameter stream: K*K*I*O float weights (binarized by weight_cache), then,
// if HAS_BN, 2*O normalization words (bn_cache). Later words are passed on
// unchanged, one cycle later, to param_out, so the layers of a network form a
// daisy chain fed by one host stream. Feature maps are accepted only once the
// layer is loaded.
//
// The input image (H x W x I, depth-first: all channels of a pixel, then the
// next pixel) is scanned over its padded extent (H+2P) x (W+2P). Each cycle
// one entry is shifted into the line buffer: a pixel channel from the input
// stream, or, at a padding position, the value -1 generated inside while the
// input is held off. When the last channel of a position completes a window
// that is a valid filter position (inside the image and on the stride grid),
// the layer halts its input and produces O outputs, one filter per clock,
// out_ch = 0..O-1, all for the same (x,y). Positions that are not on the
// stride grid (and window positions that overlap the top or left edge) cost
// only the cycles to shift them in.
//
// Outputs per filter: out_sum, the raw XNOR-popcount sum (used by residual
// blocks and by the final classifier), and out_act, its BatchNorm+activation
// code (0 when HAS_BN = 0, where the layer has no normalization cache).
//
// Timing, without back-pressure: one cycle per padded input entry plus O
// cycles per valid filter position, i.e.
// (H+2P)*(W+2P)*I + Ho*Wo*O cycles per image. Streams are valid/ready: a
// transfer happens when both are high in the same clock.
module conv_layer #(
  parameter int IN_BITS  = 2,
  parameter int ACT_BITS = 2,
  parameter int I        = 64,
  parameter int O        = 64,
  parameter int H        = 56,
  parameter int W        = 56,
  parameter int K        = 3,
  parameter int S        = 1,
  parameter int P        = 1,
  parameter bit HAS_BN   = 1'b1
) (
  input  logic                    clk,
  input  logic                    rst_n,
  // parameter daisy chain
  input  logic                    param_in_valid,
  input  qnn_pkg::param_t         param_in_data,
  output logic                    param_out_valid,
  output qnn_pkg::param_t         param_out_data,
  output logic                    loaded,
  // input feature map stream
  input  logic                    in_valid,
  output logic                    in_ready,
  input  logic [IN_BITS-1:0]      in_data,
  // output stream
  output logic                    out_valid,
  input  logic                    out_ready,
  output qnn_pkg::sum_t           out_sum,
  output logic [ACT_BITS-1:0]     out_act,
  output logic [qnn_pkg::CNT_W-1:0] out_ch
);
  import qnn_pkg::*;

  localparam int HP = H + 2 * P;
  localparam int WP = W + 2 * P;
  localparam int N  = K * K * I;
  localparam int AW = $clog2(O + 1);
  localparam logic [IN_BITS-1:0] PAD = IN_BITS'(pad_code(IN_BITS));

  typedef enum logic [0:0] {FILL, COMPUTE} state_e;

  state_e            state;
  logic [CNT_W-1:0]  row, col, ch, oc;
  logic              w_full, b_full;
  logic              is_pad, shift_en, last_ch, win_ok;
  logic [IN_BITS-1:0] din;
  logic [N*IN_BITS-1:0] window;
  logic [N-1:0]      wword;
  bn_entry_t         bn;

  // ---------------- parameter loading ----------------
  logic w_load, b_load, fwd;
  assign w_load = param_in_valid && !w_full;
  assign b_load = param_in_valid && w_full && !b_full;
  assign fwd    = param_in_valid && w_full && b_full;
  assign loaded = w_full && b_full;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      param_out_valid <= 1'b0;
      param_out_data  <= '0;
    end else begin
      param_out_valid <= fwd;
      param_out_data  <= param_in_data;
    end
  end

  weight_cache #(.N(N), .DEPTH(O)) u_wcache (
    .clk, .rst_n, .load_valid(w_load), .load_data(param_in_data), .full(w_full),
    .rd_addr(AW'(oc)), .rd_data(wword)
  );

  if (HAS_BN) begin : g_bn
    bn_cache #(.DEPTH(O)) u_bcache (
      .clk, .rst_n, .load_valid(b_load), .load_data(param_in_data), .full(b_full),
      .rd_addr(AW'(oc)), .rd_data(bn)
    );
    bn_act #(.BITS(ACT_BITS), .IN_W(SUM_W)) u_act (
      .a(out_sum), .tau(bn.tau), .delta(bn.delta), .code(out_act)
    );
  end else begin : g_no_bn
    assign b_full  = 1'b1;
    assign bn      = '0;
    assign out_act = '0;
  end

  // ---------------- scan control ----------------
  assign is_pad  = (row < CNT_W'(P)) || (row >= CNT_W'(H + P)) ||
                   (col < CNT_W'(P)) || (col >= CNT_W'(W + P));
  assign last_ch = (ch == CNT_W'(I - 1));
  assign win_ok  = (row >= CNT_W'(K - 1)) && (col >= CNT_W'(K - 1)) &&
                   ((row - CNT_W'(K - 1)) % CNT_W'(S) == 0) &&
                   ((col - CNT_W'(K - 1)) % CNT_W'(S) == 0);

  assign in_ready  = loaded && (state == FILL) && !is_pad;
  assign shift_en  = loaded && (state == FILL) && (is_pad || in_valid);
  assign din       = is_pad ? PAD : in_data;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= FILL;
      row   <= '0;
      col   <= '0;
      ch    <= '0;
      oc    <= '0;
    end else begin
      unique case (state)
        FILL: if (shift_en) begin
          if (!last_ch) begin
            ch <= ch + 1'b1;
          end else begin
            ch <= '0;
            if (win_ok) state <= COMPUTE;
            else        advance();
          end
        end
        COMPUTE: if (out_ready) begin
          if (oc == CNT_W'(O - 1)) begin
            oc    <= '0;
            state <= FILL;
            advance();
          end else begin
            oc <= oc + 1'b1;
          end
        end
        default: state <= FILL;
      endcase
    end
  end

  // Move to the next padded position, wrapping at the end of the image.
  task automatic advance();
    if (col == CNT_W'(WP - 1)) begin
      col <= '0;
      row <= (row == CNT_W'(HP - 1)) ? '0 : row + 1'b1;
    end else begin
      col <= col + 1'b1;
    end
  endtask

  window_buffer #(.EW(IN_BITS), .I(I), .WP(WP), .K(K), .TAP_CH(I), .LOOKAHEAD(1'b0)) u_buf (
    .clk, .shift_en, .din, .window
  );

  xnor_popcount #(.N(N), .BITS(IN_BITS)) u_dot (
    .act(window), .w(wword), .sum(out_sum)
  );

  assign out_valid = (state == COMPUTE);
  assign out_ch    = oc;

  // The input must not be taken while the layer is producing outputs.
  a_halt: assert property (@(posedge clk) disable iff (!rst_n) state == COMPUTE |-> !in_ready);

endmodule

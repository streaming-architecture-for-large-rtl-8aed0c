// skip_downsample: matches the skip stream to a downsampling residual stage.
//
// In ResNet-18 the first block of conv3_x, conv4_x and conv5_x halves the
// image and doubles the channels, so the skip data of the previous stage no
// longer lines up with the regular path. This module uses the parameter-free
// shortcut of the original ResNet ("option A"): it keeps only the pixels on
// even rows and even columns (stride 2) and, after the I_IN channels of a
// kept pixel, appends I_OUT - I_IN zero channels. The paper describes skip
// connections only for blocks with I == O and does not say how the stride-2
// blocks are handled; this shortcut is this design's choice.
//
// Interface: valid/ready streams of 16-bit values, depth-first order. Input
// pixels that are dropped are accepted at one per cycle; while the zero
// channels are emitted the input is held off.
module skip_downsample #(
  parameter int I_IN  = 64,
  parameter int I_OUT = 128,
  parameter int H     = 56,
  parameter int W     = 56
) (
  input  logic            clk,
  input  logic            rst_n,
  input  logic            in_valid,
  output logic            in_ready,
  input  qnn_pkg::skip_t  in_data,
  output logic            out_valid,
  input  logic            out_ready,
  output qnn_pkg::skip_t  out_data
);
  import qnn_pkg::*;

  logic [CNT_W-1:0] row, col, ch, zc;
  logic             zeros, keep, take;

  assign keep = !row[0] && !col[0];

  assign in_ready  = !zeros && (!keep || out_ready);
  assign out_valid = zeros || (keep && in_valid);
  assign out_data  = zeros ? '0 : in_data;
  assign take      = in_valid && in_ready;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      row   <= '0;
      col   <= '0;
      ch    <= '0;
      zc    <= '0;
      zeros <= 1'b0;
    end else if (zeros) begin
      if (out_ready) begin
        if (zc == CNT_W'(I_OUT - I_IN - 1)) begin
          zc    <= '0;
          zeros <= 1'b0;
          next_pixel();
        end else begin
          zc <= zc + 1'b1;
        end
      end
    end else if (take) begin
      if (ch != CNT_W'(I_IN - 1)) begin
        ch <= ch + 1'b1;
      end else begin
        ch <= '0;
        if (keep && I_OUT > I_IN) zeros <= 1'b1;
        else                      next_pixel();
      end
    end
  end

  task automatic next_pixel();
    if (col == CNT_W'(W - 1)) begin
      col <= '0;
      row <= (row == CNT_W'(H - 1)) ? '0 : row + 1'b1;
    end else begin
      col <= col + 1'b1;
    end
  endtask

endmodule

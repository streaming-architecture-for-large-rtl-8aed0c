// skip_fifo: the "input cache" of a residual block, a first-in first-out
// buffer that holds 16-bit skip-connection data until the convolution on the
// regular path produces the matching output.
//
// The paper sizes this buffer like the line buffer of a convolution,
// I*(W*(K-1) + K) entries; the residual block passes that depth in. In a
// correctly sized block the buffer only absorbs the delay of the regular path
// and never stalls the stream itself.
//
// Interface: valid/ready on both sides; in_ready = not full, out_valid = not
// empty, out_data shows the oldest entry (combinational read). A write and a
// read may happen in the same cycle.
module skip_fifo #(
  parameter int DW    = 16,
  parameter int DEPTH = 7360
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          in_valid,
  output logic          in_ready,
  input  logic [DW-1:0] in_data,
  output logic          out_valid,
  input  logic          out_ready,
  output logic [DW-1:0] out_data
);

  localparam int AW = $clog2(DEPTH);
  localparam int CW = $clog2(DEPTH + 1);

  logic [DW-1:0] mem [DEPTH];
  logic [AW-1:0] wp, rp;
  logic [CW-1:0] count;
  logic          push, pop;

  assign in_ready  = (count != CW'(DEPTH));
  assign out_valid = (count != '0);
  assign push      = in_valid && in_ready;
  assign pop       = out_valid && out_ready;
  assign out_data  = mem[rp];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wp    <= '0;
      rp    <= '0;
      count <= '0;
    end else begin
      if (push) wp <= (wp == AW'(DEPTH - 1)) ? '0 : wp + 1'b1;
      if (pop)  rp <= (rp == AW'(DEPTH - 1)) ? '0 : rp + 1'b1;
      count <= count + CW'(push) - CW'(pop);
    end
  end

  always_ff @(posedge clk) begin
    if (push) mem[wp] <= in_data;
  end

  a_no_overflow:  assert property (@(posedge clk) disable iff (!rst_n) count <= CW'(DEPTH));

endmodule

// tb_bn_cache: loads DEPTH (tau, delta) pairs with gaps in the stream and
// checks full and every stored entry.
module tb_bn_cache;
  import qnn_pkg::*;
  localparam int DEPTH = 5;
  logic clk = 1'b0;
  always #5 clk = ~clk;
  logic rst_n, load_valid, full;
  logic [31:0] load_data;
  logic [$clog2(DEPTH+1)-1:0] rd_addr;
  bn_entry_t rd_data;
  int tq[DEPTH], dq[DEPTH];
  int checks = 0, failures = 0;

  bn_cache #(.DEPTH(DEPTH)) dut (.*);

  task automatic send(int v);
    @(negedge clk);
    load_valid = 0;
    if ($urandom % 3 == 0) @(negedge clk);
    load_valid = 1; load_data = v;
  endtask

  initial begin
    rst_n = 1; #1 rst_n = 0; load_valid = 0; load_data = 0; rd_addr = 0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int o = 0; o < DEPTH; o++) begin
      tq[o] = int'($urandom) - 32'sh4000_0000;
      dq[o] = int'($urandom % 1000) + 1;
      send(tq[o]);
      send(dq[o]);
      @(negedge clk);
      load_valid = 0;
      checks++;
      if (full != (o == DEPTH - 1)) failures++;
    end
    send(7);
    @(negedge clk);
    load_valid = 0;
    for (int o = 0; o < DEPTH; o++) begin
      rd_addr = o[$clog2(DEPTH+1)-1:0];
      #1;
      checks++;
      if (rd_data.tau !== tq[o] || rd_data.delta !== dq[o]) failures++;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

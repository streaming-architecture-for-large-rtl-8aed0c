// tb_skip_fifo: random pushes and pops against a queue model, with
// full/empty flags checked every cycle and the buffer filled to its depth.
module tb_skip_fifo;
  localparam int DW = 16, DEPTH = 7;
  logic clk = 1'b0;
  always #5 clk = ~clk;
  logic rst_n, in_valid, in_ready, out_valid, out_ready;
  logic [DW-1:0] in_data, out_data;
  logic [DW-1:0] q[$];
  int checks = 0, failures = 0, fulls = 0;

  skip_fifo #(.DW(DW), .DEPTH(DEPTH)) dut (.*);

  initial begin
    rst_n = 1; #1 rst_n = 0; in_valid = 0; out_ready = 0; in_data = 0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int n = 0; n < 3000; n++) begin
      @(negedge clk);
      in_valid  = ($urandom % 4 != 0) ^ (n % 400 > 200);
      out_ready = ($urandom % 2 == 0) ^ (n % 400 > 200);
      in_data   = DW'($urandom);
      #1;
      checks += 2;
      if (in_ready != (q.size() < DEPTH)) failures++;
      if (out_valid != (q.size() > 0)) failures++;
      if (q.size() == DEPTH) fulls++;
      if (out_valid) begin
        checks++;
        if (out_data !== q[0]) failures++;
      end
      @(posedge clk);
      if (out_valid && out_ready) void'(q.pop_front());
      if (in_valid && in_ready) q.push_back(in_data);
    end
    checks++;
    if (fulls == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

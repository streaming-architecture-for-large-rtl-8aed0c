// tb_weight_cache: loads DEPTH filters of N float weights with random signs
// (including +0.0), checks that full rises exactly after the last float, that
// further floats are ignored, and that every stored bit is the Sign of its
// float (first float of a filter in bit 0).
module tb_weight_cache;
  localparam int N = 10, DEPTH = 4;
  logic clk = 1'b0;
  always #5 clk = ~clk;
  logic rst_n, load_valid, full;
  logic [31:0] load_data;
  logic [$clog2(DEPTH+1)-1:0] rd_addr;
  logic [N-1:0] rd_data;
  logic [N-1:0] expw [DEPTH];
  int checks = 0, failures = 0;

  weight_cache #(.N(N), .DEPTH(DEPTH)) dut (.*);

  initial begin
    rst_n = 1; #1 rst_n = 0; load_valid = 0; load_data = 0; rd_addr = 0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int o = 0; o < DEPTH; o++)
      for (int j = 0; j < N; j++) begin
        automatic bit b = 1'($urandom);
        @(negedge clk);
        checks++;
        if (full) failures++;
        load_valid = ($urandom % 4 != 0);
        while (!load_valid) begin
          @(negedge clk);
          load_valid = 1;
        end
        load_data = (b && j == 0) ? 32'h0 : {~b, 8'h80, 23'($urandom)};
        expw[o][j] = b;
      end
    @(negedge clk);
    load_valid = 1; load_data = 32'hbf80_0000;  // -1.0 after the end: ignored
    @(negedge clk);
    load_valid = 0;
    checks++;
    if (!full) failures++;
    for (int o = 0; o < DEPTH; o++) begin
      rd_addr = o[$clog2(DEPTH+1)-1:0];
      #1;
      checks++;
      if (rd_data !== expw[o]) begin
        failures++;
        $display("word %0d: %b expected %b", o, rd_data, expw[o]);
      end
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

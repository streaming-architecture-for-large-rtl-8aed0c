// tb_skip_source: every code must reach both outputs, the skip output as its
// level 2c-3, and the fork must take input only when both sides are ready.
module tb_skip_source;
  logic in_valid, in_ready, reg_valid, reg_ready, skip_valid, skip_ready;
  logic [1:0] in_data, reg_data;
  logic signed [15:0] skip_data;
  int checks = 0, failures = 0;

  skip_source #(.BITS(2)) dut (.*);

  initial begin
    for (int n = 0; n < 200; n++) begin
      in_valid = 1'($urandom); reg_ready = 1'($urandom); skip_ready = 1'($urandom);
      in_data = 2'($urandom);
      #1;
      checks += 5;
      if (in_ready != (reg_ready && skip_ready)) failures++;
      if (reg_valid != (in_valid && skip_ready)) failures++;
      if (skip_valid != (in_valid && reg_ready)) failures++;
      if (reg_data != in_data) failures++;
      if (skip_data != 16'(2 * int'(in_data) - 3)) failures++;
      #1;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

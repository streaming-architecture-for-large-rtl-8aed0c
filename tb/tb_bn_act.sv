// tb_bn_act: compares the binary-search quantizer (2 and 3 bits) with a
// direct count of the range boundaries tau + (j - 2^(n-1))*delta reached,
// on random values and on the boundaries themselves.
module tb_bn_act;
  logic signed [31:0] a, tau, delta;
  logic [1:0] c2;
  logic [2:0] c3;
  int checks = 0, failures = 0;

  bn_act #(.BITS(2), .IN_W(32)) u2 (.a, .tau, .delta, .code(c2));
  bn_act #(.BITS(3), .IN_W(32)) u3 (.a, .tau, .delta, .code(c3));

  function automatic int ref_code(int x, int t, int d, int bits);
    int n = 0;
    for (int j = 1; j < (1 << bits); j++)
      if (longint'(x) >= longint'(t) + longint'(j - (1 << (bits - 1))) * longint'(d)) n++;
    return n;
  endfunction

  initial begin
    for (int n = 0; n < 2000; n++) begin
      tau   = int'($urandom % 2001) - 1000;
      delta = int'($urandom % 200) + 1;
      case (n % 3)
        0: a = tau + int'($urandom % 1201) - 600;
        1: a = tau + (int'($urandom % 7) - 3) * delta;      // on a boundary
        default: a = tau + (int'($urandom % 7) - 3) * delta - 1;
      endcase
      #1;
      checks += 2;
      if (c2 != 2'(ref_code(a, tau, delta, 2))) failures++;
      if (c3 != 3'(ref_code(a, tau, delta, 3))) failures++;
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

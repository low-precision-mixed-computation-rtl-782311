// tb_sign_set: checks that the Sign Set unit returns +mag or -mag in two's
// complement, for the extreme magnitudes and 2000 random ones, both signs.
module tb_sign_set;
  import mac_pkg::*;

  logic                   neg;
  logic [PROD_W-1:0]      mag;
  logic signed [PROD_W:0] prod;
  int checks = 0, failures = 0;

  sign_set dut (.neg(neg), .mag(mag), .prod(prod));

  task automatic check(input logic n, input int m);
    int expected;
    neg = n;
    mag = PROD_W'(m);
    #1;
    expected = n ? -m : m;
    checks++;
    if (int'(prod) !== expected) begin
      failures++;
      $display("FAIL neg=%b mag=%0d: got %0d expected %0d", n, m, prod, expected);
    end
  endtask

  initial begin
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int n = 0; n < 2; n++) begin
      check(n[0], 0);
      check(n[0], 1);
      check(n[0], (1 << PROD_W) - 1);
      for (int i = 0; i < 1000; i++) check(n[0], int'($urandom_range((1 << PROD_W) - 1)));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

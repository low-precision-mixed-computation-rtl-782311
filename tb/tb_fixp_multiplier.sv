// tb_fixp_multiplier: exhaustive check of the FixP4 x FixP4 multiplier.
//
// The expected product is worked out in reals: the weight code read as a
// signed Q2.2 number (code/4, -2 .. 1.75) times the activation code, then
// scaled back by 4 to the product's 2^-2 units.
module tb_fixp_multiplier;
  import mac_pkg::*;

  weight_t                      w;
  act_t                         a;
  logic signed [FXP_PROD_W-1:0] prod;
  int checks = 0, failures = 0;

  fixp_multiplier dut (.w(w), .a(a), .prod(prod));

  initial begin
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int wi = 0; wi < 16; wi++) begin
      for (int ai = 0; ai < 16; ai++) begin
        real wval;
        int  expected;
        w = weight_t'(wi);
        a = act_t'(ai);
        #1;
        wval = (wi >= 8 ? real'(wi - 16) : real'(wi)) / 4.0;
        expected = int'(wval * ai * 4.0);
        checks++;
        if (int'(prod) !== expected) begin
          failures++;
          $display("FAIL w=%b a=%0d: got %0d expected %0d", w, ai, prod, expected);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

// tb_posit4_decoder: exhaustive check of the Posit(4,1) decoder.
//
// All 16 weight codes are combined with all 16 activation codes. The expected
// magnitude comes from the list of Posit(4,1) values written out as reals
// (0, +-1/16, +-1/4, +-1/2, +-1, +-2, +-4, +-16, NaR taken as 0), not from
// the bit layout: |value| * 16 is the expected raw magnitude and
// |value| * 16 * a the expected product.
module tb_posit4_decoder;
  import mac_pkg::*;

  weight_t           w;
  act_t              a;
  logic [RAW_W-1:0]  raw;
  logic [PROD_W-1:0] prod_mag;
  int checks = 0, failures = 0;

  posit4_decoder dut (.w(w), .a(a), .raw(raw), .prod_mag(prod_mag));

  // Posit(4,1) value of each code, in code order 0000 .. 1111.
  real posit_val [16] = '{0.0, 0.0625, 0.25, 0.5, 1.0, 2.0, 4.0, 16.0,
                          0.0, -16.0, -4.0, -2.0, -1.0, -0.5, -0.25, -0.0625};

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
        real mag;
        w = weight_t'(wi);
        a = act_t'(ai);
        #1;
        mag = posit_val[wi] < 0.0 ? -posit_val[wi] : posit_val[wi];
        checks++;
        if (raw !== RAW_W'(int'(mag * 16.0))) begin
          failures++;
          $display("FAIL raw w=%b: got %0d expected %0d", w, raw, int'(mag * 16.0));
        end
        checks++;
        if (prod_mag !== PROD_W'(int'(mag * 16.0 * ai))) begin
          failures++;
          $display("FAIL prod w=%b a=%0d: got %0d expected %0d", w, ai, prod_mag,
                   int'(mag * 16.0 * ai));
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

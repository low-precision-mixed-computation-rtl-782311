// fixp_multiplier: the fully fixed-point multiplier of the combined MAC.
//
// Multiplies a FixP4 weight, two's complement with two integer and two
// fraction bits, by the unsigned FixP4 activation code. The 8-bit signed
// product is in units of 2^-2 x activation LSB; its range is -120 .. 105.
//
// Combinational. Interface: w (4-bit signed code), a (4-bit unsigned code);
// prod (8-bit signed). The Q2.2 weight split and the unsigned activation
// follow the paper; a plain signed-by-unsigned multiply is this design's
// choice for the unit the paper only draws as a multiplier.
module fixp_multiplier
  import mac_pkg::*;
(
  input  weight_t                        w,
  input  act_t                           a,
  output logic signed [FXP_PROD_W-1:0]   prod
);

  always_comb begin
    prod = FXP_PROD_W'($signed(w) * $signed({1'b0, a}));
  end

endmodule

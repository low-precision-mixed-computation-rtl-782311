// sign_set: gives the unsigned Posit product its sign.
//
// The decoder delivers |W x A|; activations are never negative, so the sign
// of the product is the sign bit W[3] of the Posit weight. When it is set the
// magnitude is negated (invert and add one), otherwise it is passed on with a
// zero sign bit, so the output is the product in two's complement, one bit
// wider than the magnitude.
//
// Combinational. Interface: neg (= W[3]), mag (MAG_W bits); prod
// (MAG_W+1 bits, signed). The unit and its role follow the paper; its
// implementation as a conditional negation is the simplest that does it.
module sign_set #(
  parameter int unsigned MAG_W = mac_pkg::PROD_W
) (
  input  logic                    neg,
  input  logic [MAG_W-1:0]        mag,
  output logic signed [MAG_W:0]   prod
);

  always_comb begin
    prod = neg ? -$signed({1'b0, mag}) : $signed({1'b0, mag});
  end

endmodule

// posit4_decoder: Posit(4,1) decoder with the multiplication folded in.
//
// A 16-entry look-up table turns the 4-bit Posit weight code into its raw
// format: a 10-bit unsigned magnitude with LSB 2^-4. Because every non-zero
// Posit(4,1) magnitude is a power of two, the raw magnitude has a single '1'
// bit, and the table is stored as the position of that bit (0..8) plus a zero
// flag. The product |W x A| with the unsigned FixP4 activation is then the
// activation shifted left by that position. The sign is not applied here;
// sign_set does that from W[3].
//
//   code  value    raw (2^-4 units)   code  value    raw
//   0000  0        0                  1000  NaR      0 (treated as zero)
//   0001  1/16     1 << 0             1111  -1/16    1 << 0
//   0010  1/4      1 << 2             1110  -1/4     1 << 2
//   0011  1/2      1 << 3             1101  -1/2     1 << 3
//   0100  1        1 << 4             1100  -1       1 << 4
//   0101  2        1 << 5             1011  -2       1 << 5
//   0110  4        1 << 6             1010  -4       1 << 6
//   0111  16       1 << 8             1001  -16      1 << 8
//
// Purely combinational. Interface: w (Posit code), a (activation code);
// raw (10-bit magnitude), prod_mag (14-bit |W x A|, LSB 2^-4 x activation
// LSB). The LUT, the shift-as-multiply and the 10/14-bit widths follow the
// paper; the raw binary point and the NaR-as-zero rule are this design's.
module posit4_decoder
  import mac_pkg::*;
(
  input  weight_t           w,
  input  act_t              a,
  output logic [RAW_W-1:0]  raw,
  output logic [PROD_W-1:0] prod_mag
);

  logic       is_zero;
  logic [3:0] shamt;

  // Look-up table: position of the single '1' in the raw magnitude.
  always_comb begin
    is_zero = 1'b0;
    shamt   = 4'd0;
    unique case (w)
      4'b0000, 4'b1000: is_zero = 1'b1;        // zero, NaR
      4'b0001, 4'b1111: shamt   = 4'd0;        // 1/16
      4'b0010, 4'b1110: shamt   = 4'd2;        // 1/4
      4'b0011, 4'b1101: shamt   = 4'd3;        // 1/2
      4'b0100, 4'b1100: shamt   = 4'd4;        // 1
      4'b0101, 4'b1011: shamt   = 4'd5;        // 2
      4'b0110, 4'b1010: shamt   = 4'd6;        // 4
      4'b0111, 4'b1001: shamt   = 4'd8;        // 16
      default:          is_zero = 1'b1;
    endcase
  end

  always_comb begin
    raw      = is_zero ? '0 : RAW_W'(1) << shamt;
    prod_mag = is_zero ? '0 : PROD_W'(a) << shamt;
  end

endmodule

// mac_pkg: widths, operand formats and the per-weight number-system select
// shared by the mixed Posit/FixP multiply-accumulate datapath.
//
// Number formats
//   * Activation A: FixP4, an unsigned 4-bit code (activations are always
//     non-negative; the real value is code * alpha/15 with a per-layer clip
//     level alpha).
//   * FixP weight: 4-bit two's complement with two integer and two fraction
//     bits (Q2.2, value = code/4, range -2 .. 1.75).
//   * Posit weight: Posit(4,1), 15 usable values
//     {0, +-1/16, +-1/4, +-1/2, +-1, +-2, +-4, +-16}; bit 3 is the sign.
//   * Raw Posit format: a 10-bit unsigned magnitude in units of 2^-4. For
//     Posit(4,1) it is one-hot (or zero), so multiplying by it is a shift.
//     The scaled variants Posit4/4 and Posit4/8 use the same bits; only the
//     binary point moves (units of 2^-6 and 2^-7), so they need no logic.
//   * Product and accumulator: two's complement. The Posit product is 14 bits
//     of magnitude plus a sign, the FixP product is 8 bits, and both are added
//     into a 24-bit accumulator without shifting, so the accumulator LSB is
//     2^-4 (Posit), 2^-6 (Posit/4), 2^-7 (Posit/8) or 2^-2 (FixP) times the
//     activation LSB, fixed per layer.
// The 10/14/24-bit widths and the Q2.2 FixP split follow the paper; the raw
// format's binary point and the un-shifted product alignment are choices of
// this design.
package mac_pkg;

  localparam int unsigned W_W     = 4;   // weight code width (Posit4 or FixP4)
  localparam int unsigned A_W     = 4;   // activation code width (FixP4)
  localparam int unsigned RAW_W   = 10;  // raw Posit magnitude width
  localparam int unsigned PROD_W  = RAW_W + A_W;      // |W x A| width = 14
  localparam int unsigned GUARD_W = 10;  // extra accumulation bits
  localparam int unsigned ACC_W   = PROD_W + GUARD_W; // accumulator width = 24
  localparam int unsigned FXP_PROD_W = W_W + A_W;     // FixP product width = 8

  // Binary point of the raw Posit magnitude (number of fraction bits) for the
  // unscaled Posit4; Posit4/4 and Posit4/8 add 2 and 3.
  localparam int unsigned RAW_FRAC = 4;
  // Fraction bits of the FixP4 weight (Q2.2).
  localparam int unsigned FXP_FRAC = 2;

  // Number system of the weight currently applied (chosen per layer).
  typedef enum logic {
    NS_FIXP  = 1'b0,
    NS_POSIT = 1'b1
  } num_sys_e;

  // Posit(4,1) code of NaR (not a real). The quantizer never produces it.
  localparam logic [W_W-1:0] POSIT_NAR = 4'b1000;

  typedef logic [W_W-1:0]    weight_t;
  typedef logic [A_W-1:0]    act_t;
  typedef logic signed [ACC_W-1:0] acc_t;

endpackage

// mixed_mac: combined Posit/FixP multiply-accumulate unit (top).
//
// One MAC that multiplies a 4-bit weight, coded either as Posit(4,1) or as
// FixP4, by an unsigned FixP4 activation and adds the product to a 24-bit
// accumulator, one term per clock. Layers whose weights are sensitive to
// quantization use Posit weights; the rest use FixP weights; activations are
// FixP everywhere, so no Posit encoder is needed.
//
// Datapath, in the order of the block diagram:
//   W REG, A REG   input registers (the number-system select, valid and
//                  clear are registered alongside them)
//   steering mux   passes the registered weight to the Posit path or to the
//                  FixP path and holds the other path's weight at zero, so
//                  the idle path does not toggle
//   Posit path     posit4_decoder (LUT + shift = |W x A|, 14 bits), then
//                  sign_set driven by W[3] (two's complement, 15 bits)
//   FixP path      fixp_multiplier (Q2.2 x unsigned, 8 bits signed)
//   output mux     picks the active path's product, sign-extended to 24 bits
//   accumulator    mac_accumulator, 24-bit adder and register
// With the select held at NS_POSIT the unit is the plain Posit/FixP MAC.
//
// Interface: in_valid qualifies in_w, in_a, in_ns and in_clear; in_clear
// marks the first term of a new dot product. acc is the running sum in two's
// complement (LSB as set out in mac_pkg); acc_valid is high for one cycle
// each time acc has taken in a term. Timing: a term presented at clock edge
// t is captured by the input registers at t and is in acc after edge t+1,
// two edges of latency, one term per cycle, no stalls. Reset is asynchronous
// and active low.
// The structure, widths and the W[3] sign follow the paper; the handshake
// (valid, clear), reset and the per-term number-system select input are this
// design's, since the diagram does not draw control signals.
module mixed_mac
  import mac_pkg::*;
(
  input  logic      clk,
  input  logic      rst_n,
  input  logic      in_valid,
  input  logic      in_clear,
  input  num_sys_e  in_ns,
  input  weight_t   in_w,
  input  act_t      in_a,
  output acc_t      acc,
  output logic      acc_valid
);

  // ---------------- input registers ----------------
  weight_t  w_q;
  act_t     a_q;
  num_sys_e ns_q;
  logic     valid_q, clear_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      w_q     <= '0;
      a_q     <= '0;
      ns_q    <= NS_FIXP;
      valid_q <= 1'b0;
      clear_q <= 1'b0;
    end else begin
      valid_q <= in_valid;
      if (in_valid) begin
        w_q     <= in_w;
        a_q     <= in_a;
        ns_q    <= in_ns;
        clear_q <= in_clear;
      end
    end
  end

  // ---------------- steering mux ----------------
  weight_t w_posit, w_fixp;
  always_comb begin
    w_posit = (ns_q == NS_POSIT) ? w_q : '0;
    w_fixp  = (ns_q == NS_FIXP)  ? w_q : '0;
  end

  // ---------------- Posit path ----------------
  logic [RAW_W-1:0]       raw;
  logic [PROD_W-1:0]      prod_mag;
  logic signed [PROD_W:0] prod_posit;

  posit4_decoder u_decoder (
    .w        (w_posit),
    .a        (a_q),
    .raw      (raw),
    .prod_mag (prod_mag)
  );

  sign_set #(.MAG_W(PROD_W)) u_sign_set (
    .neg  (w_posit[W_W-1]),
    .mag  (prod_mag),
    .prod (prod_posit)
  );

  // ---------------- FixP path ----------------
  logic signed [FXP_PROD_W-1:0] prod_fixp;

  fixp_multiplier u_fixp_mul (
    .w    (w_fixp),
    .a    (a_q),
    .prod (prod_fixp)
  );

  // ---------------- output mux ----------------
  acc_t prod_sel;
  always_comb begin
    prod_sel = (ns_q == NS_POSIT) ? acc_t'(prod_posit) : acc_t'(prod_fixp);
  end

  // ---------------- adder + accumulator register ----------------
  mac_accumulator #(.ACC_W(ACC_W)) u_acc (
    .clk   (clk),
    .rst_n (rst_n),
    .en    (valid_q),
    .clear (clear_q),
    .prod  (prod_sel),
    .acc   (acc)
  );

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) acc_valid <= 1'b0;
    else        acc_valid <= valid_q;
  end

  // The Posit quantizer maps weights onto the 15 real Posit(4,1) values only,
  // so NaR never reaches the unit (it would be taken as zero).
  a_no_nar: assert property (@(posedge clk) disable iff (!rst_n)
    (in_valid && in_ns == NS_POSIT) |-> (in_w != POSIT_NAR))
    else $error("NaR weight code presented to the Posit path");

  // The raw Posit magnitude is one-hot or zero.
  a_raw_onehot: assert property (@(posedge clk) disable iff (!rst_n)
    $onehot0(raw));

endmodule

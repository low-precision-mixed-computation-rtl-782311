// tb_mac_workloads: one output of the longest dot product of each evaluated
// network, run through the combined MAC at its default sizes.
//
// Dot-product lengths (kernel height x width x input channels, or the input
// width of a fully connected layer): 576 (ResNet-20, 3x3x64), 1024
// (MobileNetV1 classifier), 1280 (MobileNetV2 classifier), 3072 (BERT-base,
// GPT-2 small and ViT-B feed-forward output) and 4608 (VGG-16 and ResNet-18,
// 3x3x512). Each length is run four times: as a FixP4 layer, and as a
// Posit4, Posit4/4 and Posit4/8 layer. Weights are drawn with a bell-shaped
// spread around zero (sum of four uniform draws), so small magnitudes are
// common, as in trained layers; activations are uniform FixP4 codes.
// The reference is the real-valued dot product of the weights' real values
// (Posit value divided by the scale, or Q2.2 value) and the activation codes;
// acc is compared after scaling by its LSB for that layer (2^-4, 2^-6, 2^-7
// or 2^-2). The cycle count is also checked: with one term per clock and
// two edges of latency, the last result appears len + 1 edges after the
// first term is presented.
module tb_mac_workloads;
  import mac_pkg::*;

  logic     clk = 0, rst_n = 0;
  logic     in_valid = 0, in_clear = 0;
  num_sys_e in_ns = NS_FIXP;
  weight_t  in_w = '0;
  act_t     in_a = '0;
  acc_t     acc;
  logic     acc_valid;
  int checks = 0, failures = 0;

  mixed_mac dut (
    .clk(clk), .rst_n(rst_n), .in_valid(in_valid), .in_clear(in_clear),
    .in_ns(in_ns), .in_w(in_w), .in_a(in_a), .acc(acc), .acc_valid(acc_valid));

  always #5 clk = ~clk;

  real posit_val [16] = '{0.0, 0.0625, 0.25, 0.5, 1.0, 2.0, 4.0, 16.0,
                          0.0, -16.0, -4.0, -2.0, -1.0, -0.5, -0.25, -0.0625};
  // Posit codes ordered by value, NaR left out: index 0 is -16, 14 is +16.
  weight_t posit_by_rank [15] = '{4'b1001, 4'b1010, 4'b1011, 4'b1100, 4'b1101,
                                  4'b1110, 4'b1111, 4'b0000, 4'b0001, 4'b0010,
                                  4'b0011, 4'b0100, 4'b0101, 4'b0110, 4'b0111};
  int lengths [5] = '{576, 1024, 1280, 3072, 4608};

  // Clock-edge counter and count of results; last_out_cycle is the edge
  // after which the latest result appeared.
  longint cycle = 0, first_cycle = 0, last_out_cycle = 0;
  int     n_out = 0;
  always @(posedge clk) begin
    cycle <= cycle + 1;
    #1;
    if (acc_valid) begin
      n_out++;
      last_out_cycle = cycle;
    end
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // Bell-shaped integer in [0, 4*max], centred on 2*max.
  function automatic int bell(input int max);
    return $urandom_range(max) + $urandom_range(max) + $urandom_range(max) + $urandom_range(max);
  endfunction

  // kind: 0 FixP4, 1 Posit4, 2 Posit4/4, 3 Posit4/8
  task automatic run_layer(input int len, input int kind);
    real expected = 0.0, got, lsb;
    int  start, cycles;
    num_sys_e ns = (kind == 0) ? NS_FIXP : NS_POSIT;
    real scale = (kind == 3) ? 8.0 : (kind == 2) ? 4.0 : 1.0;
    @(negedge clk);
    start = 0;
    n_out = 0;
    first_cycle = cycle;
    for (int i = 0; i < len; i++) begin
      weight_t w;
      act_t    a = act_t'($urandom);
      real     wv;
      if (kind == 0) begin
        w  = weight_t'(bell(4) - 8);           // -8 .. 8, clipped to 7
        if ($signed(w) == -8 && $urandom_range(1)) w = 4'd7;
        wv = real'($signed(w)) / 4.0;
      end else begin
        w  = posit_by_rank[(bell(7) * 14 + 14) / 28];
        wv = posit_val[w] / scale;
      end
      expected += wv * real'(a);
      in_valid = 1; in_clear = (i == 0); in_ns = ns; in_w = w; in_a = a;
      @(negedge clk);
      start++;
    end
    in_valid = 0; in_clear = 0;
    while (n_out < len) @(posedge clk);
    #1;
    cycles = int'(last_out_cycle - first_cycle);
    lsb = (kind == 0) ? 1.0 / real'(1 << FXP_FRAC)
                      : 1.0 / real'(1 << RAW_FRAC) / scale;
    got = real'(acc) * lsb;
    checks++;
    if (got != expected) begin
      failures++;
      $display("FAIL len=%0d kind=%0d: got %f expected %f", len, kind, got, expected);
    end
    checks++;
    if (cycles != len + 1) begin
      failures++;
      $display("FAIL len=%0d kind=%0d: %0d cycles, expected %0d", len, kind, cycles, len + 1);
    end
    $display("len=%0d kind=%0d result=%f (acc=%0d) cycles=%0d", len, kind, got, acc, cycles);
  endtask

  initial begin
    repeat (3) @(posedge clk);
    @(negedge clk) rst_n = 1;
    foreach (lengths[i])
      for (int k = 0; k < 4; k++) run_layer(lengths[i], k);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

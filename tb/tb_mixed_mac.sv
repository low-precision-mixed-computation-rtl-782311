// tb_mixed_mac: end-to-end test of the combined Posit/FixP MAC at its default
// sizes.
//
// A stream of dot products is fed one term per clock. Each dot product uses
// one number system for all its weights, as a layer does; the first term of
// each carries in_clear. Between dot products and inside them the stream has
// random idle cycles (in_valid low). The reference sum is kept in reals:
// Posit(4,1) weights are looked up in a table of their real values, FixP4
// weights are read as signed Q2.2, activations as unsigned integers, and the
// sum is compared with acc scaled by its LSB (2^-4 for Posit, 2^-2 for
// FixP). Every term also checks the latency: acc_valid must rise exactly two
// clock edges after the term was presented, and acc must then hold the sum.
//
// Covered and counted: Posit dot products, FixP dot products, switches
// between the two, back-to-back dot products (clear right after the last
// term), idle cycles, negative Posit products (Sign Set), zero Posit weights,
// the largest Posit magnitude (16), and one dot product of 2184 worst-case
// Posit terms that must not wrap. One that never happened is a failure.
module tb_mixed_mac;
  import mac_pkg::*;

  logic     clk = 0, rst_n = 0;
  logic     in_valid = 0, in_clear = 0;
  num_sys_e in_ns = NS_FIXP;
  weight_t  in_w = '0;
  act_t     in_a = '0;
  acc_t     acc;
  logic     acc_valid;

  int checks = 0, failures = 0;
  int n_posit_dp = 0, n_fixp_dp = 0, n_switch = 0, n_b2b = 0, n_idle = 0;
  int n_neg = 0, n_zero = 0, n_max = 0, n_worst = 0;

  mixed_mac dut (
    .clk(clk), .rst_n(rst_n), .in_valid(in_valid), .in_clear(in_clear),
    .in_ns(in_ns), .in_w(in_w), .in_a(in_a), .acc(acc), .acc_valid(acc_valid));

  always #5 clk = ~clk;

  real posit_val [16] = '{0.0, 0.0625, 0.25, 0.5, 1.0, 2.0, 4.0, 16.0,
                          0.0, -16.0, -4.0, -2.0, -1.0, -0.5, -0.25, -0.0625};

  // Expected results in term order, with the cycle each term was presented.
  real     exp_q   [$];
  num_sys_e exp_ns [$];
  longint  exp_cyc [$];
  longint  cycle = 0;
  real     running = 0.0;
  num_sys_e last_ns = NS_FIXP;
  logic    last_was_term = 0;

  always @(posedge clk) cycle <= cycle + 1;

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // Output monitor: sampled after each rising edge.
  always @(posedge clk) begin
    #1;
    if (rst_n && acc_valid) begin
      real      e, got;
      num_sys_e ns;
      longint   c;
      checks++;
      if (exp_q.size() == 0) begin
        failures++;
        $display("FAIL acc_valid with no term outstanding");
      end else begin
        e  = exp_q.pop_front();
        ns = exp_ns.pop_front();
        c  = exp_cyc.pop_front();
        got = real'(acc) / real'(1 << ((ns == NS_POSIT) ? RAW_FRAC : FXP_FRAC));
        if (got != e) begin
          failures++;
          $display("FAIL cycle %0d: acc=%f expected %f", cycle, got, e);
        end
        checks++;
        if (cycle - c != 2) begin
          failures++;
          $display("FAIL latency %0d cycles, expected 2", cycle - c);
        end
      end
    end
  end

  // Present one term at the next falling edge; it is captured at the
  // following rising edge.
  task automatic term(input num_sys_e ns, input logic clr, input weight_t w, input act_t a);
    real wv;
    @(negedge clk);
    in_valid = 1; in_clear = clr; in_ns = ns; in_w = w; in_a = a;
    wv = (ns == NS_POSIT) ? posit_val[w] : real'($signed(w)) / 4.0;
    running = (clr ? 0.0 : running) + wv * real'(a);
    exp_q.push_back(running);
    exp_ns.push_back(ns);
    exp_cyc.push_back(cycle);
    if (clr && last_was_term) n_b2b++;
    if (clr && ns != last_ns) n_switch++;
    if (ns == NS_POSIT && w[3] && a != 0) n_neg++;
    if (ns == NS_POSIT && w == 4'b0000) n_zero++;
    if (ns == NS_POSIT && (w == 4'b0111 || w == 4'b1001)) n_max++;
    last_ns = ns;
    last_was_term = 1;
  endtask

  task automatic idle();
    @(negedge clk);
    in_valid = 0; in_clear = 0;
    in_w = weight_t'($urandom); in_a = act_t'($urandom);
    n_idle++;
    last_was_term = 0;
  endtask

  function automatic weight_t rand_posit();
    weight_t w;
    do w = weight_t'($urandom); while (w == POSIT_NAR);
    return w;
  endfunction

  task automatic dot_product(input num_sys_e ns, input int len);
    for (int i = 0; i < len; i++) begin
      weight_t w = (ns == NS_POSIT) ? rand_posit() : weight_t'($urandom);
      term(ns, i == 0, w, act_t'($urandom));
      if ($urandom_range(9) == 0) idle();
    end
    if (ns == NS_POSIT) n_posit_dp++; else n_fixp_dp++;
  endtask

  initial begin
    repeat (3) @(posedge clk);
    @(negedge clk) rst_n = 1;
    for (int d = 0; d < 60; d++) begin
      dot_product($urandom_range(1) ? NS_POSIT : NS_FIXP, 1 + $urandom_range(40));
      if ($urandom_range(1) == 0) idle();
    end
    // Worst-case Posit dot product: 2184 terms of 16 x 15.
    for (int i = 0; i < 2184; i++) term(NS_POSIT, i == 0, 4'b0111, 4'hF);
    n_worst++;
    // A FixP layer right after it, then drain.
    dot_product(NS_FIXP, 16);
    idle(); idle(); idle(); idle();
    repeat (4) @(posedge clk);
    checks++;
    if (exp_q.size() != 0) begin
      failures++;
      $display("FAIL %0d terms never reached the accumulator", exp_q.size());
    end
    $display("posit_dp=%0d fixp_dp=%0d switch=%0d back_to_back=%0d idle=%0d neg=%0d zero=%0d max=%0d worst=%0d",
             n_posit_dp, n_fixp_dp, n_switch, n_b2b, n_idle, n_neg, n_zero, n_max, n_worst);
    if (n_posit_dp == 0) begin failures++; $display("FAIL no Posit dot product"); end
    if (n_fixp_dp  == 0) begin failures++; $display("FAIL no FixP dot product"); end
    if (n_switch   == 0) begin failures++; $display("FAIL no number-system switch"); end
    if (n_b2b      == 0) begin failures++; $display("FAIL no back-to-back dot products"); end
    if (n_idle     == 0) begin failures++; $display("FAIL no idle cycle"); end
    if (n_neg      == 0) begin failures++; $display("FAIL no negative Posit product"); end
    if (n_zero     == 0) begin failures++; $display("FAIL no zero Posit weight"); end
    if (n_max      == 0) begin failures++; $display("FAIL no largest Posit magnitude"); end
    if (n_worst    == 0) begin failures++; $display("FAIL no worst-case dot product"); end
    checks += 9;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

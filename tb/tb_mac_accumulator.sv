// tb_mac_accumulator: random enable / clear / product sequences against a
// reference sum kept in a 64-bit integer and wrapped to 24 bits.
//
// Checks reset, hold while en is low, restart on clear, and that the new sum
// is visible right after the clock edge that takes the product in (one edge
// of latency). It also adds 2184 products of the largest Posit(4,1) x FixP4
// magnitude, 3840, and checks that the result, 8386560, has not wrapped.
module tb_mac_accumulator;
  import mac_pkg::*;

  logic clk = 0, rst_n = 0, en = 0, clear = 0;
  acc_t prod = '0, acc;
  longint ref_acc = 0;
  int checks = 0, failures = 0;

  mac_accumulator dut (
    .clk(clk), .rst_n(rst_n), .en(en), .clear(clear), .prod(prod), .acc(acc));

  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic longint wrap24(longint v);
    longint m = v & ((64'sd1 <<< ACC_W) - 1);
    return (m >= (64'sd1 <<< (ACC_W - 1))) ? m - (64'sd1 <<< ACC_W) : m;
  endfunction

  task automatic step(input logic e, input logic c, input int p);
    @(negedge clk);
    en = e; clear = c; prod = acc_t'(p);
    @(posedge clk);
    if (e) ref_acc = wrap24((c ? 0 : ref_acc) + p);
    #1;
    checks++;
    if (longint'(acc) !== ref_acc) begin
      failures++;
      $display("FAIL en=%b clear=%b prod=%0d: acc=%0d expected %0d", e, c, p, acc, ref_acc);
    end
  endtask

  initial begin
    repeat (2) @(posedge clk);
    #1;
    checks++;
    if (acc !== '0) begin failures++; $display("FAIL reset value %0d", acc); end
    @(negedge clk) rst_n = 1;
    for (int i = 0; i < 3000; i++) begin
      step($urandom_range(3) != 0, $urandom_range(15) == 0,
           int'($urandom_range(7680)) - 3840);
    end
    // Worst-case Posit dot product that must still fit.
    step(1, 1, 3840);
    for (int i = 1; i < 2184; i++) step(1, 0, 3840);
    checks++;
    if (acc !== acc_t'(8386560)) begin
      failures++; $display("FAIL worst-case sum %0d", acc);
    end
    // Wrap-around past the top of the range.
    step(1, 0, 3840);
    checks++;
    if (acc >= 0) begin failures++; $display("FAIL expected wrap, acc=%0d", acc); end
    // Asynchronous reset clears the register.
    @(negedge clk) rst_n = 0;
    #1;
    checks++;
    if (acc !== '0) begin failures++; $display("FAIL async reset, acc=%0d", acc); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

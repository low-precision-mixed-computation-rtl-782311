// mac_accumulator: the adder and accumulator register of the MAC.
//
// Every cycle with en high, the signed product is added to the register;
// when clear is high as well, the register is loaded with the product alone,
// which starts a new dot product without a dead cycle. The sum wraps in two's
// complement: the 10 guard bits above the 14-bit product keep at least 1024
// worst-case terms (2184 for Posit(4,1) x FixP4, 69905 for FixP x FixP) from
// overflowing.
//
// Interface: clk, rst_n (asynchronous, active low, clears the register), en,
// clear, prod (ACC_W-bit signed, already sign-extended by the caller);
// acc (ACC_W-bit signed). Timing: acc shows the new sum one clock edge after
// en. The 24-bit width follows the paper; reset, en and clear are this
// design's choice.
module mac_accumulator #(
  parameter int unsigned ACC_W = mac_pkg::ACC_W
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     en,
  input  logic                     clear,
  input  logic signed [ACC_W-1:0]  prod,
  output logic signed [ACC_W-1:0]  acc
);

  logic signed [ACC_W-1:0] sum;

  always_comb begin
    sum = (clear ? '0 : acc) + prod;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)  acc <= '0;
    else if (en) acc <= sum;
  end

endmodule

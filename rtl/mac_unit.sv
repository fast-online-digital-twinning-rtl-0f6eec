// mac_unit: one fixed-point multiply-accumulate lane (the "MUL + ADD" resource
// that every stage of the kernel shares for its parallel computation).
//
// acc is a Q16.16 register. In the cycle after clr is high it holds init
// (a bias, or zero); otherwise, in the cycle after en is high it holds
// acc + a*b, the product truncated to Q16.16 and both the product and the sum
// saturated. clr wins over en. One multiply-accumulate per cycle (II = 1),
// one cycle of latency; acc is valid the cycle after the last en.
// The kernel description only names a shared multiply-add; the Q16.16
// format, saturation and the clr/en interface are this design's choices.
module mac_unit
  import merinda_pkg::*;
(
  input  logic clk,
  input  logic rst_n,
  input  logic clr,
  input  logic en,
  input  fx_t  init,
  input  fx_t  a,
  input  fx_t  b,
  output fx_t  acc
);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)   acc <= '0;
    else if (clr) acc <= init;
    else if (en)  acc <= fx_add(acc, fx_mul(a, b));
  end

endmodule

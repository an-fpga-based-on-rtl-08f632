// fx_mul: the core's single Q20 multiplier, one cycle of latency.
//
// p is registered: operands presented in cycle c give p in cycle c+1.
// The 64-bit product is shifted right arithmetically by 20 (truncation
// toward minus infinity) and saturated to 32 bits. A 32x32 product maps to
// four DSP slices on the target device, which matches the constant DSP
// count the design reports for every hidden-layer size. Rounding mode and
// saturation are this design's choices.
module fx_mul
  import oselm_pkg::*;
(
  input  logic clk,
  input  fx_t  a,
  input  fx_t  b,
  output fx_t  p
);
  logic signed [2*W-1:0] prod;
  assign prod = a * b;

  always_ff @(posedge clk) p <= fx_sat64(prod >>> FRAC);
endmodule

// fx_add: the core's single adder/subtractor for Q20 words.
//
// Combinational: y = a + b (sub = 0) or y = a - b (sub = 1), computed on 33
// bits and saturated to the 32-bit range instead of wrapping. Because the
// format is the same for all operands, addition needs no alignment. The
// design uses exactly one instance, shared by the predict and train
// sequencers; saturation is this design's choice, the paper only names
// the unit.
module fx_add
  import oselm_pkg::*;
(
  input  fx_t  a,
  input  fx_t  b,
  input  logic sub,
  output fx_t  y
);
  logic signed [W:0] s;
  always_comb begin
    s = sub ? ((W+1)'(a) - (W+1)'(b)) : ((W+1)'(a) + (W+1)'(b));
    if (s[W] != s[W-1]) y = s[W] ? FX_MIN : FX_MAX;
    else                y = s[W-1:0];
  end
endmodule

// oselm_arith_if: operand and result wires of the core's one shared set of
// arithmetic units (one adder/subtractor, one multiplier, one divider).
//
// A sequencer (client) drives the operands; the core routes the operands
// of whichever sequencer is running to the units and returns the results
// to all of them. Timing is that of the units: add_y is combinational,
// mul_p appears one cycle after mul_a/mul_b, and div_q is valid when
// div_done pulses some 53 cycles after a div_start pulse.
interface oselm_arith_if;
  import oselm_pkg::*;
  fx_t  mul_a, mul_b, mul_p;
  fx_t  add_a, add_b, add_y;
  logic add_sub;
  logic div_start;
  fx_t  div_num, div_den, div_q;
  logic div_busy, div_done;

  modport client (output mul_a, mul_b, add_a, add_b, add_sub, div_start, div_num, div_den,
                  input  mul_p, add_y, div_q, div_busy, div_done);
  modport unit   (input  mul_a, mul_b, add_a, add_b, add_sub, div_start, div_num, div_den,
                  output mul_p, add_y, div_q, div_busy, div_done);
endinterface

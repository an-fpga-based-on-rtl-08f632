// oselm_pkg: number format, sizes and command types shared by the OS-ELM
// Q-Network core.
//
// All arithmetic is 32-bit two's-complement fixed point with 20 fraction
// bits (Q20, range about -2048 .. +2048, step 2^-20), the format the design
// is specified with. Saturation on overflow and truncation toward minus
// infinity after a multiply are this design's own choices.
//
// The command set (load, predict, train, target sync) mirrors the split of
// work between the host processor and the core: the host runs the initial
// training and loads alpha, b, beta and P; the core then predicts Q-values
// and runs the sequential OS-ELM training step on its own.
package oselm_pkg;

  localparam int unsigned W    = 32;  // word width
  localparam int unsigned FRAC = 20;  // fraction bits (Q20)

  typedef logic signed [W-1:0] fx_t;

  localparam fx_t FX_ONE     = fx_t'(32'sd1 <<< FRAC);
  localparam fx_t FX_NEG_ONE = -FX_ONE;
  localparam fx_t FX_MAX     = fx_t'({1'b0, {(W-1){1'b1}}});
  localparam fx_t FX_MIN     = fx_t'({1'b1, {(W-1){1'b0}}});
  localparam fx_t FX_HALF    = fx_t'(32'sd1 <<< (FRAC-1));

  // Saturate a wider signed value into a word.
  function automatic fx_t fx_sat64(input logic signed [63:0] v);
    if (v > 64'(FX_MAX))      return FX_MAX;
    else if (v < 64'(FX_MIN)) return FX_MIN;
    else                      return fx_t'(v);
  endfunction

  // ReLU, the hidden-layer activation G.
  function automatic fx_t fx_relu(input fx_t v);
    return v[W-1] ? '0 : v;
  endfunction

  // Clip to [-1, 1] (Q-value clipping of the teacher value).
  function automatic fx_t fx_clip1(input fx_t v);
    if (v > FX_ONE)          return FX_ONE;
    else if (v < FX_NEG_ONE) return FX_NEG_ONE;
    else                     return v;
  endfunction

  // Input value that encodes action k of n_act in the simplified output
  // model: evenly spaced over [-0.5, 0.5], i.e. -0.5 for a0 and +0.5 for a1
  // when there are two actions.
  function automatic fx_t act_value(input int unsigned k, input int unsigned n_act);
    if (n_act < 2) return '0;
    return fx_t'(-FX_HALF + fx_t'(k) * fx_t'(FX_ONE / fx_t'(n_act - 1)));
  endfunction

  // Memories the host can write and read back through the load port.
  typedef enum logic [2:0] {
    MEM_ALPHA = 3'd0,  // input weights, address i*N_HID + j
    MEM_BIAS  = 3'd1,  // hidden bias b, address j
    MEM_BETA1 = 3'd2,  // output weights of theta1 (trained), address j
    MEM_BETA2 = 3'd3,  // output weights of theta2 (fixed target), address j
    MEM_P     = 3'd4   // P matrix, address i*N_HID + j
  } mem_sel_e;

  typedef enum logic [1:0] {
    OP_PREDICT = 2'd0,  // Q(s, a) for every action, with beta of theta1 or theta2
    OP_TRAIN   = 2'd1,  // one sequential training step with (s, a, r, d, maxQ)
    OP_SYNC    = 2'd2   // theta2 <- theta1 (copy beta1 into beta2)
  } op_e;

endpackage

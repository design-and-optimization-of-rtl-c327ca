// resnet_pkg: types, constants and arithmetic helpers shared by the
// residual-network dataflow accelerator.
//
// Number formats follow the quantisation scheme of the design: 8-bit signed
// activations and weights, 16-bit signed biases and 32-bit signed
// accumulators. All scaling factors are powers of two, so requantising an
// accumulator to an activation is an arithmetic right shift with rounding
// followed by a clip. The rounding mode (add half, then shift: round half
// up) is this design's choice; the source describes only "round" and "clip".
//
// The parameter generator functions (param_weight / param_bias) define the
// contents of the on-chip parameter memories. Trained weights are not part
// of this design, so the memories are filled with a deterministic
// pseudo-random pattern: an integer mixing hash of (seed, index). A
// testbench that knows the seed can recompute every weight on its own.
package resnet_pkg;

  typedef logic signed [7:0]  act_t;   // activation, int8
  typedef logic signed [7:0]  wgt_t;   // weight, int8
  typedef logic signed [15:0] bias_t;  // bias, int16
  typedef logic signed [31:0] acc_t;   // accumulator, int32


  // Longest chain of packed (two MACs per multiplier) DSP stages whose
  // low lane cannot overflow for 8-bit operands.
  localparam int unsigned MAX_PACKED_CHAIN = 7;

  // Requantise an accumulator: round(acc / 2^shift), then clip to
  // [0,127] after ReLU or to [-128,127] without it.
  function automatic act_t requant(input acc_t acc, input int unsigned shift,
                                   input bit relu);
    logic signed [32:0] r;
    r = {acc[31], acc};
    if (shift > 0) r = (r + (33'sd1 <<< (shift - 1))) >>> shift;
    if (relu && r < 0)  return act_t'(0);
    if (r > 33'sd127)   return act_t'(127);
    if (r < -33'sd128)  return act_t'(-128);
    return act_t'(r);
  endfunction

  // Integer mixing hash (xorshift-multiply) used to fill parameter memories.
  function automatic logic [31:0] mix32(input logic [31:0] seed,
                                        input logic [31:0] idx);
    logic [31:0] x;
    x = seed * 32'h9E37_79B1 ^ (idx + 32'h7F4A_7C15) * 32'h85EB_CA6B;
    x = x ^ (x >> 15);
    x = x * 32'h2C1B_3C6D;
    x = x ^ (x >> 12);
    x = x * 32'h297A_2D39;
    x = x ^ (x >> 15);
    return x;
  endfunction

  // Weight number idx of the layer with the given seed: full int8 range.
  function automatic wgt_t param_weight(input int unsigned seed,
                                        input int unsigned idx);
    logic [31:0] h;
    h = mix32(seed, idx);
    return wgt_t'(h[7:0]);
  endfunction

  // Bias of output channel idx: signed value in [-1024, 1023].
  function automatic bias_t param_bias(input int unsigned seed,
                                       input int unsigned idx);
    logic [31:0] h;
    h = mix32(seed ^ 32'h5BD1_E995, idx);
    return bias_t'($signed(h[10:0]));
  endfunction

  function automatic int unsigned cdiv(input int unsigned a, input int unsigned b);
    return (a + b - 1) / b;
  endfunction

endpackage

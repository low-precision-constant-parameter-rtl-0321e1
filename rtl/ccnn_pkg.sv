// ccnn_pkg: shared constants and the compiled-in network parameters of the
// constant-parameter ("compiled") CNN.
//
// In a compiled CNN every trained parameter is a constant of the hardware, so
// the weights, biases and per-channel scales live here as constant functions
// that elaboration evaluates.  The real network's parameters are not
// available, so each layer draws its parameters from a deterministic hash of
// (layer seed, output channel, input channel, filter tap).  This stands in for
// a quantized, 80% sparse INT7 model: about one weight in five is non-zero and
// a weight is a sign plus a 6-bit magnitude (-63..63).  Changing a seed yields
// a different network with the same structure.  Testbenches call the same
// functions to build their reference models.
package ccnn_pkg;

  localparam int unsigned ACT_W   = 8;   // activation width (unsigned, after ReLU)
  localparam int unsigned WMAG_W  = 6;   // weight magnitude bits (INT7 = sign + 6)
  localparam int unsigned SCALE_W = 16;  // per-channel scale, unsigned fixed point
  localparam int unsigned SCALE_SH = 16; // scale fraction bits

  // Integer hash (xorshift-multiply), used only at elaboration time.
  function automatic logic [31:0] mix32(input logic [31:0] a);
    logic [31:0] x;
    x = a;
    x = x ^ (x >> 16);
    x = x * 32'h7feb352d;
    x = x ^ (x >> 15);
    x = x * 32'h846ca68b;
    x = x ^ (x >> 16);
    return x;
  endfunction

  // Weight of output channel o, input channel m, filter tap (dy,dx) of the
  // layer with the given seed.  80% of the weights are zero.
  function automatic int wgt(input int seed, input int o, input int m,
                             input int dy, input int dx);
    logic [31:0] h;
    int mag;
    h = mix32(mix32(32'(seed) * 32'h9e3779b1 + 32'(o)) ^ (32'(m) << 8) ^ (32'(dy) << 4) ^ 32'(dx));
    if ((h % 5) != 0) return 0;
    mag = int'((h >> 8) % 63) + 1;
    return h[20] ? -mag : mag;
  endfunction

  // Bias of output channel o, in accumulator units.
  function automatic int bias(input int seed, input int o);
    logic [31:0] h;
    h = mix32(32'(seed) * 32'h85ebca6b + 32'(o) + 32'h1234);
    return int'(h % 8192) - 4096;
  endfunction

  // Per-output-channel scale (normalization), unsigned with SCALE_SH fraction bits.
  function automatic int scale(input int seed, input int o);
    logic [31:0] h;
    h = mix32(32'(seed) * 32'hc2b2ae35 + 32'(o) + 32'h777);
    return int'(h % 384) + 128;
  endfunction

  // Number of negative weights feeding output channel o over the whole filter.
  // The adder trees negate with a one's complement (each negative term comes
  // out one too small); the collector's bias adder adds this count back.
  function automatic int nneg(input int seed, input int o, input int nin, input int k);
    int n;
    n = 0;
    for (int m = 0; m < nin; m++)
      for (int dy = 0; dy < k; dy++)
        for (int dx = 0; dx < k; dx++)
          if (wgt(seed, o, m, dy, dx) < 0) n++;
    return n;
  endfunction

  // Bit-serial word length (clocks per kernel pass) for a tree of n inputs:
  // 8 activation bits + 6 magnitude bits + growth of the sum + sign.
  function automatic int serial_len(input int n);
    return int'(ACT_W + WMAG_W) + $clog2(n + 1) + 1;
  endfunction

  // Inputs of one adder tree of a kernel: up to min(K,INST) instances overlap
  // on one output column, each bringing NIN/FOLD input channels.
  function automatic int tree_n(input int nin, input int fold, input int k, input int inst);
    return (k < inst ? k : inst) * (nin / fold);
  endfunction

  // Clocks per kernel pass (bit-serial word length) of such a kernel.
  function automatic int kernel_t(input int nin, input int fold, input int k, input int inst);
    return serial_len(tree_n(nin, fold, k, inst));
  endfunction

endpackage

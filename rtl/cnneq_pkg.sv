// Shared types, default sizes and elaboration-time formulas of the CNN equalizer.
//
// Default numbers follow the selected equalizer network: V_p = 8 symbols per CNN pass,
// L = 3 convolution layers of kernel size K = 9 with C = 5 channels, N_os = 2 samples per
// symbol, weights of 13 bits and activations of 10 bits, and N_i = 64 CNN instances.
// The bias width, the accumulator width and the requantisation shift are choices of this
// design (the per-layer fixed-point formats are a result of training and not fixed here).
//
// Every stream in the design carries a two-bit tag next to its data: blk_last marks the
// final beat of a sub-sequence (block) and seq_last, valid together with blk_last, marks the
// final block of a whole input sequence.
package cnneq_pkg;

  localparam int unsigned CNN_A_W   = 10;  // activation / sample width (signed fixed point)
  localparam int unsigned CNN_W_W   = 13;  // weight width (signed fixed point)
  localparam int unsigned CNN_B_W   = 24;  // folded batch-norm offset, accumulator scale
  localparam int unsigned CNN_ACC_W = 32;  // accumulator width
  localparam int unsigned CNN_SHIFT = 10;  // requantisation: accumulator >>> SHIFT

  localparam int unsigned CNN_VP  = 8;
  localparam int unsigned CNN_L   = 3;
  localparam int unsigned CNN_K   = 9;
  localparam int unsigned CNN_C   = 5;
  localparam int unsigned CNN_NOS = 2;
  localparam int unsigned CNN_NI  = 64;

  localparam int unsigned CNN_F_CLK_MHZ = 200;

  typedef struct packed {
    logic seq_last;
    logic blk_last;
  } tag_t;

  // Half the receptive field of the network in samples:
  // o_sym = (K-1) * (1 + V_p * (L-1)) / 2
  function automatic int unsigned o_sym(int unsigned k, int unsigned vp, int unsigned l);
    return ((k - 1) * (1 + vp * (l - 1))) / 2;
  endfunction

  // Overlap actually added on each side of a block, in samples: o_sym rounded up to an
  // even number of input beats of N_i * V_p samples.
  function automatic int unsigned o_act(int unsigned k, int unsigned vp, int unsigned l,
                                        int unsigned ni);
    int unsigned w, beats;
    w     = ni * vp;
    beats = (o_sym(k, vp, l) + w - 1) / w;
    if (beats % 2 != 0) beats = beats + 1;
    return beats * w;
  endfunction

  // Number of coefficient words of the network (weights then biases, layer by layer).
  function automatic int unsigned n_coef(int unsigned k, int unsigned c, int unsigned vp,
                                         int unsigned l);
    return (c * k + c) + (l - 2) * (c * c * k + c) + (vp * c * k + vp);
  endfunction

endpackage

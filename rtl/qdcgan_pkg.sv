// qdcgan_pkg: constants and arithmetic helpers shared by the quantized
// deconvolution GAN (QDCGAN) generator accelerator.
//
// The accelerator is a streaming dataflow pipeline with one engine per
// generator layer. Each engine turns a transposed convolution into an ordinary
// stride-1 convolution by zero expansion and padding, and computes that
// convolution with a PE x SIMD matrix-vector unit followed by a multi-threshold
// (quantized ReLU) activation.
//
// Taken from the paper: the MNIST generator shape (1x1x16 -> 4x4x128 ->
// 8x8x64 -> 16x16x32 -> 32x32x1), the per-layer PE and SIMD values of the
// Ultra96 build ([4,8,8,1] and [4,16,16,8]), 4-bit weights and activations
// (W4A4), and the folding factor. This design's own choices: kernel 4 with
// stride 1 / pad 0 on the first layer and stride 2 / pad 1 afterwards (the
// usual DCGAN setting, which reproduces the sizes of the paper's figure), an
// 8-bit signed noise input, and the accumulator width formula below.
package qdcgan_pkg;

  // Number of generator layers of the MNIST QDCGAN.
  localparam int N_LAYERS = 4;

  // Width of the configuration (weight / threshold load) data bus.
  localparam int CFG_DATA_W = 64;
  // Width of the configuration word / threshold address and of the PE select.
  localparam int CFG_ADDR_W = 16;
  localparam int CFG_PE_W   = 8;
  // Width of the layer select of the configuration port.
  localparam int CFG_LAYER_W = 4;

  // Configuration targets inside one layer engine.
  typedef enum logic {
    CFG_WEIGHT    = 1'b0,
    CFG_THRESHOLD = 1'b1
  } cfg_kind_e;

  // Accumulator width needed for a dot product of MW terms, each an IN_BITS
  // activation (signed or not) times a WBITS signed weight, plus a sign bit.
  function automatic int acc_bits(input int mw, input int in_bits, input int wbits);
    return in_bits + wbits + $clog2(mw) + 1;
  endfunction

  // Output size of a transposed convolution.
  function automatic int deconv_out_dim(input int in_dim, input int k,
                                        input int stride, input int pad);
    return (in_dim - 1) * stride - 2 * pad + k;
  endfunction

  // Size of the zero-expanded and padded map that an equivalent stride-1
  // convolution runs over.
  function automatic int expand_dim(input int in_dim, input int k,
                                    input int stride, input int pad);
    return (in_dim - 1) * stride + 1 + 2 * (k - 1 - pad);
  endfunction

  // Value of one stored weight. A 1-bit weight is bipolar (0 -> -1, 1 -> +1);
  // wider weights are two's complement fixed point integers.
  function automatic int weight_value(input logic [7:0] w, input int wbits);
    int v;
    if (wbits == 1) return w[0] ? 1 : -1;
    v = int'(w) & ((1 << wbits) - 1);
    if (v >= (1 << (wbits - 1))) v -= (1 << wbits);
    return v;
  endfunction

  // Value of one activation of width abits, signed or unsigned.
  function automatic int act_value(input logic [15:0] a, input int abits,
                                   input bit is_signed);
    int v;
    v = int'(a) & ((1 << abits) - 1);
    if (is_signed && v >= (1 << (abits - 1))) v -= (1 << abits);
    return v;
  endfunction

endpackage

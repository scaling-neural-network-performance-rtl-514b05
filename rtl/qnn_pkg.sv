// qnn_pkg: types and constant functions shared by the streaming QNN layers.
//
// A hardware layer is described by one layer_cfg_t record: the input
// feature map (N x N pixels of C channels, A bits each), the kernel (K x K,
// stride S, zero padding PAD), the output channel count CO, the weight and
// output precisions W and AO, the folding (SIMD input channels and PE output
// channels per cycle), the number of channels per beat on the incoming
// stream (IN_PAR, normally the PE count of the layer before), whether the
// accumulator is thresholded into AO bits (THRESH=1) or sent out raw, and an
// optional max pooling stage (POOL_K=0 means none).
//
// Number formats (follow the paper): a 1-bit weight is bipolar, bit value 1
// meaning +1 and 0 meaning -1; wider weights are two's complement integers
// (the paper's fractional length W-2 is a scale factor that is folded into
// the thresholds). Activations are unsigned AO-bit integers, the index of the
// quantization level of a clipped ReLU with 2^AO levels.
package qnn_pkg;

  typedef struct packed {
    int unsigned N;        // input feature map width = height
    int unsigned C;        // input channels
    int unsigned K;        // kernel width = height
    int unsigned S;        // stride
    int unsigned PAD;      // zero padding on each side
    int unsigned CO;       // output channels
    int unsigned A;        // input activation bits
    int unsigned W;        // weight bits
    int unsigned AO;       // output activation bits
    int unsigned SIMD;     // input channels per cycle
    int unsigned PE;       // output channels per cycle
    int unsigned IN_PAR;   // channels per beat on the input stream
    int unsigned THRESH;   // 1: threshold to AO bits, 0: raw accumulator out
    int unsigned POOL_K;   // max pool window, 0 for no pooling
    int unsigned POOL_S;   // max pool stride
    int unsigned POOL_PAD; // max pool padding
  } layer_cfg_t;

  // Bits of one signed product of a W-bit weight and an unsigned A-bit activation.
  function automatic int unsigned prod_bits(int unsigned w, int unsigned a);
    return (w == 1) ? a + 1 : w + a;
  endfunction

  // Accumulator width that can hold a full dot product of length mw.
  function automatic int unsigned acc_bits(int unsigned w, int unsigned a, int unsigned mw);
    return prod_bits(w, a) + $clog2(mw + 1) + 1;
  endfunction

  // Output width of a convolution / window scan.
  function automatic int unsigned out_dim(int unsigned n, int unsigned k, int unsigned s,
                                          int unsigned pad);
    return (n + 2 * pad - k) / s + 1;
  endfunction

  function automatic int unsigned ceil_div(int unsigned a, int unsigned b);
    return (a + b - 1) / b;
  endfunction

  // Rows held by a sliding window unit: ceil(K/S)+1 stripes of S rows each (Eq. 1).
  function automatic int unsigned swu_rows(int unsigned k, int unsigned s);
    return s * (ceil_div(k, s) + 1);
  endfunction

  function automatic int unsigned max2(int unsigned a, int unsigned b);
    return (a > b) ? a : b;
  endfunction

  // Per-layer derived sizes.
  function automatic int unsigned cfg_mw(layer_cfg_t c);   // matrix width K*K*C
    return c.K * c.K * c.C;
  endfunction
  function automatic int unsigned cfg_acc(layer_cfg_t c);
    return acc_bits(c.W, c.A, cfg_mw(c));
  endfunction
  function automatic int unsigned cfg_ob(layer_cfg_t c);   // bits per output channel
    return (c.THRESH != 0) ? c.AO : cfg_acc(c);
  endfunction
  function automatic int unsigned cfg_od(layer_cfg_t c);   // output map width after pooling
    int unsigned od;
    od = out_dim(c.N, c.K, c.S, c.PAD);
    if (c.POOL_K != 0) od = out_dim(od, c.POOL_K, c.POOL_S, c.POOL_PAD);
    return od;
  endfunction
  // Width of the configuration write word needed by a layer.
  function automatic int unsigned wr_bits(int unsigned simd, int unsigned w, int unsigned ao,
                                          int unsigned acc, int unsigned thresh);
    return (thresh != 0) ? max2(simd * w, ((1 << ao) - 1) * acc) : simd * w;
  endfunction
  function automatic int unsigned cfg_wr_bits(layer_cfg_t c);
    return wr_bits(c.SIMD, c.W, c.AO, cfg_acc(c), c.THRESH);
  endfunction

  // The network of the paper's evaluation (DoReFa-Net for ImageNet, W1A2
  // with 8-bit first and last layers) as a chain of hardware layers. Sizes
  // are those printed in the topology figure; the grouped convolutions of
  // the figure (two branches of 48 or 192 channels) are built as single
  // layers with the summed channel count, strides, paddings, pooling windows
  // and the folding (SIMD, PE) are this design's choices. The FC layers are
  // convolutions whose kernel covers the whole input map.
  localparam int unsigned DOREFA_NL = 8;
  localparam layer_cfg_t DOREFA_NET [DOREFA_NL] = '{
    // conv0: 224x224x3 image, 12x12 stride 4 -> 54x54x96, W8 A8 in, A2 out
    '{N: 224, C: 3,    K: 12, S: 4, PAD: 0, CO: 96,   A: 8, W: 8, AO: 2, SIMD: 3,  PE: 32,
      IN_PAR: 3,  THRESH: 1, POOL_K: 0, POOL_S: 1, POOL_PAD: 0},
    // conv1 + max pool: 54x54x96, 5x5 -> 54x54x256, pool 3x3/2 -> 27x27x256
    '{N: 54,  C: 96,   K: 5,  S: 1, PAD: 2, CO: 256,  A: 2, W: 1, AO: 2, SIMD: 32, PE: 32,
      IN_PAR: 32, THRESH: 1, POOL_K: 3, POOL_S: 2, POOL_PAD: 1},
    // conv2: 27x27x256, 3x3 stride 2 -> 14x14x384
    '{N: 27,  C: 256,  K: 3,  S: 2, PAD: 1, CO: 384,  A: 2, W: 1, AO: 2, SIMD: 16, PE: 8,
      IN_PAR: 32, THRESH: 1, POOL_K: 0, POOL_S: 1, POOL_PAD: 0},
    // conv3: 14x14x384, 3x3 -> 14x14x384
    '{N: 14,  C: 384,  K: 3,  S: 1, PAD: 1, CO: 384,  A: 2, W: 1, AO: 2, SIMD: 16, PE: 16,
      IN_PAR: 8,  THRESH: 1, POOL_K: 0, POOL_S: 1, POOL_PAD: 0},
    // conv4 + max pool: 14x14x384, 3x3 -> 14x14x256, pool 3x3/2 -> 6x6x256
    '{N: 14,  C: 384,  K: 3,  S: 1, PAD: 1, CO: 256,  A: 2, W: 1, AO: 2, SIMD: 16, PE: 8,
      IN_PAR: 16, THRESH: 1, POOL_K: 3, POOL_S: 2, POOL_PAD: 0},
    // fc0: 6x6x256 -> 4096
    '{N: 6,   C: 256,  K: 6,  S: 1, PAD: 0, CO: 4096, A: 2, W: 1, AO: 2, SIMD: 8,  PE: 4,
      IN_PAR: 8,  THRESH: 1, POOL_K: 0, POOL_S: 1, POOL_PAD: 0},
    // fc1: 4096 -> 4096
    '{N: 1,   C: 4096, K: 1,  S: 1, PAD: 0, CO: 4096, A: 2, W: 1, AO: 2, SIMD: 16, PE: 1,
      IN_PAR: 4,  THRESH: 1, POOL_K: 0, POOL_S: 1, POOL_PAD: 0},
    // fc2: 4096 -> 1000 class scores, 8-bit weights, raw (non-quantized) output
    '{N: 1,   C: 4096, K: 1,  S: 1, PAD: 0, CO: 1000, A: 2, W: 8, AO: 8, SIMD: 4,  PE: 1,
      IN_PAR: 1,  THRESH: 0, POOL_K: 0, POOL_S: 1, POOL_PAD: 0}
  };

  // Configuration write targets.
  typedef enum logic {SEL_WEIGHT = 1'b0, SEL_THRESH = 1'b1} mem_sel_e;

endpackage

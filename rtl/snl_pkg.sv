// snl_pkg: types, constants and width rules shared by the streaming
// inference layers of the BES network (a 2x2 max-pooling layer followed by
// three dense layers with Leaky ReLU activators, 28x28 image in, 10 scores
// out).
//
// Number formats. The network sizes (28x28 input, 14x14 pooled, 196-10-40-10
// neurons) are those of the BES network. The numeric formats are this
// design's own choice, because the reference implementation ran in floating
// point and left quantization for later:
//   pixel_t  8-bit unsigned, read as a fraction of one (Q0.8)
//   act_t    16-bit signed activation, Q7.8
//   wgt_t    16-bit signed weight or bias, Q7.8
// All layers keep FRAC = 8 fractional bits in their outputs.
//
// dot_width() is the dot-product width rule: a product needs the sum of the
// two operand widths, and a sum of COUNT products needs ceil(log2(COUNT))
// bits more. For a 3x3 kernel of 8-bit signed weights over 12-bit unsigned
// data it returns 12 + 8 + 4 = 24.
package snl_pkg;

  localparam int unsigned PIX_BITS = 8;
  localparam int unsigned ACT_BITS = 16;
  localparam int unsigned WGT_BITS = 16;
  localparam int unsigned FRAC     = 8;

  typedef logic        [PIX_BITS-1:0] pixel_t;
  typedef logic signed [ACT_BITS-1:0] act_t;
  typedef logic signed [WGT_BITS-1:0] wgt_t;

  // Pooling mode of snl_pool2d.
  typedef enum logic {POOL_MAX = 1'b0, POOL_AVG = 1'b1} pool_mode_e;

  // Layer numbers used in the parameter-load address (see snl_cfg_t).
  localparam int unsigned LAYER_BITS = 2;
  localparam int unsigned OUT_BITS   = 6;   // up to 64 neurons per layer
  localparam int unsigned IN_BITS    = 8;   // up to 256 inputs per neuron

  // One write of the run-time parameter-load port. A weight write sets the
  // weight from input in_idx to neuron out_idx of layer `layer`; a bias
  // write (is_bias = 1) sets the bias of neuron out_idx, in_idx unused.
  typedef struct packed {
    logic [LAYER_BITS-1:0] layer;
    logic                  is_bias;
    logic [OUT_BITS-1:0]   out_idx;
    logic [IN_BITS-1:0]    in_idx;
  } snl_cfg_addr_t;

  // Width of a sum of `count` products of an a_bits by b_bits multiply.
  function automatic int unsigned dot_width(int unsigned a_bits,
                                            int unsigned b_bits,
                                            int unsigned count);
    return a_bits + b_bits + $clog2(count);
  endfunction

endpackage

// snl_leaky_relu: the Leaky ReLU activator, one value per instance.
//
// y = x              for x >= 0
// y = x * alpha      for x <  0
//
// alpha is the fixed-point constant ALPHA / 2**ALPHA_SHIFT; the product is
// shifted right arithmetically, which rounds toward minus infinity. Being a
// one-pass activator it is purely combinational and adds no latency: the
// value can be used in the same clock it is presented.
//
// Follows the paper: the Leaky ReLU activator closes each of the three dense
// layers of the BES network, and it is a one-pass (streaming) activator. This
// design's choice: the slope. The paper does not give it; the default
// 77/256 = 0.301 approximates 0.3, the default slope of the Keras LeakyReLU
// layer.
module snl_leaky_relu #(
  parameter int unsigned WIDTH       = 16,
  parameter int unsigned ALPHA       = 77,
  parameter int unsigned ALPHA_SHIFT = 8
) (
  input  logic signed [WIDTH-1:0] x,
  output logic signed [WIDTH-1:0] y
);

  logic signed [WIDTH+ALPHA_SHIFT+1:0] prod;

  assign prod = x * $signed({1'b0, (ALPHA_SHIFT+1)'(ALPHA)});
  assign y    = x[WIDTH-1] ? WIDTH'(prod >>> ALPHA_SHIFT) : x;

endmodule

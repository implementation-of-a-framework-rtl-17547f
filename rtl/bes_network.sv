// bes_network: streaming inference engine for the BES network, a small
// classifier of 28x28 single-channel images (tested on MNIST digits):
//
//   28x28 image -> MaxPooling2D 2x2 -> 14x14 -> Flatten (196)
//               -> Dense 10 + Leaky ReLU -> Dense 40 + Leaky ReLU
//               -> Dense 10 + Leaky ReLU -> 10 scores
//
// The layers are chained by ready/valid streams, so each layer starts work as
// soon as its first input is there: pooled rows leave snl_pool2d while the
// image is still coming in, and the first dense layer sums its partial
// results as pooled values arrive. Flatten needs no logic: the pooled image
// leaves the pooling layer row by row, which is already the flattened order
// the first dense layer indexes its weights by.
//
// Interfaces
//   s_axis_*  image input, one beat = PIX_PER_BEAT pixels of one row (8-bit
//             unsigned, read as pixel/256), rows top to bottom, left to right
//             within a row; IMG_ROWS * IMG_COLS / PIX_PER_BEAT beats a frame.
//   m_axis_*  result, one beat per frame, N_OUT signed Q7.8 scores.
//   cfg_*     parameter-load port for the weights and biases of the three
//             dense layers (layers 0, 1, 2 in cfg_addr.layer); see
//             snl_dense_params. Load before streaming frames.
// Both streams follow the AXI4-Stream valid/ready rule: a beat moves in a
// clock where valid and ready are both high.
//
// Timing at the default sizes: the first dense layer takes one pooled value
// per clock, so it sets the pace: 196 clocks per frame. A frame's scores
// appear 251 clocks after its first row is accepted (1.004 us at 250 MHz).
// There is no pipeline register between dense layers, so a layer holds its
// result until the next layer has read all of it, and a new frame can enter
// the first dense layer only when the previous frame's result has moved on.
//
// Follows the paper: the layer sequence and sizes, Leaky ReLU on every dense
// layer, run-time loaded weights and biases, streaming between layers with
// the first and last stream AXI-like, no pipelining stage between dense
// layers. This design's own choices: fixed-point number formats, one image
// row per input beat, one multiply per neuron per clock, the load-port
// address layout.
module bes_network
  import snl_pkg::*;
#(
  parameter int unsigned IMG_ROWS     = 28,
  parameter int unsigned IMG_COLS     = 28,
  parameter int unsigned PIX_PER_BEAT = 28,
  parameter int unsigned N_HIDDEN1    = 10,
  parameter int unsigned N_HIDDEN2    = 40,
  parameter int unsigned N_OUT        = 10,
  parameter int unsigned ALPHA        = 77     // Leaky ReLU slope, /256
) (
  input  logic   clk,
  input  logic   rst_n,
  // parameter-load port
  input  logic          cfg_we,
  input  snl_cfg_addr_t cfg_addr,
  input  wgt_t          cfg_wdata,
  // image stream
  input  logic   s_axis_tvalid,
  output logic   s_axis_tready,
  input  pixel_t s_axis_tdata [PIX_PER_BEAT],
  // result stream
  output logic   m_axis_tvalid,
  input  logic   m_axis_tready,
  output act_t   m_axis_tdata [N_OUT]
);

  localparam int unsigned POOL_PER_BEAT = PIX_PER_BEAT / 2;
  localparam int unsigned N_FLAT        = (IMG_ROWS / 2) * (IMG_COLS / 2);

  // pooling -> dense 1
  logic   pool_valid, pool_ready;
  pixel_t pool_data [POOL_PER_BEAT];
  // dense 1 -> dense 2
  logic   d1_valid, d1_ready;
  act_t   d1_data [N_HIDDEN1];
  // dense 2 -> dense 3
  logic   d2_valid, d2_ready;
  act_t   d2_data [N_HIDDEN2];

  snl_pool2d #(
    .IMG_ROWS(IMG_ROWS), .IMG_COLS(IMG_COLS), .PIX_PER_BEAT(PIX_PER_BEAT),
    .DATA_BITS(PIX_BITS), .MODE(POOL_MAX)
  ) u_maxpool (
    .clk, .rst_n,
    .s_valid(s_axis_tvalid), .s_ready(s_axis_tready), .s_data(s_axis_tdata),
    .m_valid(pool_valid),    .m_ready(pool_ready),    .m_data(pool_data)
  );

  snl_dense #(
    .NIN(N_FLAT), .NOUT(N_HIDDEN1), .IN_PER_BEAT(POOL_PER_BEAT),
    .IN_T(pixel_t), .IN_SIGNED(1'b0), .LAYER_ID(0), .ACTIVATE(1'b1), .ALPHA(ALPHA)
  ) u_dense1 (
    .clk, .rst_n, .cfg_we, .cfg_addr, .cfg_wdata,
    .s_valid(pool_valid), .s_ready(pool_ready), .s_data(pool_data),
    .m_valid(d1_valid),   .m_ready(d1_ready),   .m_data(d1_data)
  );

  snl_dense #(
    .NIN(N_HIDDEN1), .NOUT(N_HIDDEN2), .IN_PER_BEAT(N_HIDDEN1),
    .IN_T(act_t), .IN_SIGNED(1'b1), .LAYER_ID(1), .ACTIVATE(1'b1), .ALPHA(ALPHA)
  ) u_dense2 (
    .clk, .rst_n, .cfg_we, .cfg_addr, .cfg_wdata,
    .s_valid(d1_valid), .s_ready(d1_ready), .s_data(d1_data),
    .m_valid(d2_valid), .m_ready(d2_ready), .m_data(d2_data)
  );

  snl_dense #(
    .NIN(N_HIDDEN2), .NOUT(N_OUT), .IN_PER_BEAT(N_HIDDEN2),
    .IN_T(act_t), .IN_SIGNED(1'b1), .LAYER_ID(2), .ACTIVATE(1'b1), .ALPHA(ALPHA)
  ) u_dense3 (
    .clk, .rst_n, .cfg_we, .cfg_addr, .cfg_wdata,
    .s_valid(d2_valid),      .s_ready(d2_ready),      .s_data(d2_data),
    .m_valid(m_axis_tvalid), .m_ready(m_axis_tready), .m_data(m_axis_tdata)
  );

endmodule

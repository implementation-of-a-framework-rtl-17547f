// snl_dense: a fully connected (Keras Dense) layer with run-time loaded
// weights and biases and an optional Leaky ReLU activator, between two
// ready/valid streams.
//
//   y[o] = act( sat( (bias[o] * 2**FRAC + sum_i w[o][i] * x[i]) >>> FRAC ) )
//
// How it works: the NIN inputs arrive in beats of IN_PER_BEAT values, in
// input-index order (for the first layer, the row-major order of the pooled
// image, which is what Flatten produces). The layer takes one input value per
// clock and multiplies it with the weight of that input for all NOUT neurons
// at once (NOUT multipliers), adding the products into NOUT accumulators. So
// partial sums build up while the source data is still arriving, and the last
// sum is complete NIN + 1 clocks after the first value is taken. A beat is
// acknowledged (s_ready) in the clock its last value is taken.
//
// Two pipeline stages: stage 0 reads the weights of input i from
// snl_dense_params (synchronous read) and registers x[i]; stage 1 does the
// multiply-accumulate. The accumulator of the first input starts from the
// bias, shifted up to the product's scale.
//
// Output: when all NIN inputs are summed, m_valid rises and m_data is the
// activated accumulators. There is no output register: m_data is computed
// combinationally from the accumulators, so the layer takes no new input
// until the downstream layer has accepted the output beat. This saves the
// registers an output pipeline stage would cost, but means a new frame can
// start only when the result of the last one has moved on.
//
// Accumulator width: dot_width(x bits, weight bits, NIN + 1) + 1, i.e. the
// dot-product rule counting the bias as one more term, plus one bit because
// the scaled bias can exceed one product.
//
// Follows the paper: Dense layer sizes, partial results computed from the
// data available, no pipelining stage between dense layers, run-time
// weights and biases, the dot-product width rule. This design's choices:
// fixed-point formats (see snl_pkg), one input value per clock, truncation
// and saturation on requantization, the handshake.
module snl_dense
  import snl_pkg::*;
#(
  parameter int unsigned NIN         = 196,
  parameter int unsigned NOUT        = 10,
  parameter int unsigned IN_PER_BEAT = 14,     // must divide NIN
  parameter type         IN_T        = act_t,  // input element type
  parameter bit          IN_SIGNED   = 1'b1,
  parameter int unsigned LAYER_ID    = 0,
  parameter bit          ACTIVATE    = 1'b1,   // Leaky ReLU on the output
  parameter int unsigned ALPHA       = 77      // Leaky ReLU slope, /256
) (
  input  logic            clk,
  input  logic            rst_n,
  // parameter-load port
  input  logic            cfg_we,
  input  snl_cfg_addr_t   cfg_addr,
  input  wgt_t            cfg_wdata,
  // input stream
  input  logic            s_valid,
  output logic            s_ready,
  input  IN_T             s_data [IN_PER_BEAT],
  // output stream
  output logic            m_valid,
  input  logic            m_ready,
  output act_t            m_data [NOUT]
);

  localparam int unsigned IN_W  = $bits(IN_T);
  localparam int unsigned XW    = IN_W + (IN_SIGNED ? 0 : 1);
  localparam int unsigned ACC_W = dot_width(XW, WGT_BITS, NIN + 1) + 1;
  localparam int unsigned IW    = $clog2(NIN);
  localparam int unsigned EW    = (IN_PER_BEAT > 1) ? $clog2(IN_PER_BEAT) : 1;
  localparam logic signed [ACC_W-1:0] ACT_MAX = ACC_W'(2**(ACT_BITS-1) - 1);
  localparam logic signed [ACC_W-1:0] ACT_MIN = -ACC_W'(2**(ACT_BITS-1));

  initial begin
    assert (NIN % IN_PER_BEAT == 0) else $fatal(1, "snl_dense: IN_PER_BEAT must divide NIN");
  end

  // ---------------- stage 0: issue one input value per clock ----------------
  logic [IW-1:0]  in_idx;      // index of the next input value
  logic [EW-1:0]  elem;        // position of that value inside the beat
  logic           all_issued;  // every input of this frame taken, waiting for output hand-off
  logic           issue;
  logic           beat_done;
  wgt_t           w_rd [NOUT];
  wgt_t           bias [NOUT];

  assign issue     = s_valid && !all_issued;
  assign beat_done = (elem == EW'(IN_PER_BEAT - 1));
  assign s_ready   = issue && beat_done;

  snl_dense_params #(.NIN(NIN), .NOUT(NOUT), .LAYER_ID(LAYER_ID)) u_params (
    .clk, .rst_n, .cfg_we, .cfg_addr, .cfg_wdata,
    .rd_en(issue), .rd_addr(in_idx), .rd_weights(w_rd), .bias
  );

  logic signed [XW-1:0] x_q;
  logic                 v_q, first_q, last_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      in_idx     <= '0;
      elem       <= '0;
      all_issued <= 1'b0;
      v_q        <= 1'b0;
      first_q    <= 1'b0;
      last_q     <= 1'b0;
      x_q        <= '0;
    end else begin
      v_q <= issue;
      if (issue) begin
        x_q     <= IN_SIGNED ? XW'($signed(s_data[elem])) : XW'(s_data[elem]);
        first_q <= (in_idx == '0);
        last_q  <= (in_idx == IW'(NIN - 1));
        elem    <= beat_done ? '0 : elem + 1'b1;
        if (in_idx == IW'(NIN - 1)) begin
          in_idx     <= '0;
          all_issued <= 1'b1;
        end else begin
          in_idx <= in_idx + 1'b1;
        end
      end
      if (m_valid && m_ready) all_issued <= 1'b0;
    end
  end

  // ---------------- stage 1: multiply-accumulate ----------------
  logic signed [ACC_W-1:0]       acc      [NOUT];
  logic signed [ACC_W-1:0]       acc_next [NOUT];
  logic signed [WGT_BITS+XW-1:0] prod     [NOUT];

  always_comb begin
    for (int o = 0; o < NOUT; o++) begin
      prod[o]     = w_rd[o] * x_q;
      acc_next[o] = (first_q ? (ACC_W'(bias[o]) <<< FRAC) : acc[o]) + ACC_W'(prod[o]);
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      m_valid <= 1'b0;
      for (int o = 0; o < NOUT; o++) acc[o] <= '0;
    end else begin
      if (v_q) acc <= acc_next;
      if (v_q && last_q)          m_valid <= 1'b1;
      else if (m_valid && m_ready) m_valid <= 1'b0;
    end
  end

  // ---------------- requantize, saturate, activate ----------------
  for (genvar o = 0; o < NOUT; o++) begin : g_out
    logic signed [ACC_W-1:0] shifted;
    act_t                    sat;
    assign shifted = acc[o] >>> FRAC;
    assign sat = (shifted > ACT_MAX) ? ACT_MAX[ACT_BITS-1:0] :
                 (shifted < ACT_MIN) ? ACT_MIN[ACT_BITS-1:0] :
                                       shifted[ACT_BITS-1:0];
    if (ACTIVATE) begin : g_act
      snl_leaky_relu #(.WIDTH(ACT_BITS), .ALPHA(ALPHA)) u_act (.x(sat), .y(m_data[o]));
    end else begin : g_lin
      assign m_data[o] = sat;
    end
  end

  // The upstream beat must stay put while it is being consumed value by value.
  property p_in_hold;
    @(posedge clk) disable iff (!rst_n) (s_valid && !s_ready) |=> s_valid;
  endproperty
  assert property (p_in_hold);

endmodule

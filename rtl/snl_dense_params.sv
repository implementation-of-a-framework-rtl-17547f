// snl_dense_params: the weight and bias store of one dense layer, written at
// run time through the shared parameter-load port.
//
// Weights and biases are not built into the logic: the host loads them after
// configuration, and loading a new trained set needs no rebuild of the FPGA
// image. This module holds the NIN x NOUT weights as NOUT memory banks, one
// per neuron, each NIN words deep, so that one read returns the weight of a
// given input for every neuron at once. The NOUT biases are registers.
//
// Load port: a write is taken when cfg_we is high and cfg_addr.layer equals
// LAYER_ID; cfg_addr.is_bias selects bias or weight, cfg_addr.out_idx the
// neuron and cfg_addr.in_idx the input. Writes with an index out of range are
// ignored. Biases reset to zero; weights have no reset (block RAM).
//
// Read port: rd_en with rd_addr (input index) returns rd_weights one clock
// later (synchronous read, as a block RAM does). bias is always valid.
//
// Follows the paper: run-time loading of weights and biases, one set per
// layer. This design's choices: the address layout, the bank organisation
// and that writes are accepted at any time (the host is expected to load
// parameters while no frame is in flight).
module snl_dense_params
  import snl_pkg::*;
#(
  parameter int unsigned NIN      = 196,
  parameter int unsigned NOUT     = 10,
  parameter int unsigned LAYER_ID = 0
) (
  input  logic                   clk,
  input  logic                   rst_n,
  // parameter-load port
  input  logic                   cfg_we,
  input  snl_cfg_addr_t          cfg_addr,
  input  wgt_t                   cfg_wdata,
  // weight read port
  input  logic                   rd_en,
  input  logic [$clog2(NIN)-1:0] rd_addr,
  output wgt_t                   rd_weights [NOUT],
  output wgt_t                   bias       [NOUT]
);

  logic sel, w_we, b_we;

  assign sel  = cfg_we && (cfg_addr.layer == LAYER_BITS'(LAYER_ID))
                       && (32'(cfg_addr.out_idx) < NOUT);
  assign w_we = sel && !cfg_addr.is_bias && (32'(cfg_addr.in_idx) < NIN);
  assign b_we = sel &&  cfg_addr.is_bias;

  for (genvar o = 0; o < NOUT; o++) begin : g_bank
    wgt_t mem [NIN];

    always_ff @(posedge clk) begin
      if (w_we && cfg_addr.out_idx == OUT_BITS'(o))
        mem[cfg_addr.in_idx[$clog2(NIN)-1:0]] <= cfg_wdata;
      if (rd_en)
        rd_weights[o] <= mem[rd_addr];
    end

    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n)
        bias[o] <= '0;
      else if (b_we && cfg_addr.out_idx == OUT_BITS'(o))
        bias[o] <= cfg_wdata;
    end
  end

endmodule

// tb_snl_dense_params: loads a full random set of weights and biases into a
// store for layer 1 (NIN = 12, NOUT = 5) through the parameter-load port,
// mixed with writes addressed to other layers and to out-of-range indices,
// which must leave it unchanged. It then reads every input index and checks
// all NOUT weights, one clock after the read, and the biases, against the
// values the testbench kept. A second pass overwrites half of the weights to
// check that reloading at run time takes effect.
module tb_snl_dense_params;
  import snl_pkg::*;

  localparam int NIN = 12, NOUT = 5, LID = 1;

  int checks = 0, failures = 0;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic          cfg_we = 1'b0;
  snl_cfg_addr_t cfg_addr = '0;
  wgt_t          cfg_wdata = '0;
  logic          rd_en = 1'b0;
  logic [$clog2(NIN)-1:0] rd_addr = '0;
  wgt_t          rd_weights [NOUT];
  wgt_t          bias [NOUT];

  wgt_t w_ref [NOUT][NIN];
  wgt_t b_ref [NOUT];

  snl_dense_params #(.NIN(NIN), .NOUT(NOUT), .LAYER_ID(LID)) dut (
    .clk, .rst_n, .cfg_we, .cfg_addr, .cfg_wdata, .rd_en, .rd_addr, .rd_weights, .bias);

  task automatic wr(int layer, bit is_bias, int o, int i, wgt_t v);
    @(negedge clk);
    cfg_we = 1'b1;
    cfg_addr.layer = LAYER_BITS'(layer);
    cfg_addr.is_bias = is_bias;
    cfg_addr.out_idx = OUT_BITS'(o);
    cfg_addr.in_idx = IN_BITS'(i);
    cfg_wdata = v;
    @(negedge clk) cfg_we = 1'b0;
  endtask

  task automatic check_all();
    for (int i = 0; i < NIN; i++) begin
      @(negedge clk);
      rd_en = 1'b1;
      rd_addr = 4'(i);
      @(negedge clk);
      rd_en = 1'b0;
      rd_addr = 4'((i + 5) % NIN);  // a changed address without rd_en must not disturb the output
      @(negedge clk);
      for (int o = 0; o < NOUT; o++) begin
        checks++;
        if (rd_weights[o] !== w_ref[o][i]) begin
          failures++;
          $display("FAIL w[%0d][%0d] = %0d expected %0d", o, i, rd_weights[o], w_ref[o][i]);
        end
      end
    end
    for (int o = 0; o < NOUT; o++) begin
      checks++;
      if (bias[o] !== b_ref[o]) begin
        failures++;
        $display("FAIL bias[%0d] = %0d expected %0d", o, bias[o], b_ref[o]);
      end
    end
  endtask

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1'b1;
    // biases reset to zero
    for (int o = 0; o < NOUT; o++) begin
      checks++;
      if (bias[o] !== '0) begin failures++; $display("FAIL bias[%0d] not reset", o); end
      b_ref[o] = '0;
    end
    for (int o = 0; o < NOUT; o++) begin
      for (int i = 0; i < NIN; i++) begin
        w_ref[o][i] = wgt_t'($urandom);
        wr(LID, 1'b0, o, i, w_ref[o][i]);
        wr((LID + 1) % 4, 1'b0, o, i, wgt_t'($urandom));   // other layer
      end
      b_ref[o] = wgt_t'($urandom);
      wr(LID, 1'b1, o, 0, b_ref[o]);
      wr(LID - 1, 1'b1, o, 0, wgt_t'($urandom));           // other layer
    end
    wr(LID, 1'b1, NOUT, 0, 16'h1234);                       // neuron out of range
    wr(LID, 1'b0, NOUT + 1, 0, 16'h1234);
    wr(LID, 1'b0, 0, 16, 16'h1234);                       // input out of range (aliases 0 if unchecked)
    check_all();
    // reload half of the weights and one bias
    for (int o = 0; o < NOUT; o++)
      for (int i = 0; i < NIN; i += 2) begin
        w_ref[o][i] = wgt_t'($urandom);
        wr(LID, 1'b0, o, i, w_ref[o][i]);
      end
    b_ref[2] = -16'sd77;
    wr(LID, 1'b1, 2, 0, b_ref[2]);
    check_all();
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

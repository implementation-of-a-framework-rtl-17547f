// tb_snl_dense: checks the dense layer against a reference dot product
// computed in the testbench,
//   y[o] = lrelu( sat16( floor((bias[o] * 256 + sum_i w[o][i] * x[i]) / 256) ) ),
// with lrelu(v) = v for v >= 0 and floor(v * 77 / 256) otherwise.
// Two configurations: a small signed layer (NIN 12, NOUT 5, 4 values per
// beat) and the BES network's first layer (NIN 196, NOUT 10, 14 unsigned
// 8-bit values per beat). Each takes four frames, with weights and biases
// reloaded through the load port before every frame:
//   frame 0  small weights, stream flat out; the output must rise exactly
//            NIN + 1 clocks after the first input beat is presented
//   frame 1  full-range weights, so that many sums saturate
//   frames 2 and 3  small weights, random input gaps and output
//            back-pressure; while a result is held, no input may be taken
module tb_snl_dense;
  import snl_pkg::*;

  int checks = 0, failures = 0;
  int saturated = 0;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  localparam int NCFG = 2;
  logic [NCFG-1:0] done = '0;

  function automatic longint lrelu(longint v);
    longint p;
    if (v >= 0) return v;
    p = v * 77;
    return (p - ((p % 256 + 256) % 256)) / 256;
  endfunction

  function automatic longint floor256(longint v);
    return (v - ((v % 256 + 256) % 256)) / 256;
  endfunction

  for (genvar g = 0; g < NCFG; g++) begin : g_cfg
    localparam int NIN  = (g == 0) ? 12 : 196;
    localparam int NOUT = (g == 0) ? 5  : 10;
    localparam int IPB  = (g == 0) ? 4  : 14;
    localparam bit SGN  = (g == 0);
    localparam int LID  = (g == 0) ? 2  : 0;
    localparam int FRAMES = 4;
    typedef logic [((g == 0) ? 16 : 8)-1:0] in_t;

    logic          cfg_we;
    snl_cfg_addr_t cfg_addr;
    wgt_t          cfg_wdata;
    logic          s_valid, s_ready, m_valid, m_ready;
    in_t           s_data [IPB];
    act_t          m_data [NOUT];

    longint x  [NIN];
    longint w  [NOUT][NIN];
    longint b  [NOUT];

    snl_dense #(.NIN(NIN), .NOUT(NOUT), .IN_PER_BEAT(IPB), .IN_T(in_t), .IN_SIGNED(SGN),
                .LAYER_ID(LID), .ACTIVATE(1'b1), .ALPHA(77)) dut (
      .clk, .rst_n, .cfg_we, .cfg_addr, .cfg_wdata,
      .s_valid, .s_ready, .s_data, .m_valid, .m_ready, .m_data);

    int cycle = 0, t_first = -1, t_out = -1, taken_while_held = 0;
    always @(posedge clk) begin
      cycle <= cycle + 1;
      if (rst_n && m_valid && !m_ready && s_valid && s_ready) taken_while_held++;
    end

    task automatic load(int frame);
      int wr = (frame == 1) ? 32767 : 511;
      for (int o = 0; o < NOUT; o++) begin
        for (int i = 0; i < NIN; i++) begin
          w[o][i] = longint'($urandom_range(2 * wr)) - wr;
          @(negedge clk);
          cfg_we = 1'b1;
          cfg_addr = '{layer: LAYER_BITS'(LID), is_bias: 1'b0, out_idx: OUT_BITS'(o), in_idx: IN_BITS'(i)};
          cfg_wdata = wgt_t'(w[o][i]);
        end
        b[o] = longint'($urandom_range(2 * 8191)) - 8191;
        @(negedge clk);
        cfg_addr = '{layer: LAYER_BITS'(LID), is_bias: 1'b1, out_idx: OUT_BITS'(o), in_idx: '0};
        cfg_wdata = wgt_t'(b[o]);
      end
      @(negedge clk) cfg_we = 1'b0;
    endtask

    initial begin
      cfg_we = 1'b0; cfg_addr = '0; cfg_wdata = '0;
      s_valid = 1'b0; m_ready = 1'b1;
      foreach (s_data[i]) s_data[i] = '0;
      wait (rst_n);
      for (int f = 0; f < FRAMES; f++) begin
        load(f);
        for (int i = 0; i < NIN; i++)
          x[i] = SGN ? longint'($urandom_range(4095)) - 2048 : longint'($urandom_range(255));
        // output side runs in parallel with the input side
        fork
          begin : drive
            for (int bt = 0; bt < NIN / IPB; bt++) begin
              @(negedge clk);
              while (f >= 2 && $urandom_range(3) == 0) begin s_valid = 1'b0; @(negedge clk); end
              s_valid = 1'b1;
              for (int i = 0; i < IPB; i++) s_data[i] = in_t'(x[bt*IPB + i]);
              if (bt == 0) t_first = cycle;
              #1;
              while (!s_ready) begin @(negedge clk); #1; end
              @(posedge clk);
            end
            @(negedge clk) s_valid = 1'b0;
          end
          begin : collect
            @(negedge clk);
            m_ready = (f < 2);
            while (!(m_valid && m_ready)) begin
              @(negedge clk);
              if (m_valid && t_out < 0 && f == 0) t_out = cycle;
              m_ready = (f < 2) ? 1'b1 : ($urandom_range(3) == 0);
            end
            for (int o = 0; o < NOUT; o++) begin
              longint acc, y;
              acc = b[o] * 256;
              for (int i = 0; i < NIN; i++) acc += w[o][i] * x[i];
              y = floor256(acc);
              if (y > 32767 || y < -32768) saturated++;
              if (y > 32767) y = 32767;
              if (y < -32768) y = -32768;
              y = lrelu(y);
              checks++;
              if (longint'(m_data[o]) != y) begin
                failures++;
                $display("FAIL cfg %0d frame %0d neuron %0d: got %0d expected %0d", g, f, o, m_data[o], y);
              end
            end
          end
        join
        if (f == 0) begin
          checks++;
          // t_out is sampled at the negedge after m_valid rose
          if (t_out - t_first != NIN + 1) begin
            failures++;
            $display("FAIL cfg %0d: output %0d clocks after first beat, expected %0d", g, t_out - t_first, NIN + 1);
          end
        end
        @(negedge clk) m_ready = 1'b1;
      end
      checks++;
      if (taken_while_held != 0) begin
        failures++;
        $display("FAIL cfg %0d: %0d input beats taken while a result was held", g, taken_while_held);
      end
      done[g] = 1'b1;
    end
  end

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    wait (&done);
    checks++;
    if (saturated == 0) begin failures++; $display("FAIL saturation never exercised"); end
    $display("saturated outputs: %0d", saturated);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

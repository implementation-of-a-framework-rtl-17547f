// tb_bes_network_p4: the end-to-end test of tb_bes_network with the image
// stream narrowed to 4 pixels per beat (7 beats per row) instead of a whole
// row. The network is otherwise at its default sizes and is checked against
// the same integer reference model, frames, weight sets and mechanism
// counts. With 4-pixel beats the first dense layer waits during each even
// row, so the scores appear 335 clocks after the first beat instead of 251:
// the narrower stream saves wires but misses the 275-clock budget.
module tb_bes_network_p4;
  import snl_pkg::*;

  localparam int R = 28, C = 28, P = 4, H1 = 10, H2 = 40, NO = 10;
  localparam int NF = (R / 2) * (C / 2);
  localparam int FRAMES = 7;
  localparam int RELOAD_AT = 4;
  // Latency at 4 pixels per beat, pinned as a regression value of this
  // design's timing: the first dense layer is idle during the 7 beats of each
  // even row and then needs 14 clocks for the 7 pooled beats of the odd row,
  // so a row pair costs about 21 clocks instead of 14.
  localparam int LAT = 335;

  int checks = 0, failures = 0;
  logic clk = 1'b0, rst_n = 1'b0;
  always #2 clk = ~clk;   // 250 MHz

  logic          cfg_we = 1'b0;
  snl_cfg_addr_t cfg_addr = '0;
  wgt_t          cfg_wdata = '0;
  logic          s_axis_tvalid = 1'b0, s_axis_tready;
  pixel_t        s_axis_tdata [P];
  logic          m_axis_tvalid, m_axis_tready = 1'b1;
  act_t          m_axis_tdata [NO];

  bes_network #(.PIX_PER_BEAT(P)) dut (.*);

  // ---------------- reference model ----------------
  longint w1 [H1][NF], b1 [H1];
  longint w2 [H2][H1], b2 [H2];
  longint w3 [NO][H2], b3 [NO];
  int     img [FRAMES][R][C];
  longint expect_y [FRAMES][NO];
  int     n_sat = 0, n_neg = 0;

  function automatic longint floor256(longint v);
    return (v - ((v % 256 + 256) % 256)) / 256;
  endfunction

  function automatic longint neuron(longint bias, longint acc);
    longint y = floor256(bias * 256 + acc);
    if (y > 32767 || y < -32768) n_sat++;
    if (y > 32767) y = 32767;
    if (y < -32768) y = -32768;
    if (y < 0) begin
      n_neg++;
      y = floor256(y * 77);
    end
    return y;
  endfunction

  task automatic model(int f);
    longint flat [NF];
    longint h1 [H1];
    longint h2 [H2];
    for (int pr = 0; pr < R / 2; pr++)
      for (int pc = 0; pc < C / 2; pc++) begin
        int m = img[f][2*pr][2*pc];
        if (img[f][2*pr][2*pc+1]   > m) m = img[f][2*pr][2*pc+1];
        if (img[f][2*pr+1][2*pc]   > m) m = img[f][2*pr+1][2*pc];
        if (img[f][2*pr+1][2*pc+1] > m) m = img[f][2*pr+1][2*pc+1];
        flat[pr * (C / 2) + pc] = m;
      end
    for (int o = 0; o < H1; o++) begin
      longint acc = 0;
      for (int i = 0; i < NF; i++) acc += w1[o][i] * flat[i];
      h1[o] = neuron(b1[o], acc);
    end
    for (int o = 0; o < H2; o++) begin
      longint acc = 0;
      for (int i = 0; i < H1; i++) acc += w2[o][i] * h1[i];
      h2[o] = neuron(b2[o], acc);
    end
    for (int o = 0; o < NO; o++) begin
      longint acc = 0;
      for (int i = 0; i < H2; i++) acc += w3[o][i] * h2[i];
      expect_y[f][o] = neuron(b3[o], acc);
    end
  endtask

  // ---------------- parameter loading ----------------
  task automatic wr(int layer, bit is_bias, int o, int i, longint v);
    @(negedge clk);
    cfg_we = 1'b1;
    cfg_addr = '{layer: LAYER_BITS'(layer), is_bias: is_bias, out_idx: OUT_BITS'(o), in_idx: IN_BITS'(i)};
    cfg_wdata = wgt_t'(v);
  endtask

  function automatic longint rnd(int range);
    return longint'($urandom_range(2 * range)) - range;
  endfunction

  task automatic load_weights(bit big);
    int wr1 = big ? 32767 : 96;    // layer 1 sees pixels in [0, 1)
    int wr2 = big ? 32767 : 160;
    for (int o = 0; o < H1; o++) begin
      for (int i = 0; i < NF; i++) begin w1[o][i] = rnd(wr1); wr(0, 1'b0, o, i, w1[o][i]); end
      b1[o] = rnd(256); wr(0, 1'b1, o, 0, b1[o]);
    end
    for (int o = 0; o < H2; o++) begin
      for (int i = 0; i < H1; i++) begin w2[o][i] = rnd(wr2); wr(1, 1'b0, o, i, w2[o][i]); end
      b2[o] = rnd(256); wr(1, 1'b1, o, 0, b2[o]);
    end
    for (int o = 0; o < NO; o++) begin
      for (int i = 0; i < H2; i++) begin w3[o][i] = rnd(wr2); wr(2, 1'b0, o, i, w3[o][i]); end
      b3[o] = rnd(256); wr(2, 1'b1, o, 0, b3[o]);
    end
    @(negedge clk) cfg_we = 1'b0;
  endtask

  // ---------------- mechanism counters ----------------
  int cycle = 0;
  int n_in_stall = 0, n_out_hold = 0, n_dense_hold = 0, n_overlap = 0, n_reload = 0;
  int frames_in = 0, frames_out = 0;
  int t_first_row = -1, t_first_out = -1;
  int rows_in = 0;

  always @(posedge clk) if (rst_n) begin
    cycle <= cycle + 1;
    if (s_axis_tvalid && !s_axis_tready) n_in_stall++;
    if (m_axis_tvalid && !m_axis_tready) n_out_hold++;
    if ((dut.d1_valid && !dut.d1_ready) || (dut.d2_valid && !dut.d2_ready)) n_dense_hold++;
    if (s_axis_tvalid && s_axis_tready) begin
      if (t_first_row < 0) t_first_row = cycle;
      // first row of a frame taken while an earlier frame has not come out
      if (rows_in % (R * C / P) == 0 && frames_in > frames_out) n_overlap++;
      rows_in++;
      if (rows_in % (R * C / P) == 0) frames_in++;
    end
    if (m_axis_tvalid && t_first_out < 0) t_first_out = cycle;
    if (m_axis_tvalid && m_axis_tready) frames_out++;
  end

  // ---------------- image driver ----------------
  task automatic send_frame(int f, bit gaps);
    for (int r = 0; r < R; r++) for (int bt = 0; bt < C / P; bt++) begin
      @(negedge clk);
      while (gaps && $urandom_range(4) == 0) begin s_axis_tvalid = 1'b0; @(negedge clk); end
      s_axis_tvalid = 1'b1;
      for (int c = 0; c < P; c++) s_axis_tdata[c] = pixel_t'(img[f][r][bt * P + c]);
      #0.5;
      while (!s_axis_tready) begin @(negedge clk); #0.5; end
      @(posedge clk);
    end
    @(negedge clk) s_axis_tvalid = 1'b0;
  endtask

  task automatic receive_frame(int f, bit backpressure);
    @(negedge clk);
    m_axis_tready = backpressure ? ($urandom_range(5) == 0) : 1'b1;
    while (!(m_axis_tvalid && m_axis_tready)) begin
      @(negedge clk);
      m_axis_tready = backpressure ? ($urandom_range(5) == 0) : 1'b1;
    end
    for (int o = 0; o < NO; o++) begin
      checks++;
      if (longint'(m_axis_tdata[o]) != expect_y[f][o]) begin
        failures++;
        $display("FAIL frame %0d score %0d: got %0d expected %0d", f, o, m_axis_tdata[o], expect_y[f][o]);
      end
    end
    @(negedge clk) m_axis_tready = 1'b1;
  endtask

  // ---------------- main sequence ----------------
  longint old_y [NO];
  initial begin
    foreach (s_axis_tdata[i]) s_axis_tdata[i] = '0;
    for (int f = 0; f < FRAMES; f++)
      for (int r = 0; r < R; r++)
        for (int c = 0; c < C; c++)
          img[f][r][c] = ($urandom_range(9) < 6) ? 0 : int'($urandom_range(255));
    // frame RELOAD_AT repeats frame 0's image, so a reload must change its scores
    img[RELOAD_AT] = img[0];
    repeat (4) @(posedge clk);
    rst_n = 1'b1;

    load_weights(1'b0);
    for (int f = 0; f < RELOAD_AT; f++) model(f);

    // frame 0: flat out, latency
    fork
      send_frame(0, 1'b0);
      receive_frame(0, 1'b0);
    join
    checks++;
    if (t_first_out - t_first_row != LAT) begin
      failures++;
      $display("FAIL latency %0d clocks, expected %0d", t_first_out - t_first_row, LAT);
    end
    $display("frame 0 latency: %0d clocks = %0d ns at 250 MHz", t_first_out - t_first_row,
             4 * (t_first_out - t_first_row));

    // frames 1-3: back to back, gaps and back-pressure
    fork
      for (int f = 1; f < RELOAD_AT; f++) send_frame(f, 1'b1);
      for (int f = 1; f < RELOAD_AT; f++) receive_frame(f, 1'b1);
    join

    // reload with large weights between frames
    old_y = expect_y[0];
    load_weights(1'b1);
    n_reload++;
    for (int f = RELOAD_AT; f < FRAMES; f++) model(f);
    fork
      for (int f = RELOAD_AT; f < FRAMES; f++) send_frame(f, 1'b1);
      for (int f = RELOAD_AT; f < FRAMES; f++) receive_frame(f, 1'b1);
    join
    checks++;
    if (expect_y[RELOAD_AT] == old_y) begin
      failures++;
      $display("FAIL the reloaded weights did not change the result of the same image");
    end

    $display("mechanisms: input stalls %0d, output holds %0d, dense holds %0d, frame overlaps %0d,",
             n_in_stall, n_out_hold, n_dense_hold, n_overlap);
    $display("            weight reloads %0d, saturations %0d, negative activations %0d",
             n_reload, n_sat, n_neg);
    if (n_in_stall == 0)  begin failures++; $display("FAIL no input stall"); end
    if (n_out_hold == 0)  begin failures++; $display("FAIL no output hold"); end
    if (n_dense_hold == 0) begin failures++; $display("FAIL no dense-layer hold"); end
    if (n_overlap == 0)   begin failures++; $display("FAIL no frame overlap"); end
    if (n_reload == 0)    begin failures++; $display("FAIL no reload"); end
    if (n_sat == 0)       begin failures++; $display("FAIL no saturation"); end
    if (n_neg == 0)       begin failures++; $display("FAIL no negative activation"); end
    checks += 7;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (40000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

// tb_snl_pool2d: checks 2x2 max and average pooling against a reference
// computed from the whole image held in the testbench, for two geometries:
// the BES network's 28x28 image at one row per beat, and a 8x12 image at 4
// pixels per beat (three beats a row, so the line buffer is addressed by
// beat). Each geometry runs in both modes with three frames of random
// pixels: the first frame with the stream running flat out, where the first
// output must appear one clock after the first odd-row beat, the others with
// random gaps on the input and random back-pressure on the output.
module tb_snl_pool2d;
  import snl_pkg::*;

  int checks = 0, failures = 0;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  localparam int NCFG = 4;
  logic [NCFG-1:0] done = '0;

  for (genvar g = 0; g < NCFG; g++) begin : g_cfg
    localparam int         R    = (g < 2) ? 28 : 8;
    localparam int         C    = (g < 2) ? 28 : 12;
    localparam int         P    = (g < 2) ? 28 : 4;
    localparam pool_mode_e MODE = (g % 2 == 0) ? POOL_MAX : POOL_AVG;
    localparam int         BPR  = C / P;
    localparam int         FRAMES = 3;

    logic       s_valid, s_ready, m_valid, m_ready;
    logic [7:0] s_data [P];
    logic [7:0] m_data [P/2];
    logic [7:0] img [FRAMES][R][C];

    snl_pool2d #(.IMG_ROWS(R), .IMG_COLS(C), .PIX_PER_BEAT(P), .DATA_BITS(8), .MODE(MODE))
      dut (.clk, .rst_n, .s_valid, .s_ready, .s_data, .m_valid, .m_ready, .m_data);

    function automatic int expect_val(int f, int pr, int pc);
      int a = img[f][2*pr][2*pc],   b = img[f][2*pr][2*pc+1];
      int c = img[f][2*pr+1][2*pc], d = img[f][2*pr+1][2*pc+1];
      int m = a;
      if (MODE == POOL_AVG) return (a + b + c + d) / 4;
      if (b > m) m = b;
      if (c > m) m = c;
      if (d > m) m = d;
      return m;
    endfunction

    int cycle = 0;
    int first_accept = -1, first_out = -1;
    always @(posedge clk) begin
      cycle <= cycle + 1;
      if (s_valid && s_ready && first_accept < 0) first_accept = cycle;
      if (rst_n && m_valid && first_out < 0) first_out = cycle;
    end

    // driver
    initial begin
      s_valid = 1'b0;
      foreach (s_data[i]) s_data[i] = '0;
      for (int f = 0; f < FRAMES; f++)
        for (int r = 0; r < R; r++)
          for (int c = 0; c < C; c++) img[f][r][c] = 8'($urandom);
      wait (rst_n);
      for (int f = 0; f < FRAMES; f++)
        for (int r = 0; r < R; r++)
          for (int b = 0; b < BPR; b++) begin
            @(negedge clk);
            while (f > 0 && $urandom_range(3) == 0) begin s_valid = 1'b0; @(negedge clk); end
            s_valid = 1'b1;
            for (int i = 0; i < P; i++) s_data[i] = img[f][r][b*P+i];
            #1;
            while (!s_ready) begin @(negedge clk); #1; end
            @(posedge clk);
          end
      @(negedge clk) s_valid = 1'b0;
    end

    // monitor
    initial begin
      m_ready = 1'b1;
      wait (rst_n);
      for (int f = 0; f < FRAMES; f++)
        for (int pr = 0; pr < R/2; pr++)
          for (int b = 0; b < BPR; b++) begin
            @(negedge clk);
            m_ready = (f == 0) ? 1'b1 : ($urandom_range(2) != 0);
            while (!(m_valid && m_ready)) begin
              @(negedge clk);
              m_ready = (f == 0) ? 1'b1 : ($urandom_range(2) != 0);
            end
            for (int j = 0; j < P/2; j++) begin
              checks++;
              if (int'(m_data[j]) != expect_val(f, pr, b*P/2 + j)) begin
                failures++;
                $display("FAIL cfg %0d frame %0d row %0d col %0d: got %0d expected %0d",
                         g, f, pr, b*P/2 + j, m_data[j], expect_val(f, pr, b*P/2 + j));
              end
            end
          end
      // latency of the first frame: first odd-row beat is beat BPR, output one clock later
      checks++;
      if (first_out - first_accept != BPR + 1) begin
        failures++;
        $display("FAIL cfg %0d: first output %0d clocks after first beat, expected %0d",
                 g, first_out - first_accept, BPR + 1);
      end
      done[g] = 1'b1;
    end
  end

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    wait (&done);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

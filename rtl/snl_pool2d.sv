// snl_pool2d: 2x2 pooling with stride 2 ("valid" padding) over an image that
// arrives row by row on a ready/valid stream, PIX_PER_BEAT pixels per beat.
//
// In the BES network this is the MaxPooling2D layer that reduces the 28x28
// input to 14x14. MODE = POOL_AVG turns it into AveragePooling, where the
// division by the kernel size (4) is done, as for any fixed divisor, by a
// multiply with a binary-scaled reciprocal followed by a right shift; for a
// 2x2 kernel that is exact up to the truncation of the low bits.
//
// How it works: pixels of an even row are stored in a one-row line buffer.
// When the matching beat of the following odd row arrives, each pair of
// columns is combined with the two stored pixels above it, and the
// PIX_PER_BEAT/2 results are placed in the output register. Even-row beats
// are always accepted; an odd-row beat waits while the output register is
// full and not being read (s_ready low). Rows and columns are counted
// inside; there is no frame marker on the stream.
//
// Timing: one output beat per two input rows' worth of beats; the output
// appears one clock after the odd-row beat that completes it.
//
// Follows the paper: 2x2 kernel, 28x28 -> 14x14, pooling as its own layer,
// average pooling by reciprocal multiply and shift. This design's choices:
// a whole image row per beat by default (data widening over the columns, as
// the image has one channel), the ready/valid handshake, truncation in the
// average.
module snl_pool2d
  import snl_pkg::*;
#(
  parameter int unsigned IMG_ROWS     = 28,
  parameter int unsigned IMG_COLS     = 28,
  parameter int unsigned PIX_PER_BEAT = 28,   // must be even and divide IMG_COLS
  parameter int unsigned DATA_BITS    = PIX_BITS,
  parameter pool_mode_e  MODE         = POOL_MAX
) (
  input  logic                 clk,
  input  logic                 rst_n,
  // input stream: one beat = PIX_PER_BEAT consecutive pixels of one row
  input  logic                 s_valid,
  output logic                 s_ready,
  input  logic [DATA_BITS-1:0] s_data [PIX_PER_BEAT],
  // output stream: one beat = PIX_PER_BEAT/2 pooled values of one pooled row
  output logic                 m_valid,
  input  logic                 m_ready,
  output logic [DATA_BITS-1:0] m_data [PIX_PER_BEAT/2]
);

  localparam int unsigned OUT_PER_BEAT  = PIX_PER_BEAT / 2;
  localparam int unsigned BEATS_PER_ROW = IMG_COLS / PIX_PER_BEAT;
  localparam int unsigned CB_W  = (BEATS_PER_ROW > 1) ? $clog2(BEATS_PER_ROW) : 1;
  localparam int unsigned ROW_W = $clog2(IMG_ROWS);
  // reciprocal of the kernel size 4, scaled by 2**RSHIFT
  localparam int unsigned RSHIFT = 16;
  localparam int unsigned RECIP  = (1 << RSHIFT) / 4;
  localparam int unsigned SW     = DATA_BITS + 2 + RSHIFT;

  initial begin
    assert (PIX_PER_BEAT % 2 == 0 && IMG_COLS % PIX_PER_BEAT == 0 && IMG_ROWS % 2 == 0)
      else $fatal(1, "snl_pool2d: PIX_PER_BEAT must be even and divide IMG_COLS");
  end

  logic [DATA_BITS-1:0] line_buf [BEATS_PER_ROW][PIX_PER_BEAT];
  logic [CB_W-1:0]      col_beat;
  logic [ROW_W-1:0]     row;
  logic                 odd_row;
  logic                 s_fire;
  logic [DATA_BITS-1:0] pooled [OUT_PER_BEAT];

  assign odd_row = row[0];
  assign s_ready = !odd_row || !m_valid || m_ready;
  assign s_fire  = s_valid && s_ready;

  // 2x2 window: a = above-left, b = above-right, c = below-left, d = below-right
  always_comb begin
    for (int j = 0; j < OUT_PER_BEAT; j++) begin
      logic [DATA_BITS-1:0] a, b, c, d, m1, m2;
      logic [DATA_BITS+1:0] sum;
      logic [SW-1:0]        scaled;
      a = line_buf[col_beat][2*j];
      b = line_buf[col_beat][2*j+1];
      c = s_data[2*j];
      d = s_data[2*j+1];
      m1 = (a > b) ? a : b;
      m2 = (c > d) ? c : d;
      sum = {2'b00, a} + {2'b00, b} + {2'b00, c} + {2'b00, d};
      scaled = SW'(sum) * SW'(RECIP);
      if (MODE == POOL_MAX) pooled[j] = (m1 > m2) ? m1 : m2;
      else                  pooled[j] = DATA_BITS'(scaled >> RSHIFT);
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      col_beat <= '0;
      row      <= '0;
      m_valid  <= 1'b0;
    end else begin
      if (m_valid && m_ready) m_valid <= 1'b0;
      if (s_fire) begin
        if (odd_row) m_valid <= 1'b1;
        if (col_beat == CB_W'(BEATS_PER_ROW - 1)) begin
          col_beat <= '0;
          row      <= (row == ROW_W'(IMG_ROWS - 1)) ? '0 : row + 1'b1;
        end else begin
          col_beat <= col_beat + 1'b1;
        end
      end
    end
  end

  always_ff @(posedge clk) begin
    if (s_fire && !odd_row) line_buf[col_beat] <= s_data;
    if (s_fire && odd_row)  m_data <= pooled;
  end

  // A held output beat must not be withdrawn before it is taken.
  property p_hold;
    @(posedge clk) disable iff (!rst_n) (m_valid && !m_ready) |=> m_valid;
  endproperty
  assert property (p_hold);

endmodule

// window_gen: line buffers and 3x3 window for the convolution operator.
//
// A 3x3 operator on a raster stream needs the two previous image rows. This block keeps
// them in one line-buffer memory of MAX_W words, each word holding the pixel of row y-1
// and of row y-2 at one column, and keeps the last two window columns in registers.
// When a pixel at column col is accepted (shift_en), the column {row y-2, row y-1, new
// pixel} is read from the buffer and the input, the window shifts one column left, and
// the buffer word at col is rewritten with {row y-1, new pixel}.
//
// Interface: shift_en, col and pix_in in; win_next out, the window that results from the
// pixel on pix_in (combinational, so the PE can compute on it in the same cycle the pixel
// is accepted). Tap order is r*3+c with r = 0 the top row and c = 0 the left column; the
// bottom-right tap is pix_in. The window only holds image pixels once col >= 2 and the
// row >= 2; the PE's controller decides that. Timing: one pixel per clock. The buffer has
// no reset: a word is always written in a row before it is read in the next one. The
// line-buffer organisation is this design's choice; the architecture asks only for 3x3
// convolution on sensor images.
module window_gen
  import pe_pkg::*;
#(
  parameter int unsigned MAX_W = 640,
  localparam int unsigned COL_W = $clog2(MAX_W)
)(
  input  logic              clk,
  input  logic              rst_n,
  input  logic              shift_en,
  input  logic [COL_W-1:0]  col,
  input  pix_t              pix_in,
  output window_t           win_next
);

  // Word: [2*PIX_W-1:PIX_W] = row y-2, [PIX_W-1:0] = row y-1.
  logic [2*PIX_W-1:0] line_mem [MAX_W];
  logic [2*PIX_W-1:0] rd_word;

  // Registered columns 1 and 2 of the current window (they become columns 0 and 1).
  pix_t [2:0] col_a;   // left column of the next window, per row
  pix_t [2:0] col_b;   // middle column of the next window, per row

  assign rd_word = line_mem[col];

  always_comb begin
    for (int r = 0; r < 3; r++) begin
      win_next[r*3 + 0] = col_a[r];
      win_next[r*3 + 1] = col_b[r];
    end
    win_next[0*3 + 2] = pix_t'(rd_word[2*PIX_W-1:PIX_W]);
    win_next[1*3 + 2] = pix_t'(rd_word[PIX_W-1:0]);
    win_next[2*3 + 2] = pix_in;
  end

  always_ff @(posedge clk) begin
    if (shift_en) line_mem[col] <= {rd_word[PIX_W-1:0], pix_in};
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      col_a <= '0;
      col_b <= '0;
    end else if (shift_en) begin
      for (int r = 0; r < 3; r++) begin
        col_a[r] <= win_next[r*3 + 1];
        col_b[r] <= win_next[r*3 + 2];
      end
    end
  end

endmodule

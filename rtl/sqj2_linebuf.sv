// sqj2_linebuf -- line buffer linebuf[K_MAX][WIxCHI_MAX] with its line-order
// table linebuf_idx[K_MAX].
//
// The buffer holds the input rows that the current row of convolution windows
// covers.  Ports address lines logically (0 = top line of the window) and
// linebuf_idx turns a logical line into a physical one, so sliding the buffer
// down one input row is a rotation of linebuf_idx instead of a copy: after
// 'rotate' the old top line becomes the new bottom line, ready to be refilled.
// 'reset_idx' restores the identity order at the start of a layer.  'kernel'
// is the number of lines in use (the rotation wraps there).
//
// Storage is organised as words of CHI_NUM bytes; the write port has one
// enable per byte (the input stream delivers one byte per cycle, padding is
// written a whole word at a time).  The read port returns a word one cycle
// after the address.  The buffer and the rotated index table follow the
// published design; the word organisation is this design's choice.
module sqj2_linebuf
  import sqj2_pkg::*;
#(
  parameter int unsigned LINES = K_MAX,
  parameter int unsigned WORDS = WIXCHI_MAX / CHI_NUM
) (
  input  logic                         clk,
  input  logic                         rst_n,
  input  logic [3:0]                   kernel,
  input  logic                         reset_idx,
  input  logic                         rotate,
  input  logic                         wr_en,
  input  logic [$clog2(LINES)-1:0]     wr_line,
  input  logic [$clog2(WORDS)-1:0]     wr_addr,
  input  word_t                        wr_data,
  input  logic [CHI_NUM-1:0]           wr_be,
  input  logic [$clog2(LINES)-1:0]     rd_line,
  input  logic [$clog2(WORDS)-1:0]     rd_addr,
  output word_t                        rd_data
);
  localparam int unsigned LW = $clog2(LINES);

  word_t         mem [LINES*WORDS];   // physical line l at words l*WORDS ..
  logic [LW-1:0] idx [LINES];

  always_ff @(posedge clk) begin
    if (!rst_n || reset_idx) begin
      for (int j = 0; j < LINES; j++) idx[j] <= LW'(j);
    end else if (rotate) begin
      for (int j = 0; j < LINES; j++) begin
        if (j + 1 < int'(kernel))       idx[j] <= idx[j+1];
        else if (j + 1 == int'(kernel)) idx[j] <= idx[0];
      end
    end
  end

  always_ff @(posedge clk) begin
    if (wr_en)
      for (int b = 0; b < CHI_NUM; b++)
        if (wr_be[b]) mem[int'(idx[wr_line])*WORDS + int'(wr_addr)][b*DW +: DW] <= wr_data[b*DW +: DW];
    rd_data <= mem[int'(idx[rd_line])*WORDS + int'(rd_addr)];
  end
endmodule

// sqj2_window_buf -- the two line-buffer windows linebuf_win0/linebuf_win1.
//
// A window is the K x K x CHI block of input values that one output pixel
// needs, stored in (kernel row, kernel column, channel) order as words of
// CHI_NUM bytes.  Two banks make the double buffer: while pixel_calc reads
// one bank, the loader fills the other with the next window, so input traffic
// overlaps computation.  One write port and one read port, each with its own
// bank select; a read returns its word one cycle after the address.  The two
// windows follow the published design; the word width is this design's
// choice.
module sqj2_window_buf
  import sqj2_pkg::*;
#(
  parameter int unsigned WORDS = KXKXCHI_MAX / CHI_NUM
) (
  input  logic                     clk,
  input  logic                     wr_en,
  input  logic                     wr_bank,
  input  logic [$clog2(WORDS)-1:0] wr_addr,
  input  word_t                    wr_data,
  input  logic                     rd_bank,
  input  logic [$clog2(WORDS)-1:0] rd_addr,
  output word_t                    rd_data
);
  // both banks in one RAM: bank b occupies words b*WORDS .. b*WORDS+WORDS-1
  word_t mem [2*WORDS];

  always_ff @(posedge clk) begin
    if (wr_en) mem[(wr_bank ? WORDS : 0) + int'(wr_addr)] <= wr_data;
    rd_data <= mem[(rd_bank ? WORDS : 0) + int'(rd_addr)];
  end

endmodule

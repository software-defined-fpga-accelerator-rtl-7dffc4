// sqj2_out_pix_buf -- the two output-pixel buffers out_pix0/out_pix1.
//
// Each bank holds all output channels of one output pixel.  pixel_calc writes
// PAR_FACT channels at once (one result from each PE: word q holds channels
// q*PAR_FACT .. q*PAR_FACT+PAR_FACT-1) while write_back reads the other bank
// one channel per cycle; the read data appears one cycle after the address.
// The two banks are the published double buffer; the port shapes are this
// design's choice.
module sqj2_out_pix_buf
  import sqj2_pkg::*;
#(
  parameter int unsigned CH = CHO_MAX
) (
  input  logic                               clk,
  input  logic                               wr_en,
  input  logic                               wr_bank,
  input  logic [$clog2(CH/PAR_FACT)-1:0]     wr_addr,
  input  logic [PAR_FACT*DW-1:0]             wr_data,
  input  logic                               rd_bank,
  input  logic [$clog2(CH)-1:0]              rd_ch,
  output data_t                              rd_data
);
  localparam int unsigned QW = $clog2(PAR_FACT);
  localparam int unsigned NW = CH / PAR_FACT;
  logic [PAR_FACT*DW-1:0] mem [2*NW];   // bank b at words b*NW ..
  logic [PAR_FACT*DW-1:0] rd_word;
  logic [QW-1:0]          rd_sel;

  always_ff @(posedge clk) begin
    if (wr_en) mem[(wr_bank ? NW : 0) + int'(wr_addr)] <= wr_data;
    rd_word <= mem[(rd_bank ? NW : 0) + int'(rd_ch[$clog2(CH)-1:QW])];
    rd_sel  <= rd_ch[QW-1:0];
  end
  assign rd_data = data_t'(rd_word[rd_sel*DW +: DW]);
endmodule

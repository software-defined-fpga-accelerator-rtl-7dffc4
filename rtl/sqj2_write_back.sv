// sqj2_write_back -- sends one finished output pixel towards main memory.
//
// After 'start' the block reads the selected out_pix bank one channel per
// cycle (channels 0 .. cho-1), applies ReLU when use_relu is set, and offers
// each value, with its channel number and a pixel-end flag, to the
// maxpool/bypass stage that feeds the output stream.  It follows valid/ready
// back-pressure: while a value waits, the same channel is read again so the
// one-cycle read latency of the buffer costs nothing.  'done' pulses after
// the last channel has been accepted.  At full speed a pixel takes cho + 2
// cycles from 'start' to 'done'.
//
// Writing back the previous pixel while the next one is computed, and ReLU
// inside write_back, follow the published HLS code; the handshake is this
// design's choice.
module sqj2_write_back
  import sqj2_pkg::*;
#(
  parameter int unsigned CH = CHO_MAX
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     start,
  input  logic                     bank,
  input  logic [15:0]              cho,
  input  logic                     use_relu,
  output logic                     done,
  // out_pix read port
  output logic                     op_rd_bank,
  output logic [$clog2(CH)-1:0]    op_rd_ch,
  input  data_t                    op_rd_data,
  // output value stream
  output logic                     o_valid,
  input  logic                     o_ready,
  output data_t                    o_data,
  output logic [15:0]              o_ch,
  output logic                     o_pix_last
);
  logic        busy, bank_q;
  logic [15:0] n_ch;      // next channel to read
  logic        d_valid;   // op_rd_data holds channel d_ch
  logic [15:0] d_ch;
  logic        issue, stall;

  assign stall = d_valid && !o_ready;
  assign issue = busy && !stall;

  assign op_rd_bank = bank_q;
  assign op_rd_ch   = $clog2(CH)'(stall ? d_ch : n_ch);

  assign o_valid    = d_valid;
  assign o_data     = (use_relu && op_rd_data < 0) ? data_t'(0) : op_rd_data;
  assign o_ch       = d_ch;
  assign o_pix_last = (d_ch == cho - 1);

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      {busy, bank_q, d_valid, done} <= '0;
      {n_ch, d_ch} <= '0;
    end else begin
      done <= 1'b0;
      if (start && !busy && !d_valid) begin
        busy   <= 1'b1;
        bank_q <= bank;
        n_ch   <= '0;
      end else if (issue) begin
        n_ch <= n_ch + 1;
        if (n_ch == cho - 1) busy <= 1'b0;
      end
      if (!stall) begin
        d_valid <= issue;
        d_ch    <= n_ch;
        if (d_valid && o_pix_last) done <= 1'b1;
      end
    end
  end
endmodule

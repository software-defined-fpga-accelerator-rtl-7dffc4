// sqj2_mac_pe -- one processing element (PE) of SqueezeJet-2.
//
// Each cycle the PE takes one word of CHI_NUM input values (from the
// line-buffer window) and one word of CHI_NUM weights, multiplies them
// pairwise as signed 8-bit numbers, sums the CHI_NUM products and adds the sum
// to its accumulator.  A new word pair can enter every cycle (initiation
// interval 1).  'first' marks the first word of an output channel and clears
// the accumulator; 'last' marks the final word, and three cycles later
// out_valid pulses with the finished dot product in acc.
//
// Pipeline: stage 1 registers the CHI_NUM products, stage 2 the adder-tree sum,
// stage 3 the accumulator.  The 16 MACs per PE follow the published design;
// the pipeline split and the 32-bit accumulator are this design's choice.  The
// published implementation put half of the multipliers in DSP blocks and half
// in LUTs; here that mapping is left to synthesis.
module sqj2_mac_pe
  import sqj2_pkg::*;
(
  input  logic  clk,
  input  logic  rst_n,
  input  logic  in_valid,
  input  logic  first,
  input  logic  last,
  input  word_t act,
  input  word_t wgt,
  output logic  out_valid,
  output acc_t  acc
);
  logic signed [15:0] prod_q [CHI_NUM];
  logic               v1, f1, l1, v2, f2, l2;
  acc_t               sum_d, sum_q;

  // stage 1: products
  always_ff @(posedge clk) begin
    for (int i = 0; i < CHI_NUM; i++)
      prod_q[i] <= signed'(act[i*DW +: DW]) * signed'(wgt[i*DW +: DW]);
  end

  // stage 2: adder tree (written as a sum; synthesis builds the tree)
  always_comb begin
    sum_d = '0;
    for (int i = 0; i < CHI_NUM; i++) sum_d += ACC_W'(prod_q[i]);
  end
  always_ff @(posedge clk) sum_q <= sum_d;

  // stage 3: accumulate
  always_ff @(posedge clk) begin
    if (!rst_n) begin
      {v1, f1, l1, v2, f2, l2} <= '0;
      out_valid <= 1'b0;
      acc       <= '0;
    end else begin
      {v1, f1, l1} <= {in_valid, first, last};
      {v2, f2, l2} <= {v1, f1, l1};
      out_valid    <= v2 & l2;
      if (v2) acc <= (f2 ? acc_t'(0) : acc) + sum_q;
    end
  end
endmodule

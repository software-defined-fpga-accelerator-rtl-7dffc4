// sqj2_requant -- dynamic fixed-point output stage of one PE.
//
// The PE accumulator holds a sum of products whose fraction length is ei+ep
// (input fraction length plus parameter fraction length).  This block adds the
// 8-bit bias (fraction length ep, so it is shifted by ei to line up), moves the
// sum to the output fraction length eo with an arithmetic shift by
// s = ei + ep - eo, rounds half up when bits are dropped, and saturates to the
// signed 8-bit range.  Fraction lengths may be negative, as in Ristretto's
// dynamic fixed point.  Purely combinational.
//
// The 8-bit dynamic fixed-point format and the three fraction lengths follow
// the published design; the rounding mode and the saturation are this
// design's choice.
module sqj2_requant
  import sqj2_pkg::*;
(
  input  acc_t  acc,    // sum of products, fraction length ei+ep
  input  data_t bias,   // fraction length ep
  input  fl_t   ei,
  input  fl_t   eo,
  input  fl_t   ep,
  output data_t q       // fraction length eo
);
  logic signed [63:0] sum, shifted;
  logic signed [7:0]  fl, sh;

  always_comb begin
    // Bring accumulator (fraction length ei+ep) and bias (fraction length ep)
    // to a common fraction length fl without dropping bits.
    if (ei >= 0) begin
      sum = 64'(signed'(acc)) + (64'(signed'(bias)) <<< ei);
      fl  = 8'(ei) + 8'(ep);
    end else begin
      sum = (64'(signed'(acc)) <<< (-ei)) + 64'(signed'(bias));
      fl  = 8'(ep);
    end
    sh = fl - 8'(eo);
    if (sh > 0)      shifted = (sum + (64'sd1 <<< (sh - 8'sd1))) >>> sh;
    else if (sh < 0) shifted = sum <<< (-sh);
    else             shifted = sum;
    if (shifted > 64'sd127)       q = 8'sd127;
    else if (shifted < -64'sd128) q = -8'sd128;
    else                          q = data_t'(shifted);
  end
endmodule

// sqj2_maxpool -- maxpool fused behind the convolution output, or bypassed.
//
// The convolution output arrives as a stream of 8-bit values in raster order
// (output row, output column, channel innermost); 'pix_last' marks the last
// channel of a pixel.  With 'bypass' set the stream passes through unchanged.
// Otherwise the window maximum is taken in two steps, first along a row,
// then down the columns.  Because the pool kernel is at most twice the pool
// stride (3x3 stride 2 in SqueezeNet v1.1), a value belongs to at most two
// pooled columns and two pooled rows, and two neighbouring windows always
// differ in parity.  The row step keeps, per channel, the running maximum of
// the even and of the odd pooled column (two RAMs of POOL_CH_MAX bytes);
// when a column window closes, its maximum goes to the column step, which
// keeps the running maxima of the even and the odd pooled row for every
// pooled column and channel (two RAMs of POOL_W_MAX*POOL_CH_MAX bytes).
// Each RAM sees at most one read-modify-write per cycle.
// A pooled pixel is emitted, channel by channel, while the last input pixel
// of its window passes through; windows at the right and bottom edges are
// clipped to the map, so the pooled size may follow Caffe's rounding up
// (113 -> 56, 56 -> 28, 28 -> 14).  A value is accepted in the cycle it is
// offered unless it must be emitted and the output is not ready.
//
// The fusion itself (pooling without a round trip to main memory, and the
// bypass) follows the published design; how the maxima are kept is this
// design's choice.
module sqj2_maxpool
  import sqj2_pkg::*;
#(
  parameter int unsigned WMAX  = POOL_W_MAX,
  parameter int unsigned CHMAX = POOL_CH_MAX
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        clear,        // start of a layer
  input  logic        bypass,
  input  logic [3:0]  pk,           // pool kernel (ps <= pk <= 2*ps)
  input  logic [3:0]  ps,           // pool stride
  input  logic [15:0] h_in,         // convolution output rows
  input  logic [15:0] w_in,         // convolution output columns
  input  logic [15:0] h_out,        // pooled rows
  input  logic [15:0] w_out,        // pooled columns
  input  logic [15:0] chn,          // channels
  // input stream
  input  logic        in_valid,
  output logic        in_ready,
  input  data_t       in_data,
  input  logic [15:0] in_ch,
  input  logic        pix_last,
  // output stream
  output logic        out_valid,
  input  logic        out_ready,
  output data_t       out_data,
  output logic        out_last      // last value of the layer
);
  localparam int unsigned CW = $clog2(CHMAX);
  localparam int unsigned WW = $clog2(WMAX);

  // running maxima; index 0/1 = parity of the pooled column / row
  data_t hmem0 [CHMAX], hmem1 [CHMAX];
  data_t vmem0 [WMAX*CHMAX], vmem1 [WMAX*CHMAX];

  // position of the current input pixel
  logic [15:0] ho, wo;          // conv output row / column
  logic [15:0] hpa, wpa;        // pooled row / column whose window starts at or before it
  logic [3:0]  hph, wph;        // ho - hpa*ps, wo - wpa*ps
  logic [15:0] hpb, wpb;        // the previous pooled row / column

  logic        rA, rB, cA, cB;             // candidate windows contain the pixel
  logic        rA_c, rB_c, cA_c, cB_c;     // candidate window ends at the pixel
  logic [CW-1:0] ch;

  function automatic data_t vmax(data_t a, data_t b);
    return (a > b) ? a : b;
  endfunction

  assign hpb = hpa - 1;
  assign wpb = wpa - 1;
  assign ch  = in_ch[CW-1:0];
  assign rA  = (hpa < h_out);
  assign rB  = (hpa != 0) && (16'(hph) + 16'(ps) < 16'(pk)) && (hpb < h_out);
  assign cA  = (wpa < w_out);
  assign cB  = (wpa != 0) && (16'(wph) + 16'(ps) < 16'(pk)) && (wpb < w_out);
  assign rA_c = (16'(hph) + 1 == 16'(pk)) || (ho == h_in - 1);
  assign rB_c = (16'(hph) + 16'(ps) + 1 == 16'(pk)) || (ho == h_in - 1);
  assign cA_c = (16'(wph) + 1 == 16'(pk)) || (wo == w_in - 1);
  assign cB_c = (16'(wph) + 16'(ps) + 1 == 16'(pk)) || (wo == w_in - 1);

  // row step
  data_t h_old_a, h_old_b, h_new_a, h_new_b, hv;
  logic  h_done;
  logic [15:0] wp_done;
  always_comb begin
    h_old_a = wpa[0] ? hmem1[ch] : hmem0[ch];
    h_old_b = wpa[0] ? hmem0[ch] : hmem1[ch];
    h_new_a = (wph == 0) ? in_data : vmax(h_old_a, in_data);
    h_new_b = vmax(h_old_b, in_data);
    h_done  = 1'b0;
    hv      = h_new_a;
    wp_done = wpa;
    if (cB && cB_c) begin
      h_done = 1'b1; hv = h_new_b; wp_done = wpb;
    end else if (cA && cA_c) begin
      h_done = 1'b1;
    end
  end

  // column step
  logic [WW+CW-1:0] vaddr;
  data_t v_old_a, v_old_b, v_new_a, v_new_b;
  logic  emit, emit_last;
  data_t emit_val;
  always_comb begin
    vaddr   = {wp_done[WW-1:0], ch};
    v_old_a = hpa[0] ? vmem1[vaddr] : vmem0[vaddr];
    v_old_b = hpa[0] ? vmem0[vaddr] : vmem1[vaddr];
    v_new_a = (hph == 0) ? hv : vmax(v_old_a, hv);
    v_new_b = vmax(v_old_b, hv);
    emit      = 1'b0;
    emit_val  = v_new_a;
    emit_last = 1'b0;
    if (h_done && rB && rB_c) begin
      emit = 1'b1; emit_val = v_new_b;
      emit_last = (hpb == h_out - 1) && (wp_done == w_out - 1);
    end else if (h_done && rA && rA_c) begin
      emit = 1'b1;
      emit_last = (hpa == h_out - 1) && (wp_done == w_out - 1);
    end
  end

  always_comb begin
    if (bypass) begin
      out_valid = in_valid;
      out_data  = in_data;
      out_last  = pix_last && (ho == h_in - 1) && (wo == w_in - 1);
      in_ready  = out_ready;
    end else begin
      out_valid = in_valid && emit;
      out_data  = emit_val;
      out_last  = emit_last && (in_ch == chn - 1);
      in_ready  = emit ? out_ready : 1'b1;
    end
  end

  logic take;
  assign take = in_valid && in_ready && !bypass;

  // RAM writes: the two candidates of each step always differ in parity
  always_ff @(posedge clk) begin
    if (take && cA) begin
      if (wpa[0]) hmem1[ch] <= h_new_a; else hmem0[ch] <= h_new_a;
    end
    if (take && cB) begin
      if (wpb[0]) hmem1[ch] <= h_new_b; else hmem0[ch] <= h_new_b;
    end
  end
  always_ff @(posedge clk) begin
    if (take && h_done && rA) begin
      if (hpa[0]) vmem1[vaddr] <= v_new_a; else vmem0[vaddr] <= v_new_a;
    end
    if (take && h_done && rB) begin
      if (hpb[0]) vmem1[vaddr] <= v_new_b; else vmem0[vaddr] <= v_new_b;
    end
  end

  // pixel position counters
  always_ff @(posedge clk) begin
    if (!rst_n || clear) begin
      {ho, wo, hpa, wpa, hph, wph} <= '0;
    end else if (in_valid && in_ready && pix_last) begin
      if (wo == w_in - 1) begin
        wo <= '0; wpa <= '0; wph <= '0;
        ho <= ho + 1;
        if (hph + 1 == ps) begin hph <= '0; hpa <= hpa + 1; end
        else hph <= hph + 1;
      end else begin
        wo <= wo + 1;
        if (wph + 1 == ps) begin wph <= '0; wpa <= wpa + 1; end
        else wph <= wph + 1;
      end
    end
  end

  // Pooling windows only overlap their neighbours (pool kernel <= 2 x stride).
  a_overlap: assert property (@(posedge clk) disable iff (!rst_n)
    (in_valid && !bypass) |-> (pk >= ps) && (16'(pk) <= 16'(ps) * 2));
endmodule

// sqj2_pixel_calc -- computes one output pixel (pixel_calc = calc_ch_out and
// write_pix working as a pipeline).
//
// The PAR_FACT PEs share one window word per cycle and each reads its own
// weight word, so every cycle PAR_FACT*CHI_NUM MACs are done.  The sequencer
// walks local channel q = 0 .. qcho-1 and, inside it, window word
// i = 0 .. kkw-1 (kkw = K*K*CHI / CHI_NUM); PE p therefore produces output
// channel q*PAR_FACT + p.  When a channel's last word leaves a PE, the PE's
// sqj2_requant adds the bias, rescales to the output fraction length and
// saturates, and the PAR_FACT results are written as one word into the
// selected out_pix bank (write_pix), overlapping with the next channel.
//
// Timing: 'start' (one cycle) to 'done' (one cycle) takes qcho*kkw + FILL
// cycles, FILL = 5 (cache read 1, PE pipeline 3, write 1), i.e. the published
// CHO*K*K*CHI/(PAR_FACT*CHI_NUM) + pipeline fill.  The loop order and PE
// sharing follow the published design; the pipeline depths are this design's.
module sqj2_pixel_calc
  import sqj2_pkg::*;
#(
  parameter int unsigned WIN_WORDS = KXKXCHI_MAX / CHI_NUM,
  parameter int unsigned WWORDS    = Q_CHOXKXKXCHI_MAX / CHI_NUM,
  parameter int unsigned QCHO      = CHO_MAX / PAR_FACT
) (
  input  logic                          clk,
  input  logic                          rst_n,
  input  logic                          start,
  input  logic                          bank,       // window bank and out_pix bank
  input  logic [15:0]                   kkw,        // window words per channel
  input  logic [15:0]                   qcho,       // local channels per PE
  input  fl_t                           ei,
  input  fl_t                           eo,
  input  fl_t                           ep,
  output logic                          done,
  // window read port
  output logic                          win_rd_bank,
  output logic [$clog2(WIN_WORDS)-1:0]  win_rd_addr,
  input  word_t                         win_rd_data,
  // parameter cache read ports
  output logic [$clog2(WWORDS)-1:0]     w_rd_addr,
  input  word_t                         w_rd_data [PAR_FACT],
  output logic [$clog2(QCHO)-1:0]       bias_q,
  input  data_t                         bias_rd [PAR_FACT],
  // out_pix write port
  output logic                          op_wr_en,
  output logic                          op_wr_bank,
  output logic [$clog2(QCHO)-1:0]       op_wr_addr,
  output logic [PAR_FACT*DW-1:0]        op_wr_data
);

  logic        busy, bank_q;
  logic [15:0] q, i, waddr;
  // issue stage -> data stage (cache read latency)
  logic        d_valid, d_first, d_last;
  logic [15:0] d_q;
  // alignment of bias and channel number with the PE pipeline
  data_t       bias_p [3][PAR_FACT];
  logic [15:0] q_p [3];
  logic        pe_valid [PAR_FACT];
  acc_t        pe_acc   [PAR_FACT];
  data_t       pe_q     [PAR_FACT];
  logic        last_q_p [3];

  assign win_rd_bank = bank_q;
  assign win_rd_addr = $clog2(WIN_WORDS)'(i);
  assign w_rd_addr   = $clog2(WWORDS)'(waddr);
  assign bias_q      = $clog2(QCHO)'(q);

  // issue stage
  always_ff @(posedge clk) begin
    if (!rst_n) begin
      busy <= 1'b0;
      {q, i, waddr} <= '0;
      {d_valid, d_first, d_last} <= '0;
      bank_q <= 1'b0;
      d_q <= '0;
    end else begin
      d_valid <= busy;
      d_first <= busy && (i == 0);
      d_last  <= busy && (i == kkw - 1);
      d_q     <= q;
      if (start && !busy) begin
        busy <= 1'b1;
        bank_q <= bank;
        {q, i, waddr} <= '0;
      end else if (busy) begin
        waddr <= waddr + 1;
        if (i == kkw - 1) begin
          i <= '0;
          q <= q + 1;
          if (q == qcho - 1) busy <= 1'b0;
        end else begin
          i <= i + 1;
        end
      end
    end
  end

  // PEs
  for (genvar p = 0; p < PAR_FACT; p++) begin : g_pe
    sqj2_mac_pe u_pe (
      .clk, .rst_n,
      .in_valid (d_valid),
      .first    (d_first),
      .last     (d_last),
      .act      (win_rd_data),
      .wgt      (w_rd_data[p]),
      .out_valid(pe_valid[p]),
      .acc      (pe_acc[p])
    );
    sqj2_requant u_rq (
      .acc (pe_acc[p]),
      .bias(bias_p[2][p]),
      .ei, .eo, .ep,
      .q   (pe_q[p])
    );
  end

  // bias and channel number travel with the PE pipeline
  always_ff @(posedge clk) begin
    bias_p[0] <= bias_rd;
    bias_p[1] <= bias_p[0];
    bias_p[2] <= bias_p[1];
    q_p[0] <= d_q;
    q_p[1] <= q_p[0];
    q_p[2] <= q_p[1];
  end

  // write_pix
  always_ff @(posedge clk) begin
    if (!rst_n) begin
      op_wr_en <= 1'b0;
      done     <= 1'b0;
      last_q_p <= '{default: 1'b0};
    end else begin
      last_q_p[0] <= d_last && (d_q == qcho - 1);
      last_q_p[1] <= last_q_p[0];
      last_q_p[2] <= last_q_p[1];
      op_wr_en    <= pe_valid[0];
      done        <= pe_valid[0] && last_q_p[2];
    end
  end
  always_ff @(posedge clk) begin
    op_wr_bank <= bank_q;
    op_wr_addr <= $clog2(QCHO)'(q_p[2]);
    for (int p = 0; p < PAR_FACT; p++) op_wr_data[p*DW +: DW] <= pe_q[p];
  end

  // The sequencer runs one pixel at a time.
  a_no_restart: assert property (@(posedge clk) disable iff (!rst_n) start |-> !busy);
  // every PE finishes a channel in the same cycle
  a_lockstep: assert property (@(posedge clk) disable iff (!rst_n) pe_valid[0] == pe_valid[PAR_FACT-1]);
endmodule

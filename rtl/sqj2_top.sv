// sqj2_top -- SqueezeJet-2: a single-layer CNN accelerator for 8-bit dynamic
// fixed-point convolution with an optional fused maxpool.
//
// The processor programs one layer through the AXI4-Lite register port
// (sqj2_ctrl_regs) and starts it.  The accelerator then
//   1. reads the layer's biases and weights from the parameter stream (in
//      the published system fed by a DMA over the AXI HP port) into the
//      per-PE caches (sqj2_param_cache);
//   2. reads the input feature map from its stream (a DMA over the AXI ACP
//      port) into the line buffer and, window by window, into the two window
//      banks (sqj2_fmap_loader, sqj2_linebuf, sqj2_window_buf);
//   3. computes each output pixel with 16 PEs of 16 MACs (sqj2_pixel_calc)
//      into one of two output-pixel banks (sqj2_out_pix_buf), while the
//      other banks are being refilled and written back;
//   4. writes every output pixel, after optional ReLU and optional maxpool,
//      to the output stream (sqj2_write_back, sqj2_maxpool), back over ACP.
// The order of the work is set by sqj2_conv_ctrl.  Streams carry one signed
// 8-bit value per beat with valid/ready; feature maps are in row, column,
// channel order.  m_fmap_last marks the last value of a layer and irq rises
// when the layer is done.
//
// Structure, caches and parallelism follow the published design; the port
// protocols, cache sizes and data orders are this design's choices.
module sqj2_top
  import sqj2_pkg::*;
(
  input  logic        clk,
  input  logic        rst_n,
  // GP port: AXI4-Lite slave
  input  logic        s_axil_awvalid,
  output logic        s_axil_awready,
  input  logic [7:0]  s_axil_awaddr,
  input  logic        s_axil_wvalid,
  output logic        s_axil_wready,
  input  logic [31:0] s_axil_wdata,
  output logic        s_axil_bvalid,
  input  logic        s_axil_bready,
  output logic [1:0]  s_axil_bresp,
  input  logic        s_axil_arvalid,
  output logic        s_axil_arready,
  input  logic [7:0]  s_axil_araddr,
  output logic        s_axil_rvalid,
  input  logic        s_axil_rready,
  output logic [31:0] s_axil_rdata,
  output logic [1:0]  s_axil_rresp,
  // HP port side: parameter stream
  input  logic        s_param_valid,
  output logic        s_param_ready,
  input  logic [7:0]  s_param_data,
  // ACP port side: input and output feature-map streams
  input  logic        s_fmap_valid,
  output logic        s_fmap_ready,
  input  logic [7:0]  s_fmap_data,
  output logic        m_fmap_valid,
  input  logic        m_fmap_ready,
  output logic [7:0]  m_fmap_data,
  output logic        m_fmap_last,
  output logic        irq
);
  localparam int unsigned LB_WORDS  = WIXCHI_MAX / CHI_NUM;
  localparam int unsigned WIN_WORDS = KXKXCHI_MAX / CHI_NUM;
  localparam int unsigned WWORDS    = Q_CHOXKXKXCHI_MAX / CHI_NUM;
  localparam int unsigned QCHO      = CHO_MAX / PAR_FACT;

  layer_cfg_t cfg;
  logic start, busy, done;

  sqj2_ctrl_regs u_regs (
    .clk, .rst_n,
    .s_axil_awvalid, .s_axil_awready, .s_axil_awaddr,
    .s_axil_wvalid, .s_axil_wready, .s_axil_wdata,
    .s_axil_bvalid, .s_axil_bready, .s_axil_bresp,
    .s_axil_arvalid, .s_axil_arready, .s_axil_araddr,
    .s_axil_rvalid, .s_axil_rready, .s_axil_rdata, .s_axil_rresp,
    .cfg, .start, .busy, .done, .irq
  );

  // derived terms (precalc_terms)
  logic [15:0] kkchi, kkw, qcho;
  assign kkchi = 16'(cfg.kernel) * 16'(cfg.kernel) * cfg.chi;
  assign kkw   = kkchi / 16'(CHI_NUM);
  assign qcho  = (cfg.cho + 16'(PAR_FACT) - 1) / 16'(PAR_FACT);

  // sequencer
  logic pl_start, pl_done, ld_valid, ld_first_row, ld_bank, ld_done;
  logic pc_start, pc_bank, pc_done, wb_start, wb_bank, wb_done, pool_clear;
  ld_cmd_e ld_cmd;

  sqj2_conv_ctrl u_ctrl (
    .clk, .rst_n, .start, .h_out(cfg.h_out), .w_out(cfg.w_out), .busy, .done,
    .pl_start, .pl_done,
    .ld_valid, .ld_cmd, .ld_first_row, .ld_bank, .ld_done,
    .pc_start, .pc_bank, .pc_done,
    .wb_start, .wb_bank, .wb_done,
    .pool_clear
  );

  // parameter caches
  logic [$clog2(WWORDS)-1:0] w_rd_addr;
  word_t                     w_rd_data [PAR_FACT];
  logic [$clog2(QCHO)-1:0]   bias_q;
  data_t                     bias_rd [PAR_FACT];

  sqj2_param_cache u_params (
    .clk, .rst_n,
    .start(pl_start), .cho(cfg.cho), .kkchi, .done(pl_done),
    .s_valid(s_param_valid), .s_ready(s_param_ready), .s_data(data_t'(s_param_data)),
    .w_rd_addr, .w_rd_data, .bias_q, .bias_rd
  );

  // line buffer, windows, loader
  logic                          lb_reset_idx, lb_rotate, lb_wr_en;
  logic [$clog2(K_MAX)-1:0]      lb_wr_line, lb_rd_line;
  logic [$clog2(LB_WORDS)-1:0]   lb_wr_addr, lb_rd_addr;
  word_t                         lb_wr_data, lb_rd_data;
  logic [CHI_NUM-1:0]            lb_wr_be;
  logic                          win_wr_en, win_wr_bank, win_rd_bank;
  logic [$clog2(WIN_WORDS)-1:0]  win_wr_addr, win_rd_addr;
  word_t                         win_wr_data, win_rd_data;

  sqj2_fmap_loader u_loader (
    .clk, .rst_n, .cfg,
    .cmd_valid(ld_valid), .cmd(ld_cmd), .first_row(ld_first_row), .bank(ld_bank), .done(ld_done),
    .s_valid(s_fmap_valid), .s_ready(s_fmap_ready), .s_data(data_t'(s_fmap_data)),
    .lb_reset_idx, .lb_rotate, .lb_wr_en, .lb_wr_line, .lb_wr_addr, .lb_wr_data, .lb_wr_be,
    .lb_rd_line, .lb_rd_addr, .lb_rd_data,
    .win_wr_en, .win_wr_bank, .win_wr_addr, .win_wr_data
  );

  sqj2_linebuf u_linebuf (
    .clk, .rst_n, .kernel(cfg.kernel), .reset_idx(lb_reset_idx), .rotate(lb_rotate),
    .wr_en(lb_wr_en), .wr_line(lb_wr_line), .wr_addr(lb_wr_addr), .wr_data(lb_wr_data), .wr_be(lb_wr_be),
    .rd_line(lb_rd_line), .rd_addr(lb_rd_addr), .rd_data(lb_rd_data)
  );

  sqj2_window_buf u_win (
    .clk, .wr_en(win_wr_en), .wr_bank(win_wr_bank), .wr_addr(win_wr_addr), .wr_data(win_wr_data),
    .rd_bank(win_rd_bank), .rd_addr(win_rd_addr), .rd_data(win_rd_data)
  );

  // compute
  logic                      op_wr_en, op_wr_bank;
  logic [$clog2(QCHO)-1:0]   op_wr_addr;
  logic [PAR_FACT*DW-1:0]    op_wr_data;

  sqj2_pixel_calc u_calc (
    .clk, .rst_n, .start(pc_start), .bank(pc_bank), .kkw, .qcho,
    .ei(cfg.ei), .eo(cfg.eo), .ep(cfg.ep), .done(pc_done),
    .win_rd_bank, .win_rd_addr, .win_rd_data,
    .w_rd_addr, .w_rd_data, .bias_q, .bias_rd,
    .op_wr_en, .op_wr_bank, .op_wr_addr, .op_wr_data
  );

  logic                         op_rd_bank;
  logic [$clog2(CHO_MAX)-1:0]   op_rd_ch;
  data_t                        op_rd_data;

  sqj2_out_pix_buf u_outpix (
    .clk, .wr_en(op_wr_en), .wr_bank(op_wr_bank), .wr_addr(op_wr_addr), .wr_data(op_wr_data),
    .rd_bank(op_rd_bank), .rd_ch(op_rd_ch), .rd_data(op_rd_data)
  );

  // write back and maxpool
  logic        wb_valid, wb_ready, wb_pix_last;
  data_t       wb_data;
  logic [15:0] wb_ch;
  data_t       mp_data;

  sqj2_write_back u_wb (
    .clk, .rst_n, .start(wb_start), .bank(wb_bank), .cho(cfg.cho), .use_relu(cfg.use_relu),
    .done(wb_done), .op_rd_bank, .op_rd_ch, .op_rd_data,
    .o_valid(wb_valid), .o_ready(wb_ready), .o_data(wb_data), .o_ch(wb_ch), .o_pix_last(wb_pix_last)
  );

  sqj2_maxpool u_pool (
    .clk, .rst_n, .clear(pool_clear), .bypass(!cfg.use_pool),
    .pk(cfg.pool_k), .ps(cfg.pool_s), .h_in(cfg.h_out), .w_in(cfg.w_out),
    .h_out(cfg.pool_h_out), .w_out(cfg.pool_w_out), .chn(cfg.cho),
    .in_valid(wb_valid), .in_ready(wb_ready), .in_data(wb_data), .in_ch(wb_ch), .pix_last(wb_pix_last),
    .out_valid(m_fmap_valid), .out_ready(m_fmap_ready), .out_data(mp_data), .out_last(m_fmap_last)
  );
  assign m_fmap_data = mp_data;

  // AXI-Stream rule: data is held while valid waits for ready.
  a_out_hold: assert property (@(posedge clk) disable iff (!rst_n)
    (m_fmap_valid && !m_fmap_ready) |=> m_fmap_valid && $stable(m_fmap_data));
endmodule

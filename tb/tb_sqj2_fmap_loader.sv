// tb_sqj2_fmap_loader -- drives the loader (with the real line buffer and
// window banks) the way the convolution sequencer does: for every output row
// one LD_SHIFT, for every further output pixel one LD_UPDATE into the other
// bank, and LD_DRAIN at the end.  After each command the window just written
// is read back and compared with the K x K x CHI window taken directly from
// the zero-padded input.  The input stream has random gaps, and the test
// checks that exactly H*W*CHI values were consumed.  Layers cover 3x3/1/pad 1,
// 3x3/2/pad 1 and 1x1/2 (input pixels skipped).
module tb_sqj2_fmap_loader;
  import sqj2_pkg::*;
  localparam int LBW = 64, WINW = 32;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  layer_cfg_t cfg;
  logic cmd_valid = 0, first_row = 0, bank = 0, done;
  ld_cmd_e cmd = LD_SHIFT;
  logic s_valid = 0, s_ready;
  data_t s_data = 0;
  logic lb_reset_idx, lb_rotate, lb_wr_en;
  logic [$clog2(K_MAX)-1:0] lb_wr_line, lb_rd_line;
  logic [$clog2(LBW)-1:0] lb_wr_addr, lb_rd_addr;
  word_t lb_wr_data, lb_rd_data;
  logic [CHI_NUM-1:0] lb_wr_be;
  logic win_wr_en, win_wr_bank;
  logic [$clog2(WINW)-1:0] win_wr_addr;
  word_t win_wr_data;
  logic rd_bank = 0;
  logic [$clog2(WINW)-1:0] rd_addr = 0;
  word_t rd_data;
  int checks = 0, failures = 0, consumed = 0;

  sqj2_fmap_loader #(.LB_WORDS(LBW), .WIN_WORDS(WINW)) u_dut (.*);
  sqj2_linebuf #(.LINES(K_MAX), .WORDS(LBW)) u_lb (
    .clk, .rst_n, .kernel(cfg.kernel), .reset_idx(lb_reset_idx), .rotate(lb_rotate),
    .wr_en(lb_wr_en), .wr_line(lb_wr_line), .wr_addr(lb_wr_addr), .wr_data(lb_wr_data), .wr_be(lb_wr_be),
    .rd_line(lb_rd_line), .rd_addr(lb_rd_addr), .rd_data(lb_rd_data));
  sqj2_window_buf #(.WORDS(WINW)) u_win (
    .clk, .wr_en(win_wr_en), .wr_bank(win_wr_bank), .wr_addr(win_wr_addr), .wr_data(win_wr_data),
    .rd_bank, .rd_addr, .rd_data);

  initial begin
    repeat (500000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  byte fin [];
  int H, W, CI, K, S, PD, HO, WO;

  // stream driver: runs for the whole layer
  task automatic drive();
    for (int i = 0; i < H*W*CI; i++) begin
      s_data <= fin[i];
      s_valid <= ($urandom_range(0, 3) != 0);
      @(posedge clk);
      while (!(s_valid && s_ready)) begin s_valid <= ($urandom_range(0, 3) != 0); @(posedge clk); end
      consumed++;
    end
    s_valid <= 0;
  endtask

  task automatic command(input ld_cmd_e c, input bit fr, input bit b);
    cmd <= c; first_row <= fr; bank <= b; cmd_valid <= 1;
    @(posedge clk);
    cmd_valid <= 0;
    while (!done) @(posedge clk);
  endtask

  task automatic check_window(input int ho, input int wo, input bit b);
    int cw = CI / CHI_NUM, errs = 0;
    for (int ky = 0; ky < K; ky++)
      for (int kx = 0; kx < K; kx++)
        for (int w = 0; w < cw; w++) begin
          rd_bank <= b; rd_addr <= 5'((ky*K + kx)*cw + w);
          @(posedge clk); #1;
          for (int bb = 0; bb < CHI_NUM; bb++) begin
            int r = ho*S + ky - PD, c = wo*S + kx - PD;
            byte e = (r < 0 || r >= H || c < 0 || c >= W) ? 8'sd0 : fin[(r*W + c)*CI + w*CHI_NUM + bb];
            if (rd_data[bb*8 +: 8] !== e) errs++;
          end
        end
    checks++;
    if (errs != 0) begin
      failures++;
      if (failures < 10) $display("FAIL window (%0d,%0d) bank %0d: %0d wrong values", ho, wo, b, errs);
    end
  endtask

  task automatic layer(input int h, input int w, input int ci, input int k, input int s, input int pd);
    H = h; W = w; CI = ci; K = k; S = s; PD = pd;
    HO = (H + 2*PD - K) / S + 1;
    WO = (W + 2*PD - K) / S + 1;
    fin = new[H*W*CI];
    foreach (fin[i]) fin[i] = byte'($urandom);
    cfg = '0;
    cfg.h_in = 16'(H); cfg.w_in = 16'(W); cfg.chi = 16'(CI);
    cfg.kernel = 4'(K); cfg.stride = 4'(S); cfg.pad = 4'(PD);
    cfg.h_out = 16'(HO); cfg.w_out = 16'(WO);
    consumed = 0;
    fork
      drive();
      begin
        for (int ho = 0; ho < HO; ho++) begin
          command(LD_SHIFT, ho == 0, 0);
          check_window(ho, 0, 0);
          for (int wo = 1; wo < WO; wo++) begin
            command(LD_UPDATE, 0, wo[0]);
            check_window(ho, wo, wo[0]);
          end
        end
        command(LD_DRAIN, 0, 0);
      end
    join
    repeat (2) @(posedge clk);
    checks++;
    if (consumed != H*W*CI || s_ready) begin failures++; $display("FAIL consumed %0d of %0d", consumed, H*W*CI); end
  endtask

  initial begin
    repeat (3) @(posedge clk);
    rst_n <= 1;
    @(posedge clk);
    layer(5, 6, 16, 3, 1, 1);
    layer(7, 7, 32, 3, 2, 1);
    layer(5, 6, 16, 1, 2, 0);
    layer(4, 5, 16, 2, 1, 0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

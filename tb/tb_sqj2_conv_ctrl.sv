// tb_sqj2_conv_ctrl -- surrounds the sequencer with units that answer after
// random delays and checks the command sequence of the convolution loops:
// parameter load first; per output row one LD_SHIFT (first_row only on row
// 0); per pixel one pixel_calc on bank wo%2, an LD_UPDATE into the other
// bank for every pixel but the last, a write-back of the previous pixel from
// the other bank; the row's last pixel written back after the row; one
// LD_DRAIN; then done.  It also checks that the three units of an iteration
// are started in the same cycle (so they overlap).
module tb_sqj2_conv_ctrl;
  import sqj2_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic start = 0, busy, done;
  logic [15:0] h_out = 0, w_out = 0;
  logic pl_start, pl_done = 0, ld_valid, ld_first_row, ld_bank, ld_done = 0;
  ld_cmd_e ld_cmd;
  logic pc_start, pc_bank, pc_done = 0, wb_start, wb_bank, wb_done = 0, pool_clear;
  int checks = 0, failures = 0;

  sqj2_conv_ctrl u_dut (.*);

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // units with random latency
  task automatic respond(ref logic d, input int lo, input int hi);
    repeat ($urandom_range(lo, hi)) @(posedge clk);
    d <= 1; @(posedge clk); d <= 0;
  endtask
  always @(posedge clk) if (pl_start) fork respond(pl_done, 1, 6); join_none
  always @(posedge clk) if (ld_valid) fork respond(ld_done, 1, 9); join_none
  always @(posedge clk) if (pc_start) fork respond(pc_done, 4, 9); join_none
  always @(posedge clk) if (wb_start) fork respond(wb_done, 2, 9); join_none

  // expected event log built from the loop definition
  string exp_log [$], got_log [$];
  always @(posedge clk) if (rst_n) begin
    if (pl_start) got_log.push_back("P");
    if (ld_valid) got_log.push_back($sformatf("L%0d%0d%0d", ld_cmd, ld_cmd == LD_SHIFT ? ld_first_row : 1'b0, ld_cmd == LD_UPDATE ? ld_bank : 1'b0));
    if (pc_start) got_log.push_back($sformatf("C%0d", pc_bank));
    if (wb_start) got_log.push_back($sformatf("W%0d", wb_bank));
    if (done)     got_log.push_back("D");
  end
  int n_together;
  always @(posedge clk) if (pc_start && wb_start && ld_valid) n_together++;

  task automatic run(input int H, input int W);
    exp_log.delete(); got_log.delete();
    exp_log.push_back("P");
    for (int ho = 0; ho < H; ho++) begin
      exp_log.push_back($sformatf("L%0d%0d0", LD_SHIFT, ho == 0));
      for (int wo = 0; wo < W; wo++) begin
        // same-cycle events are logged in the order L, C, W
        if (wo + 1 < W) exp_log.push_back($sformatf("L%0d0%0d", LD_UPDATE, (wo + 1) % 2));
        exp_log.push_back($sformatf("C%0d", wo % 2));
        if (wo > 0) exp_log.push_back($sformatf("W%0d", (wo - 1) % 2));
      end
      exp_log.push_back($sformatf("W%0d", (W - 1) % 2));
    end
    exp_log.push_back($sformatf("L%0d00", LD_DRAIN));
    exp_log.push_back("D");
    h_out <= 16'(H); w_out <= 16'(W);
    start <= 1; @(posedge clk); start <= 0;
    while (!done) @(posedge clk);
    @(posedge clk);
    checks++;
    if (got_log.size() != exp_log.size()) begin
      failures++; $display("FAIL %0d events, expected %0d", got_log.size(), exp_log.size());
    end
    foreach (exp_log[i]) begin
      checks++;
      if (i >= got_log.size() || got_log[i] != exp_log[i]) begin
        failures++;
        if (failures < 10) $display("FAIL event %0d: got %s expected %s", i, i < got_log.size() ? got_log[i] : "-", exp_log[i]);
      end
    end
    checks++;
    if (busy) begin failures++; $display("FAIL busy after done"); end
  endtask

  initial begin
    repeat (3) @(posedge clk);
    rst_n <= 1;
    @(posedge clk);
    checks++;
    if (busy) failures++;
    run(3, 4);
    run(2, 1);
    run(1, 5);
    checks++;
    if (n_together == 0) begin failures++; $display("FAIL units never started together"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

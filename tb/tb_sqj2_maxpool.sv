// tb_sqj2_maxpool -- streams convolution outputs (raster order, channels
// innermost) into the maxpool with random input gaps and output
// back-pressure, and checks the pooled stream against a reference that takes
// the maximum over each clipped pool window.  Cases: 3x3/2 on 7x7, 6x6 and
// 5x9 maps (Caffe rounding up), 2x2/2 and 3x3/3 on 6x6, bypass, then random
// shapes.  Every output value is one check.
module tb_sqj2_maxpool;
  import sqj2_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic clear = 0, bypass = 0;
  logic [3:0] pk = 3, ps = 2;
  logic [15:0] h_in = 0, w_in = 0, h_out = 0, w_out = 0, chn = 0, in_ch = 0;
  logic in_valid = 0, in_ready, pix_last = 0, out_valid, out_ready = 0, out_last;
  data_t in_data = 0, out_data;
  int checks = 0, failures = 0;

  sqj2_maxpool #(.WMAX(16), .CHMAX(32)) u_dut (.*);

  initial begin
    repeat (500000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  byte conv [];
  byte expq [$];
  byte got  [$];
  int  last_at;
  int  H, W, C;

  task automatic feed();
    for (int i = 0; i < H*W*C; i++) begin
      in_data <= conv[i]; in_ch <= 16'(i % C); pix_last <= (i % C == C - 1);
      in_valid <= ($urandom_range(0, 3) != 0);
      @(posedge clk);
      while (!(in_valid && in_ready)) begin in_valid <= ($urandom_range(0, 3) != 0); @(posedge clk); end
    end
    in_valid <= 0;
  endtask
  task automatic collect(input int n);
    int idle = 0;
    while (got.size() < n && idle < 2000) begin
      out_ready <= ($urandom_range(0, 2) != 0);
      @(posedge clk);
      idle++;
      if (out_valid && out_ready) begin
        if (out_last) last_at = got.size();
        got.push_back(out_data);
        idle = 0;
      end
    end
    out_ready <= 0;
  endtask

  task automatic run(input int h, input int w, input int c, input int k, input int s, input bit byp);
    int ho, wo, errs = 0;
    H = h; W = w; C = c;
    ho = byp ? h : (h - k + s - 1) / s + 1;
    wo = byp ? w : (w - k + s - 1) / s + 1;
    conv = new[H*W*C];
    foreach (conv[i]) conv[i] = byte'($urandom);
    expq.delete(); got.delete(); last_at = -1;
    if (byp) foreach (conv[i]) expq.push_back(conv[i]);
    else
      for (int hp = 0; hp < ho; hp++)
        for (int wp = 0; wp < wo; wp++)
          for (int ch = 0; ch < C; ch++) begin
            int m = -1000;
            for (int y = hp*s; y < hp*s + k && y < H; y++)
              for (int x = wp*s; x < wp*s + k && x < W; x++)
                if (conv[(y*W + x)*C + ch] > m) m = conv[(y*W + x)*C + ch];
            expq.push_back(byte'(m));
          end
    pk <= 4'(k); ps <= 4'(s); bypass <= byp;
    h_in <= 16'(h); w_in <= 16'(w); h_out <= 16'(ho); w_out <= 16'(wo); chn <= 16'(c);
    clear <= 1; @(posedge clk); clear <= 0;
    fork feed(); collect(expq.size()); join
    checks++;
    if (got.size() != expq.size()) begin failures++; $display("FAIL %0d outputs, expected %0d", got.size(), expq.size()); end
    foreach (expq[i]) begin
      checks++;
      if (i >= got.size() || got[i] != expq[i]) begin
        errs++;
        failures++;
        if (errs < 4) $display("FAIL %0dx%0d k%0d s%0d: value %0d wrong", h, w, k, s, i);
      end
    end
    checks++;
    if (last_at != expq.size() - 1) begin failures++; $display("FAIL out_last at %0d", last_at); end
  endtask

  initial begin
    repeat (3) @(posedge clk);
    rst_n <= 1;
    @(posedge clk);
    run(7, 7, 4, 3, 2, 0);
    run(6, 6, 3, 3, 2, 0);
    run(5, 9, 2, 3, 2, 0);
    run(6, 6, 5, 2, 2, 0);
    run(6, 6, 2, 3, 3, 0);
    run(4, 5, 3, 3, 2, 1);
    // random shapes with s <= k <= 2*s, pooled or bypassed
    for (int i = 0; i < 12; i++) begin
      int k = $urandom_range(2, 3), st = $urandom_range((k + 1) / 2, k);
      run($urandom_range(k, 12), $urandom_range(k, 16), $urandom_range(1, 8), k, st, ($urandom_range(0, 3) == 0));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

// tb_sqj2_top -- end-to-end test of the SqueezeJet-2 accelerator at its
// default sizes.
//
// For each test layer the testbench programs the registers over AXI4-Lite,
// streams biases, weights and the input feature map with random gaps,
// collects the output stream under random back-pressure and compares every
// value with a reference convolution computed here directly from the
// definition (zero padding, 8-bit dynamic fixed point with round-half-up and
// saturation, ReLU, Caffe-style maxpool with clipped edge windows).  It also
// checks the output length, m_fmap_last, the done interrupt, and that each
// mechanism of the design occurred: both window/out_pix banks, computing
// overlapped with input loading, zero padding, dropped input pixels,
// output stalls, input gaps, ReLU clamping, saturation, maxpool and bypass.
module tb_sqj2_top;
  import sqj2_pkg::*;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic        awvalid = 0, awready, wvalid = 0, wready, bvalid, bready = 1;
  logic [7:0]  awaddr = 0, araddr = 0;
  logic [31:0] wdata = 0, rdata;
  logic [1:0]  bresp, rresp;
  logic        arvalid = 0, arready, rvalid, rready = 1;
  logic        p_valid = 0, p_ready, f_valid = 0, f_ready, o_valid, o_ready = 0, o_last, irq;
  logic [7:0]  p_data = 0, f_data = 0, o_data;

  sqj2_top u_dut (
    .clk, .rst_n,
    .s_axil_awvalid(awvalid), .s_axil_awready(awready), .s_axil_awaddr(awaddr),
    .s_axil_wvalid(wvalid), .s_axil_wready(wready), .s_axil_wdata(wdata),
    .s_axil_bvalid(bvalid), .s_axil_bready(bready), .s_axil_bresp(bresp),
    .s_axil_arvalid(arvalid), .s_axil_arready(arready), .s_axil_araddr(araddr),
    .s_axil_rvalid(rvalid), .s_axil_rready(rready), .s_axil_rdata(rdata), .s_axil_rresp(rresp),
    .s_param_valid(p_valid), .s_param_ready(p_ready), .s_param_data(p_data),
    .s_fmap_valid(f_valid), .s_fmap_ready(f_ready), .s_fmap_data(f_data),
    .m_fmap_valid(o_valid), .m_fmap_ready(o_ready), .m_fmap_data(o_data), .m_fmap_last(o_last),
    .irq
  );

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL: %s", what);
    end
  endtask

  // watchdog
  initial begin
    repeat (3_000_000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ---------------- mechanism counters ----------------
  int n_bank1, n_overlap, n_pad, n_drop, n_ostall, n_igap, n_relu, n_sat, n_pool, n_bypass;
  always @(posedge clk) if (rst_n) begin
    if (u_dut.pc_start && u_dut.pc_bank) n_bank1++;
    if (u_dut.u_calc.busy && u_dut.u_loader.state != u_dut.u_loader.S_IDLE) n_overlap++;
    if (u_dut.u_loader.state == u_dut.u_loader.S_LOAD && u_dut.u_loader.is_pad) n_pad++;
    if (f_valid && f_ready && !(u_dut.u_loader.state == u_dut.u_loader.S_LOAD && u_dut.u_loader.at_target)) n_drop++;
    if (o_valid && !o_ready) n_ostall++;
    if (f_ready && !f_valid) n_igap++;
    if (o_valid && o_ready && u_dut.cfg.use_pool) n_pool++;
    if (o_valid && o_ready && !u_dut.cfg.use_pool) n_bypass++;
  end

  // ---------------- bus helpers ----------------
  task automatic reg_wr(input logic [7:0] a, input logic [31:0] d);
    @(posedge clk);
    awvalid <= 1; awaddr <= a; wvalid <= 1; wdata <= d;
    do @(posedge clk); while (!(awready && wvalid)); // both accepted together here
    awvalid <= 0; wvalid <= 0;
    do @(posedge clk); while (!bvalid);
  endtask
  task automatic reg_rd(input logic [7:0] a, output logic [31:0] d);
    @(posedge clk);
    arvalid <= 1; araddr <= a;
    do @(posedge clk); while (!arready);
    arvalid <= 0;
    while (!rvalid) @(posedge clk);
    d = rdata;
  endtask

  // ---------------- layer description and data ----------------
  int H, W, CI, CO, K, S, PD, HO, WO, EI, EO, EP, RELU, POOL, PK, PS, PHO, PWO;
  byte fin [];     // H*W*CI, HWC
  byte wt  [];     // CO*K*K*CI, (co, ky, kx, ci)
  byte bs  [];     // CO
  byte expq[$];    // expected output
  byte got [$];
  int  got_last_at;

  function automatic int ceil_div(int a, int b); return (a + b - 1) / b; endfunction

  function automatic int rq(longint acc_total, int sh);
    real x;
    longint v;
    if (sh > 0) begin
      x = real'(acc_total) / (2.0 ** sh);
      v = longint'($floor(x + 0.5));
    end else v = acc_total * (64'sd1 << (-sh));
    if (v > 127) begin n_sat++; return 127; end
    if (v < -128) begin n_sat++; return -128; end
    return int'(v);
  endfunction

  task automatic make_ref();
    int conv [];
    longint acc;
    int v;
    conv = new[HO*WO*CO];
    for (int ho = 0; ho < HO; ho++)
      for (int wo = 0; wo < WO; wo++)
        for (int co = 0; co < CO; co++) begin
          acc = 0;
          for (int ky = 0; ky < K; ky++)
            for (int kx = 0; kx < K; kx++) begin
              int r = ho*S + ky - PD, c = wo*S + kx - PD;
              if (r < 0 || r >= H || c < 0 || c >= W) continue;
              for (int ci = 0; ci < CI; ci++)
                acc += longint'(fin[(r*W + c)*CI + ci]) * longint'(wt[((co*K + ky)*K + kx)*CI + ci]);
            end
          // bias has fraction length EP; products EI+EP
          if (EI >= 0) acc += longint'(bs[co]) * (64'sd1 << EI);
          else         acc += longint'($floor(real'(bs[co]) / (2.0 ** (-EI))));
          v = rq(acc, EI + EP - EO);
          if (RELU && v < 0) begin v = 0; n_relu++; end
          conv[(ho*WO + wo)*CO + co] = v;
        end
    expq.delete();
    if (!POOL) begin
      foreach (conv[i]) expq.push_back(byte'(conv[i]));
    end else begin
      for (int hp = 0; hp < PHO; hp++)
        for (int wp = 0; wp < PWO; wp++)
          for (int co = 0; co < CO; co++) begin
            int m = -1000;
            for (int y = hp*PS; y < hp*PS + PK && y < HO; y++)
              for (int x = wp*PS; x < wp*PS + PK && x < WO; x++)
                if (conv[(y*WO + x)*CO + co] > m) m = conv[(y*WO + x)*CO + co];
            expq.push_back(byte'(m));
          end
    end
  endtask

  // streams with random gaps
  task automatic drive_params();
    int n = 0;
    for (int i = 0; i < CO + CO*K*K*CI; i++) begin
      p_valid <= ($urandom_range(0, 3) != 0);
      p_data  <= (i < CO) ? bs[i] : wt[i - CO];
      @(posedge clk);
      while (!(p_valid && p_ready)) begin
        p_valid <= ($urandom_range(0, 3) != 0);
        @(posedge clk);
      end
    end
    p_valid <= 0;
  endtask
  task automatic drive_fmap();
    for (int i = 0; i < H*W*CI; i++) begin
      f_valid <= ($urandom_range(0, 4) != 0);
      f_data  <= fin[i];
      @(posedge clk);
      while (!(f_valid && f_ready)) begin
        f_valid <= ($urandom_range(0, 4) != 0);
        @(posedge clk);
      end
    end
    f_valid <= 0;
  endtask
  task automatic collect(input int n);
    got.delete();
    got_last_at = -1;
    while (got.size() < n) begin
      o_ready <= ($urandom_range(0, 3) != 0);
      @(posedge clk);
      if (o_valid && o_ready) begin
        if (o_last) got_last_at = got.size();
        got.push_back(byte'(o_data));
      end
    end
    o_ready <= 0;
  endtask

  task automatic run_layer(input string name);
    logic [31:0] st;
    int errs = 0;
    HO = (H + 2*PD - K) / S + 1;
    WO = (W + 2*PD - K) / S + 1;
    PHO = POOL ? ceil_div(HO - PK, PS) + 1 : 0;
    PWO = POOL ? ceil_div(WO - PK, PS) + 1 : 0;
    fin = new[H*W*CI];
    wt  = new[CO*K*K*CI];
    bs  = new[CO];
    foreach (fin[i]) fin[i] = byte'($urandom_range(0, 40)) - 8'sd20;
    foreach (wt[i])  wt[i]  = byte'($urandom_range(0, 16)) - 8'sd8;
    foreach (bs[i])  bs[i]  = byte'($urandom_range(0, 60)) - 8'sd30;
    make_ref();
    reg_wr(8'h08, H);  reg_wr(8'h0C, W);  reg_wr(8'h10, CI); reg_wr(8'h14, CO);
    reg_wr(8'h18, K);  reg_wr(8'h1C, S);  reg_wr(8'h20, PD);
    reg_wr(8'h24, HO); reg_wr(8'h28, WO);
    reg_wr(8'h2C, 32'(EI)); reg_wr(8'h30, 32'(EO)); reg_wr(8'h34, 32'(EP));
    reg_wr(8'h38, {30'd0, POOL[0], RELU[0]});
    reg_wr(8'h3C, PK); reg_wr(8'h40, PS); reg_wr(8'h44, PHO); reg_wr(8'h48, PWO);
    reg_rd(8'h14, st);
    check(st == 32'(CO), {name, ": CHO register read back"});
    reg_rd(8'h04, st);
    check(st[0] == 1'b1, {name, ": idle before start"});
    reg_wr(8'h00, 1);
    fork
      drive_params();
      drive_fmap();
      collect(expq.size());
    join
    // wait for done
    while (!irq) @(posedge clk);
    reg_rd(8'h04, st);
    check(st[1:0] == 2'b11, {name, ": status idle and done"});
    repeat (3) @(posedge clk);
    check(!o_valid, {name, ": no extra output"});
    foreach (expq[i]) begin
      checks++;
      if (got[i] != expq[i]) begin
        errs++;
        failures++;
        if (errs < 5) $display("FAIL %s: value %0d got %0d expected %0d", name, i, got[i], expq[i]);
      end
    end
    check(got_last_at == expq.size() - 1, {name, ": m_fmap_last on the last value"});
    $display("%s: %0d outputs, %0d mismatches", name, expq.size(), errs);
  endtask

  initial begin
    repeat (5) @(posedge clk);
    rst_n = 1'b1;
    // 3x3, stride 1, pad 1, ReLU, CHO not a multiple of PAR_FACT
    H = 6; W = 6; CI = 16; CO = 20; K = 3; S = 1; PD = 1;
    EI = 2; EP = 3; EO = 1; RELU = 1; POOL = 0; PK = 3; PS = 2;
    run_layer("conv3x3_s1_relu");
    // 1x1 squeeze-like layer followed by fused 3x3/2 maxpool (ceil-mode sizes)
    H = 5; W = 7; CI = 32; CO = 16; K = 1; S = 1; PD = 0;
    EI = 1; EP = 4; EO = 0; RELU = 1; POOL = 1; PK = 3; PS = 2;
    run_layer("conv1x1_pool");
    // ZynqNet-like 3x3 stride 2, no ReLU, negative input fraction length
    H = 7; W = 7; CI = 16; CO = 32; K = 3; S = 2; PD = 1;
    EI = -1; EP = 5; EO = 2; RELU = 0; POOL = 0; PK = 3; PS = 2;
    run_layer("conv3x3_s2");
    // stride larger than the kernel: input pixels are skipped
    H = 5; W = 6; CI = 16; CO = 16; K = 1; S = 2; PD = 0;
    EI = 3; EP = 3; EO = 3; RELU = 0; POOL = 0; PK = 3; PS = 2;
    run_layer("conv1x1_s2");
    // 3x3 pad 1 with pooling of a 6x6 map (windows overlap in both directions)
    H = 6; W = 6; CI = 16; CO = 16; K = 3; S = 1; PD = 1;
    EI = 2; EP = 3; EO = 3; RELU = 1; POOL = 1; PK = 3; PS = 2;
    run_layer("conv3x3_pool");

    $display("mechanisms: bank1=%0d overlap=%0d pad=%0d drop=%0d ostall=%0d igap=%0d relu=%0d sat=%0d pool=%0d bypass=%0d",
             n_bank1, n_overlap, n_pad, n_drop, n_ostall, n_igap, n_relu, n_sat, n_pool, n_bypass);
    check(n_bank1   > 0, "second window/out_pix bank used");
    check(n_overlap > 0, "pixel_calc overlapped with input loading");
    check(n_pad     > 0, "zero padding written");
    check(n_drop    > 0, "unused input pixels dropped");
    check(n_ostall  > 0, "output stalled by back-pressure");
    check(n_igap    > 0, "input stream gaps");
    check(n_relu    > 0, "ReLU clamped values");
    check(n_sat     > 0, "saturation occurred");
    check(n_pool    > 0, "maxpool path used");
    check(n_bypass  > 0, "maxpool bypass used");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

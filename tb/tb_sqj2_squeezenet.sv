// tb_sqj2_squeezenet -- runs layers of SqueezeNet v1.1 at their real sizes
// through the accelerator at its default sizes.
//
// SqueezeNet v1.1 on a 227x227 image (sizes from the network's published
// definition): conv1 is reshaped by software into a 113x113x32 1x1 layer
// (3x3x3 channels padded to 32), followed by a 3x3/2 maxpool to 56x56; the
// fire modules squeeze with 1x1 convolutions and expand with 1x1 and 3x3 ones;
// maxpools follow conv1, fire3 and fire5 and are fused into the preceding
// convolution; conv10 (512 -> 1000) does not fit the weight caches at once and
// is run as two invocations of 500 output channels, of which one is run here.
// For each layer the testbench programs the registers, streams the data
// without gaps, compares every output with a reference convolution computed
// here, and reports the cycles from start to the done interrupt next to the
// compute-bound estimate H_out*W_out*(ceil(CHO/16)*K*K*CHI/16 + 5), checking
// that the run is not shorter than that bound and not far above the larger
// of it and the beats the byte-wide streams carry (parameters, input and
// unpooled output).
module tb_sqj2_squeezenet;
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
  longint cyc = 0;
  always @(posedge clk) cyc++;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL: %s", what);
    end
  endtask

  // watchdog
  initial begin
    repeat (40_000_000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int n_sat, n_relu;  // counted by the reference model only

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
      p_valid <= 1'b1;
      p_data  <= (i < CO) ? bs[i] : wt[i - CO];
      @(posedge clk);
      while (!(p_valid && p_ready)) begin
        p_valid <= 1'b1;
        @(posedge clk);
      end
    end
    p_valid <= 0;
  endtask
  task automatic drive_fmap();
    for (int i = 0; i < H*W*CI; i++) begin
      f_valid <= 1'b1;
      f_data  <= fin[i];
      @(posedge clk);
      while (!(f_valid && f_ready)) begin
        f_valid <= 1'b1;
        @(posedge clk);
      end
    end
    f_valid <= 0;
  endtask
  task automatic collect(input int n);
    got.delete();
    got_last_at = -1;
    while (got.size() < n) begin
      o_ready <= 1'b1;
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
    longint t0, t1, t_comp, t_io;
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
    t0 = cyc;
    fork
      drive_params();
      drive_fmap();
      collect(expq.size());
    join
    // wait for done
    while (!irq) @(posedge clk);
    t1 = cyc;
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
    t_comp = longint'(HO) * WO * (ceil_div(CO, PAR_FACT) * (K*K*CI/CHI_NUM) + 5);
    t_io   = longint'(CO) + longint'(CO)*K*K*CI + longint'(H)*W*CI + longint'(HO)*WO*CO;
    $display("%s: %0dx%0dx%0d -> %0dx%0dx%0d, %0d outputs, %0d mismatches, %0d cycles (compute bound %0d, stream beats %0d)",
             name, H, W, CI, HO, WO, CO, expq.size(), errs, t1 - t0, t_comp, t_io);
    check(t1 - t0 >= t_comp, {name, ": not faster than the compute bound"});
    check(t1 - t0 <= 2 * (t_comp + t_io), {name, ": within twice compute plus streaming time"});
  endtask

  initial begin
    repeat (5) @(posedge clk);
    rst_n = 1'b1;
    // conv1, reshaped to 1x1 over 32 channels, with fused pool1 (113 -> 56)
    H = 113; W = 113; CI = 32; CO = 64; K = 1; S = 1; PD = 0;
    EI = 2; EP = 4; EO = 2; RELU = 1; POOL = 1; PK = 3; PS = 2;
    run_layer("conv1_pool1");
    // fire3 squeeze: 56x56x128 -> 16
    H = 56; W = 56; CI = 128; CO = 16; K = 1; S = 1; PD = 0;
    EI = 2; EP = 5; EO = 2; RELU = 1; POOL = 0;
    run_layer("fire3_squeeze1x1");
    // fire5 expand3x3 with fused pool5: 28x28x32 -> 128, pooled to 14x14
    H = 28; W = 28; CI = 32; CO = 128; K = 3; S = 1; PD = 1;
    EI = 2; EP = 5; EO = 3; RELU = 1; POOL = 1; PK = 3; PS = 2;
    run_layer("fire5_expand3x3_pool5");
    // fire9 expand3x3: 14x14x64 -> 256
    H = 14; W = 14; CI = 64; CO = 256; K = 3; S = 1; PD = 1;
    EI = 2; EP = 5; EO = 2; RELU = 1; POOL = 0;
    run_layer("fire9_expand3x3");
    // conv10, first half of the output channels: 14x14x512 -> 500
    H = 14; W = 14; CI = 512; CO = 500; K = 1; S = 1; PD = 0;
    EI = 2; EP = 6; EO = 1; RELU = 1; POOL = 0;
    run_layer("conv10_half");
    $display("reference model: relu=%0d sat=%0d", n_relu, n_sat);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

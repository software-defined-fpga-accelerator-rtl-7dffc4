// tb_sqj2_ctrl_regs -- exercises the AXI4-Lite register port: writes every
// configuration register (address before data, data before address, and
// together), reads them back, checks the configuration outputs, the start
// pulse, that start is ignored while busy, and the sticky done bit and irq.
module tb_sqj2_ctrl_regs;
  import sqj2_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic s_axil_awvalid = 0, s_axil_awready, s_axil_wvalid = 0, s_axil_wready;
  logic [7:0] s_axil_awaddr = 0, s_axil_araddr = 0;
  logic [31:0] s_axil_wdata = 0, s_axil_rdata;
  logic s_axil_bvalid, s_axil_bready = 0, s_axil_arvalid = 0, s_axil_arready, s_axil_rvalid, s_axil_rready = 0;
  logic [1:0] s_axil_bresp, s_axil_rresp;
  layer_cfg_t cfg;
  logic start, busy = 0, done = 0, irq;
  int checks = 0, failures = 0, n_start = 0;

  sqj2_ctrl_regs u_dut (.*);
  always @(posedge clk) if (start) n_start++;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(input bit ok, input string m);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", m); end
  endtask

  task automatic wr(input logic [7:0] a, input logic [31:0] d, input int mode);
    if (mode == 1) begin  // address first
      s_axil_awvalid <= 1; s_axil_awaddr <= a;
      do @(posedge clk); while (!s_axil_awready);
      s_axil_awvalid <= 0;
      repeat (2) @(posedge clk);
      s_axil_wvalid <= 1; s_axil_wdata <= d;
      do @(posedge clk); while (!s_axil_wready);
      s_axil_wvalid <= 0;
    end else if (mode == 2) begin  // data first
      s_axil_wvalid <= 1; s_axil_wdata <= d;
      do @(posedge clk); while (!s_axil_wready);
      s_axil_wvalid <= 0;
      @(posedge clk);
      s_axil_awvalid <= 1; s_axil_awaddr <= a;
      do @(posedge clk); while (!s_axil_awready);
      s_axil_awvalid <= 0;
    end else begin
      s_axil_awvalid <= 1; s_axil_awaddr <= a; s_axil_wvalid <= 1; s_axil_wdata <= d;
      do @(posedge clk); while (!(s_axil_awready && s_axil_wready));
      s_axil_awvalid <= 0; s_axil_wvalid <= 0;
    end
    while (!s_axil_bvalid) @(posedge clk);
    repeat ($urandom_range(0, 2)) @(posedge clk);  // late bready
    s_axil_bready <= 1; @(posedge clk); s_axil_bready <= 0;
    chk(s_axil_bresp == 2'b00, "bresp OKAY");
  endtask

  task automatic rd(input logic [7:0] a, output logic [31:0] d);
    s_axil_arvalid <= 1; s_axil_araddr <= a;
    do @(posedge clk); while (!s_axil_arready);
    s_axil_arvalid <= 0;
    while (!s_axil_rvalid) @(posedge clk);
    repeat ($urandom_range(0, 2)) @(posedge clk);
    d = s_axil_rdata;
    s_axil_rready <= 1; @(posedge clk); s_axil_rready <= 0;
  endtask

  initial begin
    logic [31:0] v [19];
    logic [31:0] r;
    repeat (3) @(posedge clk);
    rst_n <= 1;
    @(posedge clk);
    v[2] = 56; v[3] = 57; v[4] = 64; v[5] = 1000; v[6] = 3; v[7] = 2; v[8] = 1;
    v[9] = 28; v[10] = 29; v[11] = 32'hFFFF_FFFD; v[12] = 5; v[13] = 7; v[14] = 3;
    v[15] = 3; v[16] = 2; v[17] = 14; v[18] = 15;
    for (int i = 2; i <= 18; i++) wr(8'(i*4), v[i], i % 3);
    for (int i = 2; i <= 18; i++) begin
      rd(8'(i*4), r);
      chk(r == ((i >= 11 && i <= 13) ? 32'(signed'(v[i][5:0])) : v[i]), $sformatf("read back register 0x%02h", i*4));
    end
    chk(cfg.h_in == 56 && cfg.w_in == 57 && cfg.chi == 64 && cfg.cho == 1000, "cfg sizes");
    chk(cfg.kernel == 3 && cfg.stride == 2 && cfg.pad == 1 && cfg.h_out == 28 && cfg.w_out == 29, "cfg kernel");
    chk(cfg.ei == -3 && cfg.eo == 5 && cfg.ep == 7 && cfg.use_relu && cfg.use_pool, "cfg fixed point and flags");
    chk(cfg.pool_k == 3 && cfg.pool_s == 2 && cfg.pool_h_out == 14 && cfg.pool_w_out == 15, "cfg pool");
    rd(8'h04, r);
    chk(r[1:0] == 2'b01, "status idle, not done");
    wr(8'h00, 1, 0);
    chk(n_start == 1, "start pulse");
    busy <= 1;
    wr(8'h00, 1, 1);
    chk(n_start == 1, "start ignored while busy");
    rd(8'h04, r);
    chk(r[1:0] == 2'b00, "status busy");
    done <= 1; @(posedge clk); done <= 0; busy <= 0;
    @(posedge clk);
    chk(irq, "irq after done");
    rd(8'h04, r);
    chk(r[1:0] == 2'b11, "status idle and done");
    wr(8'h00, 1, 2);
    chk(n_start == 2 && !irq, "second start clears done");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

// sqj2_ctrl_regs -- register file on the AXI4-Lite general-purpose (GP) port.
//
// The processor passes the layer's scalar arguments (sizes, kernel, stride,
// padding, fraction lengths, ReLU and maxpool switches) through these
// registers and starts the accelerator by writing 1 to bit 0 of CTRL.
// Register map (32-bit words, byte offsets):
//   0x00 CTRL   W: bit0 start (ignored while busy)
//   0x04 STATUS R: bit0 idle, bit1 done (set at the end of a layer, cleared by start)
//   0x08 H_IN   0x0C W_IN   0x10 CHI   0x14 CHO
//   0x18 KERNEL 0x1C STRIDE 0x20 PAD   0x24 H_OUT  0x28 W_OUT
//   0x2C EI     0x30 EO     0x34 EP    (signed 6-bit fraction lengths)
//   0x38 FLAGS  bit0 use_relu, bit1 use_pool
//   0x3C POOL_K 0x40 POOL_S 0x44 POOL_H_OUT 0x48 POOL_W_OUT
// The slave takes one write (address and data may come in either order) and
// one read at a time and always answers OKAY.  'irq' follows STATUS.done.
// Using the GP port for the scalar arguments follows the published design;
// the register map and the bus protocol details are this design's choice.
module sqj2_ctrl_regs
  import sqj2_pkg::*;
(
  input  logic        clk,
  input  logic        rst_n,
  // AXI4-Lite slave
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
  // to the accelerator
  output layer_cfg_t  cfg,
  output logic        start,
  input  logic        busy,
  input  logic        done,
  output logic        irq
);
  logic       aw_have, w_have, done_q;
  logic [7:0] aw_addr;
  logic [31:0] w_data;

  assign s_axil_awready = !aw_have && !s_axil_bvalid;
  assign s_axil_wready  = !w_have && !s_axil_bvalid;
  assign s_axil_bresp   = 2'b00;
  assign s_axil_rresp   = 2'b00;
  assign s_axil_arready = !s_axil_rvalid;
  assign irq            = done_q;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      {aw_have, w_have, s_axil_bvalid, s_axil_rvalid, start, done_q} <= '0;
      aw_addr <= '0;
      w_data  <= '0;
      s_axil_rdata <= '0;
      cfg <= '0;
    end else begin
      start <= 1'b0;
      if (done) done_q <= 1'b1;
      // write channel
      if (s_axil_awvalid && s_axil_awready) begin aw_have <= 1'b1; aw_addr <= s_axil_awaddr; end
      if (s_axil_wvalid && s_axil_wready)   begin w_have  <= 1'b1; w_data  <= s_axil_wdata;  end
      if (aw_have && w_have) begin
        aw_have <= 1'b0;
        w_have  <= 1'b0;
        s_axil_bvalid <= 1'b1;
        unique case (aw_addr[7:2])
          6'h00: if (w_data[0] && !busy) begin start <= 1'b1; done_q <= 1'b0; end
          6'h02: cfg.h_in   <= w_data[15:0];
          6'h03: cfg.w_in   <= w_data[15:0];
          6'h04: cfg.chi    <= w_data[15:0];
          6'h05: cfg.cho    <= w_data[15:0];
          6'h06: cfg.kernel <= w_data[3:0];
          6'h07: cfg.stride <= w_data[3:0];
          6'h08: cfg.pad    <= w_data[3:0];
          6'h09: cfg.h_out  <= w_data[15:0];
          6'h0A: cfg.w_out  <= w_data[15:0];
          6'h0B: cfg.ei     <= fl_t'(w_data[5:0]);
          6'h0C: cfg.eo     <= fl_t'(w_data[5:0]);
          6'h0D: cfg.ep     <= fl_t'(w_data[5:0]);
          6'h0E: {cfg.use_pool, cfg.use_relu} <= w_data[1:0];
          6'h0F: cfg.pool_k <= w_data[3:0];
          6'h10: cfg.pool_s <= w_data[3:0];
          6'h11: cfg.pool_h_out <= w_data[15:0];
          6'h12: cfg.pool_w_out <= w_data[15:0];
          default: ;
        endcase
      end
      if (s_axil_bvalid && s_axil_bready) s_axil_bvalid <= 1'b0;
      // read channel
      if (s_axil_arvalid && s_axil_arready) begin
        s_axil_rvalid <= 1'b1;
        unique case (s_axil_araddr[7:2])
          6'h01: s_axil_rdata <= {30'd0, done_q, !busy};
          6'h02: s_axil_rdata <= {16'd0, cfg.h_in};
          6'h03: s_axil_rdata <= {16'd0, cfg.w_in};
          6'h04: s_axil_rdata <= {16'd0, cfg.chi};
          6'h05: s_axil_rdata <= {16'd0, cfg.cho};
          6'h06: s_axil_rdata <= {28'd0, cfg.kernel};
          6'h07: s_axil_rdata <= {28'd0, cfg.stride};
          6'h08: s_axil_rdata <= {28'd0, cfg.pad};
          6'h09: s_axil_rdata <= {16'd0, cfg.h_out};
          6'h0A: s_axil_rdata <= {16'd0, cfg.w_out};
          6'h0B: s_axil_rdata <= 32'(signed'(cfg.ei));
          6'h0C: s_axil_rdata <= 32'(signed'(cfg.eo));
          6'h0D: s_axil_rdata <= 32'(signed'(cfg.ep));
          6'h0E: s_axil_rdata <= {30'd0, cfg.use_pool, cfg.use_relu};
          6'h0F: s_axil_rdata <= {28'd0, cfg.pool_k};
          6'h10: s_axil_rdata <= {28'd0, cfg.pool_s};
          6'h11: s_axil_rdata <= {16'd0, cfg.pool_h_out};
          6'h12: s_axil_rdata <= {16'd0, cfg.pool_w_out};
          default: s_axil_rdata <= '0;
        endcase
      end
      if (s_axil_rvalid && s_axil_rready) s_axil_rvalid <= 1'b0;
    end
  end

  // AXI rule: a response stays valid until it is taken.
  a_bvalid_hold: assert property (@(posedge clk) disable iff (!rst_n)
    (s_axil_bvalid && !s_axil_bready) |=> s_axil_bvalid);
  a_rvalid_hold: assert property (@(posedge clk) disable iff (!rst_n)
    (s_axil_rvalid && !s_axil_rready) |=> s_axil_rvalid && $stable(s_axil_rdata));
endmodule

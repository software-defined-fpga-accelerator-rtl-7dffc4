// tb_sqj2_pixel_calc -- runs pixel_calc against window, weight and bias
// memories modelled here (one-cycle read latency, like the real caches) and
// checks every out_pix word against a reference dot product + requantisation,
// the bank it is written to, and the cycle count qcho*kkw + 5 from start to
// done (the work term of the published cycle equation plus pipeline fill).
module tb_sqj2_pixel_calc;
  import sqj2_pkg::*;
  localparam int WIN_WORDS = 32, WWORDS = 128, QCHO = 4;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic start = 0, bank = 0, done;
  logic [15:0] kkw = 0, qcho = 0;
  fl_t ei = 0, eo = 0, ep = 0;
  logic win_rd_bank;
  logic [$clog2(WIN_WORDS)-1:0] win_rd_addr;
  word_t win_rd_data;
  logic [$clog2(WWORDS)-1:0] w_rd_addr;
  word_t w_rd_data [PAR_FACT];
  logic [$clog2(QCHO)-1:0] bias_q;
  data_t bias_rd [PAR_FACT];
  logic op_wr_en, op_wr_bank;
  logic [$clog2(QCHO)-1:0] op_wr_addr;
  logic [PAR_FACT*8-1:0] op_wr_data;

  word_t win  [2][WIN_WORDS];
  word_t wmem [PAR_FACT][WWORDS];
  data_t bmem [PAR_FACT][QCHO];
  logic [PAR_FACT*8-1:0] got [QCHO];
  int checks = 0, failures = 0;

  sqj2_pixel_calc #(.WIN_WORDS(WIN_WORDS), .WWORDS(WWORDS), .QCHO(QCHO)) u_dut (.*);

  always_ff @(posedge clk) begin
    win_rd_data <= win[win_rd_bank][win_rd_addr];
    for (int p = 0; p < PAR_FACT; p++) begin
      w_rd_data[p] <= wmem[p][w_rd_addr];
      bias_rd[p]   <= bmem[p][bias_q];
    end
  end
  always @(posedge clk) if (op_wr_en) begin
    got[op_wr_addr] = op_wr_data;
    checks++;
    if (op_wr_bank != bank) begin failures++; $display("FAIL wrong out_pix bank"); end
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic int ref_q(longint acc, int b, int i, int p, int o);
    real x = (real'(acc) + real'(b) * (2.0 ** i)) / (2.0 ** (i + p - o));
    longint v = longint'($floor(x + 0.5));
    return (v > 127) ? 127 : (v < -128) ? -128 : int'(v);
  endfunction

  task automatic run(input int KKW, input int Q, input bit B);
    int t0, t1;
    foreach (win[b, a]) win[b][a] = {$urandom, $urandom, $urandom, $urandom};
    foreach (wmem[p, a]) wmem[p][a] = {$urandom, $urandom, $urandom, $urandom};
    foreach (bmem[p, q]) bmem[p][q] = data_t'($urandom);
    foreach (got[q]) got[q] = 'x;
    kkw <= 16'(KKW); qcho <= 16'(Q); bank <= B;
    ei <= 2; ep <= 4; eo <= -3;
    @(posedge clk);
    start <= 1; @(posedge clk); start <= 0;
    t0 = $time / 10;
    while (!done) @(posedge clk);
    t1 = $time / 10;
    checks++;
    if (t1 - t0 != Q * KKW + 5) begin
      failures++;
      $display("FAIL cycle count %0d, expected %0d", t1 - t0, Q * KKW + 5);
    end
    @(posedge clk);
    for (int q = 0; q < Q; q++)
      for (int p = 0; p < PAR_FACT; p++) begin
        longint acc = 0;
        for (int i = 0; i < KKW; i++)
          for (int b = 0; b < CHI_NUM; b++)
            acc += longint'(signed'(win[B][i][b*8 +: 8])) * longint'(signed'(wmem[p][q*KKW + i][b*8 +: 8]));
        checks++;
        if (int'(signed'(got[q][p*8 +: 8])) != ref_q(acc, bmem[p][q], 2, 4, -3)) begin
          failures++;
          if (failures < 10) $display("FAIL q %0d pe %0d got %0d exp %0d", q, p, signed'(got[q][p*8 +: 8]), ref_q(acc, bmem[p][q], 2, 4, -3));
        end
      end
  endtask

  initial begin
    repeat (3) @(posedge clk);
    rst_n <= 1;
    @(posedge clk);
    run(9, 2, 0);    // 3x3 kernel, 16 channels in, 32 out
    run(1, 4, 1);    // 1x1, 16 in, 64 out: one word per channel
    run(32, 1, 0);   // deep window, 16 out
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

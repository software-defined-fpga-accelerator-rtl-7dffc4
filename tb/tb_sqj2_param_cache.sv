// tb_sqj2_param_cache -- streams biases and weights of a 20-channel, K*K*CHI
// = 48 layer with random gaps, then checks that every PE bank holds the
// weights and bias of output channels PE, PE+16, ... in window order, that
// 'done' comes right after the last byte, and that a second load of a
// different size replaces the contents.
module tb_sqj2_param_cache;
  import sqj2_pkg::*;
  localparam int WWORDS = 64, QCHO = 4;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic start = 0, done, s_valid = 0, s_ready;
  logic [15:0] cho = 0, kkchi = 0;
  data_t s_data = 0;
  logic [$clog2(WWORDS)-1:0] w_rd_addr = 0;
  word_t w_rd_data [PAR_FACT];
  logic [$clog2(QCHO)-1:0] bias_q = 0;
  data_t bias_rd [PAR_FACT];
  int checks = 0, failures = 0;

  sqj2_param_cache #(.WWORDS(WWORDS), .QCHO(QCHO)) u_dut (.*);

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic load_and_check(input int CO, input int KK);
    byte bs[], wt[];
    int done_seen = 0, lastbeat = -1, cyc = 0;
    bs = new[CO]; wt = new[CO*KK];
    foreach (bs[i]) bs[i] = byte'($urandom);
    foreach (wt[i]) wt[i] = byte'($urandom);
    cho <= 16'(CO); kkchi <= 16'(KK);
    start <= 1; @(posedge clk); start <= 0;
    for (int i = 0; i < CO + CO*KK; i++) begin
      s_data <= (i < CO) ? bs[i] : wt[i - CO];
      s_valid <= ($urandom_range(0, 2) != 0);
      @(posedge clk);
      while (!(s_valid && s_ready)) begin s_valid <= ($urandom_range(0, 2) != 0); @(posedge clk); end
    end
    s_valid <= 0;
    #1;
    checks++;
    if (!done) begin failures++; $display("FAIL done not right after the last byte"); end
    @(posedge clk); #1;
    checks++;
    if (done || s_ready) begin failures++; $display("FAIL done longer than one cycle or still ready"); end
    for (int co = 0; co < CO; co++) begin
      int p = co % PAR_FACT, q = co / PAR_FACT;
      bias_q <= 2'(q);
      for (int i = 0; i < KK / CHI_NUM; i++) begin
        w_rd_addr <= 6'(q * (KK / CHI_NUM) + i);
        @(posedge clk); #1;
        for (int b = 0; b < CHI_NUM; b++) begin
          checks++;
          if (w_rd_data[p][b*8 +: 8] !== wt[co*KK + i*CHI_NUM + b]) begin
            failures++;
            if (failures < 10) $display("FAIL weight co %0d word %0d byte %0d", co, i, b);
          end
        end
        checks++;
        if (bias_rd[p] !== bs[co]) begin failures++; if (failures < 10) $display("FAIL bias %0d", co); end
      end
    end
  endtask

  initial begin
    repeat (3) @(posedge clk);
    rst_n <= 1;
    @(posedge clk);
    load_and_check(20, 48);
    load_and_check(33, 16);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

// tb_sqj2_write_back -- drains out_pix banks (modelled here with the same
// one-cycle read latency) under random back-pressure and checks the values,
// ReLU, channel numbers and the pixel-end flag of every value, and that at
// full speed a pixel takes cho + 2 cycles from start to done.
module tb_sqj2_write_back;
  import sqj2_pkg::*;
  localparam int CH = 64;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic start = 0, bank = 0, use_relu = 0, done;
  logic [15:0] cho = 0;
  logic op_rd_bank;
  logic [$clog2(CH)-1:0] op_rd_ch;
  data_t op_rd_data;
  logic o_valid, o_ready = 0, o_pix_last;
  data_t o_data;
  logic [15:0] o_ch;
  data_t mem [2][CH];
  int checks = 0, failures = 0, n_clamped = 0;

  sqj2_write_back #(.CH(CH)) u_dut (.*);
  always_ff @(posedge clk) op_rd_data <= mem[op_rd_bank][op_rd_ch];

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic run(input int n, input bit b, input bit relu, input bit stall);
    int k = 0, t0, t1, errs = 0;
    foreach (mem[x, c]) mem[x][c] = data_t'($urandom);
    cho <= 16'(n); bank <= b; use_relu <= relu;
    start <= 1; @(posedge clk); start <= 0;
    t0 = $time / 10;
    while (!done) begin
      o_ready <= stall ? ($urandom_range(0, 2) != 0) : 1'b1;
      @(posedge clk);
      if (o_valid && o_ready) begin
        data_t e = (relu && mem[b][k] < 0) ? data_t'(0) : mem[b][k];
        checks++;
        if (o_data != e || o_ch != 16'(k) || o_pix_last != (k == n - 1)) begin
          errs++;
          failures++;
          if (errs < 4) $display("FAIL value %0d: got %0d ch %0d last %0b, expected %0d", k, o_data, o_ch, o_pix_last, e);
        end
        if (relu && mem[b][k] < 0) n_clamped++;
        k++;
      end
    end
    t1 = $time / 10;
    checks++;
    if (k != n) begin failures++; $display("FAIL %0d values of %0d", k, n); end
    if (!stall) begin
      checks++;
      if (t1 - t0 != n + 2) begin failures++; $display("FAIL %0d cycles, expected %0d", t1 - t0, n + 2); end
    end
    o_ready <= 0;
    @(posedge clk);
  endtask

  initial begin
    repeat (3) @(posedge clk);
    rst_n <= 1;
    @(posedge clk);
    run(20, 0, 1, 0);
    run(64, 1, 0, 0);
    run(37, 1, 1, 1);
    run(16, 0, 0, 1);
    for (int i = 0; i < 20; i++)
      run($urandom_range(1, CH), 1'($urandom), 1'($urandom), 1'($urandom));
    checks++;
    if (n_clamped == 0) begin failures++; $display("FAIL ReLU never clamped"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

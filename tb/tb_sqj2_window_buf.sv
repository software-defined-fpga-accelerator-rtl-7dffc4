// tb_sqj2_window_buf -- fills both window banks with different data, one of
// them while the other is being read, and checks every word read back.
module tb_sqj2_window_buf;
  import sqj2_pkg::*;
  localparam int WORDS = KXKXCHI_MAX / CHI_NUM;
  logic clk = 0;
  always #5 clk = ~clk;
  logic wr_en = 0, wr_bank = 0, rd_bank = 0;
  logic [$clog2(WORDS)-1:0] wr_addr = 0, rd_addr = 0;
  word_t wr_data = '0, rd_data;
  word_t model [2][WORDS];
  int checks = 0, failures = 0;

  sqj2_window_buf u_dut (.*);

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    // bank 0 alone
    for (int a = 0; a < WORDS; a++) begin
      model[0][a] = {$urandom, $urandom, $urandom, $urandom};
      wr_en <= 1; wr_bank <= 0; wr_addr <= a[$clog2(WORDS)-1:0]; wr_data <= model[0][a];
      @(posedge clk);
    end
    // bank 1 written while bank 0 is read
    for (int a = 0; a < WORDS; a++) begin
      model[1][a] = {$urandom, $urandom, $urandom, $urandom};
      wr_en <= 1; wr_bank <= 1; wr_addr <= a[$clog2(WORDS)-1:0]; wr_data <= model[1][a];
      rd_bank <= 0; rd_addr <= a[$clog2(WORDS)-1:0];
      @(posedge clk); #1;
      checks++;
      if (rd_data !== model[0][a]) failures++;
    end
    wr_en <= 0;
    for (int a = 0; a < WORDS; a++) begin
      rd_bank <= 1; rd_addr <= a[$clog2(WORDS)-1:0];
      @(posedge clk); #1;
      checks++;
      if (rd_data !== model[1][a]) failures++;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

// tb_sqj2_linebuf -- writes lines through the logical line index with random
// byte enables, rotates linebuf_idx as the buffer slides down, and checks
// every read against a model in which rotation relabels lines:
// after a rotation logical line j shows what logical line j+1 held.
module tb_sqj2_linebuf;
  import sqj2_pkg::*;
  localparam int WORDS = 16;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic [3:0] kernel = 3;
  logic reset_idx = 0, rotate = 0, wr_en = 0;
  logic [1:0] wr_line = 0, rd_line = 0;
  logic [3:0] wr_addr = 0, rd_addr = 0;
  word_t wr_data = '0, rd_data;
  logic [CHI_NUM-1:0] wr_be = '0;
  int checks = 0, failures = 0;
  word_t model [3][WORDS];   // logical lines

  sqj2_linebuf #(.LINES(3), .WORDS(WORDS)) u_dut (.*);

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic write_all_lines_random(input int first_line);
    for (int l = first_line; l < int'(kernel); l++)
      for (int a = 0; a < WORDS; a++) begin
        word_t d = {$urandom, $urandom, $urandom, $urandom};
        logic [CHI_NUM-1:0] be = (a % 3 == 0) ? '1 : CHI_NUM'($urandom);
        wr_en <= 1; wr_line <= 2'(l); wr_addr <= 4'(a); wr_data <= d; wr_be <= be;
        for (int b = 0; b < CHI_NUM; b++) if (be[b]) model[l][a][b*8 +: 8] = d[b*8 +: 8];
        @(posedge clk);
      end
    wr_en <= 0;
  endtask

  task automatic check_all();
    for (int l = 0; l < int'(kernel); l++)
      for (int a = 0; a < WORDS; a++) begin
        rd_line <= 2'(l); rd_addr <= 4'(a);
        @(posedge clk); #1;
        checks++;
        if (rd_data !== model[l][a]) begin
          failures++;
          if (failures < 10) $display("FAIL line %0d word %0d", l, a);
        end
      end
  endtask

  task automatic do_rotate(input int n);
    for (int i = 0; i < n; i++) begin
      word_t t [WORDS];
      rotate <= 1; @(posedge clk); rotate <= 0;
      t = model[0];
      for (int l = 0; l + 1 < int'(kernel); l++) model[l] = model[l+1];
      model[kernel-1] = t;
    end
  endtask

  initial begin
    repeat (3) @(posedge clk);
    rst_n <= 1;
    @(posedge clk);
    foreach (model[l, a]) model[l][a] = '0;
    // fill all lines with full words first
    for (int l = 0; l < 3; l++) for (int a = 0; a < WORDS; a++) begin
      wr_en <= 1; wr_line <= 2'(l); wr_addr <= 4'(a); wr_data <= '0; wr_be <= '1; @(posedge clk);
    end
    wr_en <= 0;
    write_all_lines_random(0);
    check_all();
    for (int step = 0; step < 6; step++) begin
      int s = (step % 2) + 1;   // stride 1 or 2
      do_rotate(s);
      check_all();                       // rotated lines keep their data
      write_all_lines_random(3 - s);     // refill the new bottom lines
      check_all();
    end
    // a 2-line kernel rotates within two lines
    kernel = 2;
    reset_idx <= 1; @(posedge clk); reset_idx <= 0;
    write_all_lines_random(0);
    do_rotate(1);
    check_all();
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

// tb_sqj2_out_pix_buf -- writes words of PAR_FACT channels into both banks
// and reads every channel back one at a time.
module tb_sqj2_out_pix_buf;
  import sqj2_pkg::*;
  localparam int CH = 64;
  logic clk = 0;
  always #5 clk = ~clk;
  logic wr_en = 0, wr_bank = 0, rd_bank = 0;
  logic [$clog2(CH/PAR_FACT)-1:0] wr_addr = 0;
  logic [PAR_FACT*8-1:0] wr_data = '0;
  logic [$clog2(CH)-1:0] rd_ch = 0;
  data_t rd_data;
  byte model [2][CH];
  int checks = 0, failures = 0;

  sqj2_out_pix_buf #(.CH(CH)) u_dut (.*);

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int b = 0; b < 2; b++)
      for (int q = 0; q < CH / PAR_FACT; q++) begin
        logic [PAR_FACT*8-1:0] d;
        for (int p = 0; p < PAR_FACT; p++) begin
          d[p*8 +: 8] = 8'($urandom);
          model[b][q*PAR_FACT + p] = byte'(d[p*8 +: 8]);
        end
        wr_en <= 1; wr_bank <= 1'(b); wr_addr <= q[$clog2(CH/PAR_FACT)-1:0]; wr_data <= d;
        @(posedge clk);
      end
    wr_en <= 0;
    for (int b = 0; b < 2; b++)
      for (int c = 0; c < CH; c++) begin
        rd_bank <= 1'(b); rd_ch <= c[$clog2(CH)-1:0];
        @(posedge clk); #1;
        checks++;
        if (rd_data !== model[b][c]) begin
          failures++;
          if (failures < 10) $display("FAIL bank %0d ch %0d", b, c);
        end
      end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

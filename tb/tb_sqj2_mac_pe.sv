// tb_sqj2_mac_pe -- feeds one PE channels of random length (1..6 words,
// back to back and with idle gaps) and checks each dot product and that it
// appears exactly 3 cycles after the channel's last word.
module tb_sqj2_mac_pe;
  import sqj2_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic in_valid = 0, first = 0, last = 0, out_valid;
  word_t act = '0, wgt = '0;
  acc_t acc;
  int checks = 0, failures = 0;
  int cyc = 0;
  longint exp_q[$];
  int     due_q[$];

  sqj2_mac_pe u_dut (.clk, .rst_n, .in_valid, .first, .last, .act, .wgt, .out_valid, .acc);

  always @(negedge clk) cyc++;
  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // monitor
  always @(posedge clk) if (rst_n && out_valid) begin
    checks++;
    if (exp_q.size() == 0) begin failures++; $display("FAIL unexpected result"); end
    else begin
      longint e;
      int d;
      e = exp_q.pop_front();
      d = due_q.pop_front();
      if (longint'(acc) != e || cyc != d) begin
        failures++;
        $display("FAIL got %0d@%0d exp %0d@%0d", acc, cyc, e, d);
      end
    end
  end

  initial begin
    repeat (3) @(posedge clk);
    rst_n <= 1;
    @(posedge clk);
    for (int ch = 0; ch < 300; ch++) begin
      int len;
      longint sum;
      len = $urandom_range(1, 6);
      sum = 0;
      for (int i = 0; i < len; i++) begin
        word_t a, w;
        for (int b = 0; b < CHI_NUM; b++) begin
          a[b*8 +: 8] = 8'($urandom);
          w[b*8 +: 8] = 8'($urandom);
          sum += longint'(signed'(a[b*8 +: 8])) * longint'(signed'(w[b*8 +: 8]));
        end
        in_valid <= 1; first <= (i == 0); last <= (i == len - 1); act <= a; wgt <= w;
        @(posedge clk);
        if (i == len - 1) begin exp_q.push_back(sum); due_q.push_back(cyc + 3); end
        if ($urandom_range(0, 3) == 0) begin
          in_valid <= 0; first <= 0; last <= 0; act <= '1;
          @(posedge clk);
        end
      end
    end
    in_valid <= 0;
    repeat (10) @(posedge clk);
    checks++;
    if (exp_q.size() != 0) begin failures++; $display("FAIL missing results"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

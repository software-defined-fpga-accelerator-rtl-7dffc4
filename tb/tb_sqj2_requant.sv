// tb_sqj2_requant -- checks the dynamic fixed-point output stage against a
// reference computed with real arithmetic: (acc + bias*2^ei) / 2^(ei+ep-eo),
// rounded half up, saturated to [-128, 127].
module tb_sqj2_requant;
  import sqj2_pkg::*;
  acc_t acc; data_t bias; fl_t ei, eo, ep; data_t q;
  int checks = 0, failures = 0;
  sqj2_requant u_dut (.acc, .bias, .ei, .eo, .ep, .q);

  initial begin
    #1_000_000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    real x; longint v; int sh;
    for (int n = 0; n < 5000; n++) begin
      acc  = acc_t'($urandom_range(0, 40000)) - 20000;
      if (n % 7 == 0) acc = acc_t'($urandom) ;
      bias = data_t'($urandom);
      ei = fl_t'($urandom_range(0, 10)) - 3;
      ep = fl_t'($urandom_range(0, 10)) - 2;
      eo = fl_t'($urandom_range(0, 10)) - 3;
      #1;
      x  = real'(acc) + real'(bias) * (2.0 ** ei);
      sh = int'(ei) + int'(ep) - int'(eo);
      x  = x / (2.0 ** sh);
      v  = longint'($floor(x + 0.5));
      if (v > 127) v = 127;
      if (v < -128) v = -128;
      checks++;
      if (longint'(q) != v) begin
        failures++;
        if (failures < 10) $display("FAIL acc=%0d bias=%0d ei=%0d ep=%0d eo=%0d got %0d exp %0d", acc, bias, ei, ep, eo, q, v);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

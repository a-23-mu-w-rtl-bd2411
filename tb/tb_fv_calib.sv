// tb_fv_calib: random and corner FV_Raw / beta / alpha values against
// clamp((raw - beta) * alpha / 64, 0, 4095) computed with integers.
module tb_fv_calib;
  logic [13:0] raw, beta;
  logic [7:0]  alpha;
  logic [11:0] cal;
  int checks = 0, failures = 0;
  int exp_v;

  fv_calib dut (.raw, .beta, .alpha, .cal);

  initial begin
    for (int n = 0; n < 3000; n++) begin
      raw   = 14'($urandom_range(0, 16383));
      beta  = (n % 3 == 0) ? 14'($urandom_range(0, 16383)) : 14'($urandom_range(0, 8000));
      alpha = 8'($urandom_range(0, 255));
      if (n == 0) begin raw = 100; beta = 200; alpha = 64; end    // negative -> 0
      if (n == 1) begin raw = 5000; beta = 1000; alpha = 64; end  // gain 1
      if (n == 2) begin raw = 16383; beta = 0; alpha = 255; end   // clamp
      #1;
      exp_v = (int'(raw) > int'(beta)) ? ((int'(raw) - int'(beta)) * int'(alpha)) / 64 : 0;
      if (exp_v > 4095) exp_v = 4095;
      checks++;
      if (int'(cal) != exp_v) begin
        failures++;
        if (failures < 10) $display("raw=%0d beta=%0d alpha=%0d cal=%0d exp=%0d", raw, beta, alpha, cal, exp_v);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

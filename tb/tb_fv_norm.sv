// tb_fv_norm: random log features, means and 1/sigma values against
// floor((x - mu) * isig / 64) saturated to the signed 14-bit range.
module tb_fv_norm;
  import kws_pkg::*;
  logic [9:0]  x, mu;
  logic [11:0] isig;
  act_t        y;
  int checks = 0, failures = 0;
  longint p, e;

  fv_norm dut (.x, .mu, .inv_sigma(isig), .y);

  initial begin
    for (int n = 0; n < 3000; n++) begin
      x    = 10'($urandom_range(0, 768));
      mu   = 10'($urandom_range(0, 768));
      isig = 12'($urandom_range(0, 4095));
      #1;
      p = (longint'(x) - longint'(mu)) * longint'(isig);
      // floor division by 64
      e = (p >= 0) ? p / 64 : -((-p + 63) / 64);
      if (e > 8191) e = 8191;
      if (e < -8192) e = -8192;
      checks++;
      if (longint'(y) != e) begin
        failures++;
        if (failures < 10) $display("x=%0d mu=%0d isig=%0d y=%0d exp=%0d", x, mu, isig, y, e);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

// tb_log_lut: every 12-bit input against 64*log2(x+1) computed in floating
// point; the table result must be within 2 LSB (6-bit mantissa truncation, up to
// 1.43 LSB, plus table rounding, up to 0.5 LSB) and never decrease with x.
module tb_log_lut;
  logic [11:0] x;
  logic [9:0]  y;
  int checks = 0, failures = 0;
  real ref_v, err;
  int prev = -1;

  log_lut dut (.x, .y);

  initial begin
    for (int i = 0; i < 4096; i++) begin
      x = 12'(i);
      #1;
      ref_v = 64.0 * $ln(real'(i) + 1.0) / $ln(2.0);
      err = real'(y) - ref_v;
      checks++;
      if (err > 2.0 || err < -2.0 || int'(y) < prev) begin
        failures++;
        if (failures < 10) $display("x=%0d y=%0d ref=%f", i, y, ref_v);
      end
      prev = int'(y);
    end
    // exact points: powers of two minus one
    x = 0;    #1; checks++; if (y != 0)   failures++;
    x = 1;    #1; checks++; if (y != 64)  failures++;
    x = 4095; #1; checks++; if (y != 768) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

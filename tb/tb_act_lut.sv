// tb_act_lut: sweeps every input of the activation table in both modes and
// compares the output with the table formula computed here in floating point,
// then checks the error against the exact tanh and logistic functions (below
// 10/256, the step of a 1/16-wide table) and the symmetry tanh(-x) = -tanh(x)
// for x > 0 (x = 0 falls in the first positive bin).
module tb_act_lut;
  import kws_pkg::*;
  import kws_ref_pkg::*;
  act_t x, y;
  logic is_sigmoid;
  int checks = 0, failures = 0;

  act_lut dut (.x, .is_sigmoid, .y);

  initial begin
    #10ms; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int v = -8192; v < 8192; v++) begin
      real xr, ex, err;
      int tneg;
      x = act_t'(v);
      is_sigmoid = 1'b0; #1;
      checks++;
      if (int'(y) != tanh_q(v)) begin failures++; if (failures < 10) $display("tanh(%0d) = %0d, table %0d", v, y, tanh_q(v)); end
      xr = real'(v) / 256.0; ex = $tanh(xr) * 256.0; err = real'(y) - ex;
      checks++;
      if (err > 10.0 || err < -10.0) begin failures++; if (failures < 10) $display("tanh(%0d) error %f", v, err); end
      tneg = int'(y);
      if (v > 0) begin
        x = act_t'(-v); #1;
        checks++;
        if (int'(y) != -tneg) begin failures++; if (failures < 10) $display("tanh not odd at %0d", v); end
      end
      x = act_t'(v);
      is_sigmoid = 1'b1; #1;
      checks++;
      if (int'(y) != sigm_q(v)) begin failures++; if (failures < 10) $display("sig(%0d) = %0d, table %0d", v, y, sigm_q(v)); end
      ex = 256.0 / (1.0 + $exp(-xr)); err = real'(y) - ex;
      checks++;
      if (err > 10.0 || err < -10.0) begin failures++; if (failures < 10) $display("sig(%0d) error %f", v, err); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

// tb_argmax: random score sets (including ties and negative values) against a
// linear search for the first maximum; checks the one-cycle registered output.
module tb_argmax;
  import kws_pkg::*;
  logic clk = 0, rst_n = 0, valid = 0;
  act_t scores [12];
  logic [3:0] class_idx;
  logic class_valid;
  int checks = 0, failures = 0;
  int best;

  argmax dut (.clk, .rst_n, .valid, .scores, .class_idx, .class_valid);
  always #5 clk = ~clk;

  initial begin
    #100000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int i = 0; i < 12; i++) scores[i] = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int n = 0; n < 1000; n++) begin
      for (int i = 0; i < 12; i++)
        scores[i] = (n % 4 == 0) ? act_t'($urandom_range(0, 3)) : act_t'($urandom_range(0, 16383));
      best = 0;
      for (int i = 1; i < 12; i++) if (scores[i] > scores[best]) best = i;
      valid = 1;
      @(posedge clk); #1;
      valid = 0;
      checks++;
      if (!class_valid || int'(class_idx) != best) begin
        failures++;
        if (failures < 10) $display("n=%0d class=%0d exp=%0d", n, class_idx, best);
      end
      @(posedge clk); #1;
      checks++;
      if (class_valid) failures++;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

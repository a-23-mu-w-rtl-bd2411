// tb_xor_diff: drives a model ring oscillator that advances a random number of
// half-period steps (0..15) between samples, with the sampling strobe on random
// cycles, and checks that the differentiator's count equals the number of steps.
module tb_xor_diff;
  logic clk = 0, rst_n = 0, en = 0;
  logic [14:0] phase;
  logic [3:0]  cnt;
  int checks = 0, failures = 0;
  int s = 0;               // ring state 0..29
  int steps, expected;

  xor_diff dut (.clk, .rst_n, .en, .phase, .cnt);

  always #5 clk = ~clk;

  function automatic logic [14:0] ring(int st);
    logic [14:0] p;
    for (int i = 0; i < 15; i++) p[i] = (st < 15) ? (i < st) : (i >= st - 15);
    return p;
  endfunction

  initial begin
    #200000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    phase = ring(0);
    repeat (3) @(posedge clk);
    rst_n = 1;
    // two enabled samples of the still ring fill both registers
    en = 1; @(posedge clk); @(posedge clk); #1;
    expected = 0;
    for (int n = 0; n < 2000; n++) begin
      steps = $urandom_range(0, 15);
      s = (s + steps) % 30;
      phase = ring(s);
      en = 1;
      @(posedge clk); #1;
      en = 0;
      checks++;
      if (cnt !== 4'(steps)) begin
        failures++;
        if (failures < 10) $display("step %0d: cnt=%0d expected %0d", n, cnt, steps);
      end
      // idle cycles without the strobe must not change anything
      repeat ($urandom_range(0, 2)) begin
        phase = ring((s + 1) % 30);   // phase moves but is not sampled
        @(posedge clk); #1;
        phase = ring(s);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

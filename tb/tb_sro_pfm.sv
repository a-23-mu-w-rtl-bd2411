// tb_sro_pfm: holds the two switch inputs of the oscillator model at 00, 10,
// 01 and 11 for 20 ms each and measures the output frequency from the rising
// edges of tap 0; expects F_FREE, F_FREE + K_SW (twice) and F_FREE + 2 K_SW
// within 1 %. Also checks at every change of the taps that they move by one
// 1/30-cycle step of the ring (exactly one tap toggles per step, as long as
// the frequency stays below 1/30 of the model step rate).
module tb_sro_pfm;
  logic bpf_p = 0, bpf_n = 0;
  logic [14:0] phase, prev;
  int checks = 0, failures = 0, edges = 0, bad_steps = 0;
  int expf [4] = '{4000, 10000, 10000, 16000};

  sro_pfm dut (.bpf_p, .bpf_n, .phase);

  initial begin
    #200ms; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge phase[0]) edges++;

  always @(phase) begin
    if ($countones(phase ^ prev) > 1) bad_steps++;
    prev = phase;
  end

  initial begin
    prev = '0;
    for (int m = 0; m < 4; m++) begin
      int e0;
      {bpf_n, bpf_p} = 2'(m);
      #1ms;
      e0 = edges;
      #20ms;
      checks++;
      if ((edges - e0) * 50 < expf[m] * 99 / 100 || (edges - e0) * 50 > expf[m] * 101 / 100) begin
        failures++;
        $display("inputs %0d: %0d Hz expected %0d Hz", m, (edges - e0) * 50, expf[m]);
      end
    end
    checks++;
    if (bad_steps != 0) begin failures++; $display("%0d multi-tap steps", bad_steps); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

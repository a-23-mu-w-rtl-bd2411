// tb_clk_gen: counts system cycles between strobes: over_en every 4 cycles
// (250 kHz -> 62.5 kHz) and deci_en every 4096 cycles (2^10 oversampling
// periods), deci_en always together with over_en.
module tb_clk_gen;
  logic clk = 0, rst_n = 0;
  logic over_en, deci_en;
  int checks = 0, failures = 0;
  int cyc = 0, last_over = -1, last_deci = -1, n_deci = 0;

  clk_gen dut (.clk, .rst_n, .over_en, .deci_en);
  always #5 clk = ~clk;

  initial begin
    #1000000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1;
    repeat (4096 * 4 + 10) begin
      @(posedge clk);
      cyc++;
      if (over_en) begin
        if (last_over >= 0) begin
          checks++;
          if (cyc - last_over != 4) failures++;
        end
        last_over = cyc;
      end
      if (deci_en) begin
        checks++;
        if (!over_en) failures++;
        if (last_deci >= 0) begin
          checks++;
          if (cyc - last_deci != 4096) begin failures++; $display("deci period %0d", cyc - last_deci); end
        end
        last_deci = cyc;
        n_deci++;
      end
    end
    checks++;
    if (n_deci != 4) begin failures++; $display("deci strobes %0d", n_deci); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

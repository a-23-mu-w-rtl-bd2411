// tb_cic_decim: feeds random 4-bit counts at random strobe cycles and checks
// every decimated output against the sum of the 1024 inputs of its window,
// and that exactly one output appears per window.
module tb_cic_decim;
  logic clk = 0, rst_n = 0, en = 0, dump = 0;
  logic [3:0]  din;
  logic [13:0] raw;
  logic        valid;
  int checks = 0, failures = 0;
  int sum = 0, nvalid = 0;

  cic_decim dut (.clk, .rst_n, .en, .dump, .din, .raw, .valid);

  always #5 clk = ~clk;

  initial begin
    #2000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) if (rst_n && valid) nvalid++;

  initial begin
    din = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int w = 0; w < 6; w++) begin
      sum = 0;
      for (int i = 0; i < 1024; i++) begin
        // window 3 is all-15 to check the full-scale value 15360
        din  = (w == 3) ? 4'd15 : 4'($urandom_range(0, 15));
        sum += int'(din);
        en   = 1;
        dump = (i == 1023);
        @(posedge clk); #1;
        en = 0; dump = 0;
        repeat ($urandom_range(0, 1)) @(posedge clk);
        #1;
      end
      @(posedge clk); #1;
      checks++;
      if (int'(raw) != sum) begin
        failures++;
        $display("window %0d: raw=%0d expected %0d", w, raw, sum);
      end
    end
    checks++;
    if (nvalid != 6) begin failures++; $display("valid pulses %0d, expected 6", nvalid); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

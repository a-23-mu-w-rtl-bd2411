// tb_wmem: fills the whole weight memory byte by byte with random data, as the
// serial interface does, then reads every 64-bit word back (one-cycle read
// latency) and checks that byte l of word a holds byte address 8a + l. Also
// checks that the read register holds its value while the read enable is low.
module tb_wmem;
  import kws_pkg::*;
  logic clk = 0, re = 0, we = 0;
  logic [$clog2(WMEM_DEPTH)-1:0] raddr = '0;
  logic [63:0] rdata;
  logic [$clog2(WMEM_BYTES)-1:0] waddr = '0;
  logic [7:0] wdata = '0;
  logic [7:0] shadow [WMEM_BYTES];
  int checks = 0, failures = 0;

  wmem dut (.clk, .re, .raddr, .rdata, .we, .waddr, .wdata);
  always #5 clk = ~clk;

  initial begin
    #2ms; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    @(posedge clk); #1;
    for (int a = 0; a < WMEM_BYTES; a++) begin
      shadow[a] = 8'($urandom);
      we = 1; waddr = 15'(a); wdata = shadow[a];
      @(posedge clk); #1;
    end
    we = 0;
    for (int a = 0; a < WMEM_DEPTH; a++) begin
      re = 1; raddr = 12'(a);
      @(posedge clk); #1;
      for (int l = 0; l < 8; l++) begin
        checks++;
        if (rdata[8*l +: 8] != shadow[8*a+l]) begin
          failures++;
          if (failures < 10) $display("word %0d lane %0d: %h expected %h", a, l, rdata[8*l +: 8], shadow[8*a+l]);
        end
      end
    end
    re = 0; raddr = 12'd5;
    @(posedge clk); #1;
    checks++;
    if (rdata[7:0] != shadow[8*(WMEM_DEPTH-1)]) begin failures++; $display("read register changed with re low"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

// tb_obuf: writes random 8-lane words to the output buffer, interleaved with
// reads of other addresses, and checks every read (one-cycle latency) against
// a shadow copy, including a read and a write of the same word in one cycle,
// which returns the old contents.
module tb_obuf;
  import kws_pkg::*;
  logic clk = 0, we = 0;
  logic [OBUF_AW-1:0] raddr = '0, waddr = '0;
  logic [NHPE-1:0][OBUF_LW-1:0] rdata, wdata;
  logic [NHPE-1:0][OBUF_LW-1:0] shadow [OBUF_DEPTH];
  int checks = 0, failures = 0;

  obuf dut (.clk, .raddr, .rdata, .we, .waddr, .wdata);
  always #5 clk = ~clk;

  initial begin
    #1ms; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic logic [NHPE-1:0][OBUF_LW-1:0] rword();
    logic [NHPE-1:0][OBUF_LW-1:0] v;
    for (int l = 0; l < NHPE; l++) v[l] = OBUF_LW'($urandom);
    return v;
  endfunction

  initial begin
    wdata = '0;
    for (int a = 0; a < OBUF_DEPTH; a++) begin
      shadow[a] = rword();
      we = 1; waddr = OBUF_AW'(a); wdata = shadow[a];
      @(posedge clk); #1;
    end
    for (int i = 0; i < 2000; i++) begin
      automatic int ra = int'($urandom_range(0, OBUF_DEPTH-1));
      automatic int wa = (i % 7 == 0) ? ra : int'($urandom_range(0, OBUF_DEPTH-1));
      automatic logic [NHPE-1:0][OBUF_LW-1:0] expv = shadow[ra];
      raddr = OBUF_AW'(ra);
      we = ($urandom_range(0, 1) == 1);
      waddr = OBUF_AW'(wa); wdata = rword();
      if (we) shadow[wa] = wdata;
      @(posedge clk); #1;
      checks++;
      if (rdata != expv) begin failures++; if (failures < 10) $display("read %0d mismatch", ra); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

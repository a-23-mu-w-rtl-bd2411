// tb_config_reg: checks the reset values (beta 0, alpha 1.0, mu 0, 1/sigma 1.0,
// run and clear low), writes random values to every per-channel field through
// the byte-wide port and checks each field, checks that writes to the unused
// offset 7 and outside the map change nothing, and checks the control register:
// run follows bit 0, clear follows bit 1 and drops when the inference that
// consumes it starts (clear_ack).
module tb_config_reg;
  import kws_pkg::*;
  logic clk = 0, rst_n = 0, we = 0, clear_ack = 0;
  logic [CFG_AW-1:0] addr = '0;
  logic [7:0] wdata = '0;
  logic run, clear;
  ch_cfg_t cfg [NCH];
  ch_cfg_t exp_cfg [NCH];
  int checks = 0, failures = 0;

  config_reg dut (.clk, .rst_n, .we, .addr, .wdata, .clear_ack, .run, .clear, .cfg);
  always #5 clk = ~clk;

  initial begin
    #1ms; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic wr(int a, int d);
    we = 1; addr = CFG_AW'(a); wdata = 8'(d);
    @(posedge clk); #1;
    we = 0;
  endtask

  task automatic cmp(string what);
    for (int c = 0; c < NCH; c++) begin
      checks++;
      if (cfg[c] != exp_cfg[c]) begin
        failures++;
        if (failures < 10) $display("%s: channel %0d %h expected %h", what, c, cfg[c], exp_cfg[c]);
      end
    end
  endtask

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1; #1;
    for (int c = 0; c < NCH; c++) begin
      exp_cfg[c].beta = '0; exp_cfg[c].alpha = 8'd64; exp_cfg[c].mu = '0; exp_cfg[c].inv_sigma = 12'd256;
    end
    cmp("reset");
    checks++; if (run || clear) failures++;
    for (int rep = 0; rep < 3; rep++) begin
      for (int c = 0; c < NCH; c++) begin
        automatic int b = int'($urandom_range(0, 16383)), al = int'($urandom_range(0, 255));
        automatic int m = int'($urandom_range(0, 1023)), is = int'($urandom_range(0, 4095));
        automatic int base = 'h10 + 8 * c;
        wr(base + 0, b & 255); wr(base + 1, b >> 8);
        wr(base + 2, al);
        wr(base + 3, m & 255); wr(base + 4, m >> 8);
        wr(base + 5, is & 255); wr(base + 6, is >> 8);
        wr(base + 7, 8'hff);
        exp_cfg[c].beta = 14'(b); exp_cfg[c].alpha = 8'(al);
        exp_cfg[c].mu = 10'(m); exp_cfg[c].inv_sigma = 12'(is);
      end
      wr('h0f, 8'hff); wr('h90, 8'hff); wr('h1ff, 8'hff);
      cmp("fields");
    end
    wr(0, 8'h01);
    checks++; if (!run || clear) begin failures++; $display("run bit"); end
    wr(0, 8'h03);
    checks++; if (!run || !clear) begin failures++; $display("clear bit"); end
    repeat (3) @(posedge clk); #1;
    checks++; if (!clear) begin failures++; $display("clear dropped early"); end
    clear_ack = 1; @(posedge clk); #1; clear_ack = 0;
    checks++; if (!run || clear) begin failures++; $display("clear not acknowledged"); end
    wr(0, 8'h00);
    checks++; if (run) begin failures++; $display("run not cleared"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

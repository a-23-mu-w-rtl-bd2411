// tb_spi_slave: acts as the SPI host (mode 0, SCLK = clk / 10) and runs each
// command of the interface: a burst write to the weight memory at a random
// start address, a burst write to the configuration registers, a result read
// (checks the returned byte and the result_read pulse after chip select rises)
// and a feature read-back of all 16 channels, high byte first. Every write
// strobe is checked for address and data in order; every read byte is
// compared with the value on the target's inputs.
module tb_spi_slave;
  import kws_pkg::*;
  logic clk = 0, rst_n = 0;
  logic sclk = 0, cs_n = 1, mosi = 0, miso;
  logic wm_we, cfg_we, result_read;
  logic [$clog2(WMEM_BYTES)-1:0] wm_addr;
  logic [7:0] wm_data, cfg_data;
  logic [CFG_AW-1:0] cfg_addr;
  logic [7:0] result_byte = 8'h00;
  logic [RAW_W-1:0] fv_raw [NCH];
  int checks = 0, failures = 0, n_rr = 0;
  int exp_addr [$];
  int exp_data [$];
  logic exp_cfg;
  byte rx [];

  spi_slave dut (.clk, .rst_n, .sclk, .cs_n, .mosi, .miso, .wm_we, .wm_addr, .wm_data,
                 .cfg_we, .cfg_addr, .cfg_data, .result_byte, .fv_raw, .result_read);
  always #5 clk = ~clk;

  initial begin
    #20ms; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic spi(input byte tx [], output byte r []);
    r = new[tx.size()];
    cs_n = 0;
    repeat (20) @(posedge clk);
    for (int i = 0; i < tx.size(); i++)
      for (int b = 7; b >= 0; b--) begin
        mosi = tx[i][b];
        repeat (5) @(posedge clk);
        sclk = 1;
        r[i][b] = miso;
        repeat (5) @(posedge clk);
        sclk = 0;
      end
    repeat (20) @(posedge clk);
    cs_n = 1;
    repeat (20) @(posedge clk);
  endtask

  always @(posedge clk) if (rst_n) begin
    if (wm_we || cfg_we) begin
      checks++;
      if (exp_addr.size() == 0 || wm_we == exp_cfg) begin
        failures++; $display("unexpected write");
      end else begin
        automatic int ea = exp_addr.pop_front(), ed = exp_data.pop_front();
        automatic int ga = wm_we ? int'(wm_addr) : int'(cfg_addr);
        automatic int gd = wm_we ? int'(wm_data) : int'(cfg_data);
        if (ga != ea || gd != ed) begin
          failures++;
          if (failures < 10) $display("write %0h=%0h expected %0h=%0h", ga, gd, ea, ed);
        end
      end
    end
    if (result_read) n_rr++;
  end

  initial begin
    byte tx [];
    for (int c = 0; c < NCH; c++) fv_raw[c] = RAW_W'($urandom);
    repeat (3) @(posedge clk);
    rst_n = 1;
    // weight-memory burst
    begin
      automatic int a0 = int'($urandom_range(0, WMEM_BYTES - 100));
      tx = new[3 + 64];
      tx[0] = 8'h01; tx[1] = 8'(a0 >> 8); tx[2] = 8'(a0);
      exp_cfg = 0;
      for (int i = 0; i < 64; i++) begin
        tx[3+i] = 8'($urandom);
        exp_addr.push_back(a0 + i); exp_data.push_back(int'(tx[3+i]) & 255);
      end
      spi(tx, rx);
      checks++;
      if (exp_addr.size() != 0) begin failures++; $display("%0d weight writes missing", exp_addr.size()); end
    end
    // configuration burst
    begin
      tx = new[3 + 7];
      tx[0] = 8'h02; tx[1] = 8'h00; tx[2] = 8'h28;
      exp_cfg = 1;
      for (int i = 0; i < 7; i++) begin
        tx[3+i] = 8'($urandom);
        exp_addr.push_back('h28 + i); exp_data.push_back(int'(tx[3+i]) & 255);
      end
      spi(tx, rx);
      checks++;
      if (exp_addr.size() != 0) begin failures++; $display("%0d config writes missing", exp_addr.size()); end
    end
    // result read
    result_byte = 8'h87;
    tx = new[2]; tx[0] = 8'h03; tx[1] = 8'h00;
    checks++;
    if (n_rr != 0) failures++;
    spi(tx, rx);
    checks++;
    if (rx[1] != 8'h87) begin failures++; $display("result byte %h", rx[1]); end
    checks++;
    if (n_rr != 1) begin failures++; $display("result_read pulses %0d", n_rr); end
    // feature read-back
    tx = new[1 + 2*NCH]; tx[0] = 8'h04;
    for (int i = 1; i <= 2*NCH; i++) tx[i] = 8'h00;
    spi(tx, rx);
    for (int c = 0; c < NCH; c++) begin
      checks++;
      if ({rx[1+2*c], rx[2+2*c]} != 16'(fv_raw[c])) begin
        failures++;
        if (failures < 10) $display("fv_raw[%0d] %h%h expected %h", c, rx[1+2*c], rx[2+2*c], fv_raw[c]);
      end
    end
    checks++;
    if (n_rr != 1) begin failures++; $display("result_read after a feature read"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

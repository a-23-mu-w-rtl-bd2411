// tb_kws_dbe: end-to-end test of the digital back-end with a shortened
// decimation window (2^9 samples, a 2048-clock frame), so that a new feature
// vector arrives while an inference (about 3200 clocks) is still running and
// the overrun flag must be raised. The 16 oscillator phases come from an ideal
// ring model advancing (5c + 2) mod 16 steps per sample on channel c, so every
// FV_Raw is exactly 512 times the step. The host side runs over SPI: the whole
// weight image, a random calibration for every channel, run + clear, result
// reads and one feature read-back. Every inference's class is compared with
// the reference network fed by the reference feature path; irq must rise with
// each result and fall when the result is read. Each mechanism is counted and
// a failure is counted for one that never happened.
module tb_kws_dbe;
  import kws_pkg::*;
  import kws_ref_pkg::*;
  localparam int DL2 = 9;
  logic clk = 0, rst_n = 0;
  logic [NPH-1:0] pfm_phase [NCH];
  logic sclk = 0, cs_n = 1, mosi = 0, miso;
  logic irq, class_valid, fv_valid, overrun;
  logic [CLS_W-1:0] class_idx;
  int checks = 0, failures = 0;
  int ph [NCH];
  int stp [NCH];
  int cb [NCH], ca [NCH], cm [NCH], cs [NCH];
  int n_fv = 0, n_idle = 0, n_start = 0, n_over = 0, n_inf = 0, n_irq_set = 0, n_irq_clr = 0;
  int n_clear = 0, n_wm = 0, n_cfg = 0, n_raw = 0;
  logic irq_q = 0;
  int div = 0;
  byte rx [];

  kws_dbe #(.DECI_LOG2(DL2)) dut (
    .clk, .rst_n, .pfm_phase, .spi_sclk(sclk), .spi_cs_n(cs_n), .spi_mosi(mosi),
    .spi_miso(miso), .irq, .class_idx, .class_valid, .fv_valid, .overrun
  );
  always #2us clk = ~clk;

  initial begin
    #20s; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic logic [NPH-1:0] ring(int s);
    logic [NPH-1:0] v;
    for (int i = 0; i < NPH; i++) v[i] = (s < 15) ? (i < s) : (i >= s - 15);
    return v;
  endfunction

  // ideal oscillators: one phase update every 4 clocks
  always @(negedge clk) begin
    div = (div + 1) % 4;
    if (div == 0)
      for (int c = 0; c < NCH; c++) begin
        ph[c] = (ph[c] + stp[c]) % 30;
        pfm_phase[c] = ring(ph[c]);
      end
  end

  task automatic spi(input byte tx [], output byte r []);
    r = new[tx.size()];
    cs_n = 0;
    repeat (3) @(posedge clk);
    for (int i = 0; i < tx.size(); i++)
      for (int b = 7; b >= 0; b--) begin
        mosi = tx[i][b];
        repeat (5) @(posedge clk);
        sclk = 1;
        r[i][b] = miso;
        repeat (5) @(posedge clk);
        sclk = 0;
      end
    repeat (3) @(posedge clk);
    cs_n = 1;
    repeat (4) @(posedge clk);
  endtask

  // event counters
  always @(negedge clk) if (rst_n) begin
    if (fv_valid) begin
      n_fv++;
      if (!dut.run) n_idle++;
      else if (dut.busy) n_over++;
    end
    if (dut.start) n_start++;
    if (dut.start && dut.clear) n_clear++;
    if (dut.wm_we) n_wm++;
    if (dut.cfg_we) n_cfg++;
    if (irq && !irq_q) n_irq_set++;
    if (!irq && irq_q) n_irq_clr++;
    irq_q = irq;
  end

  function automatic int exp_class();
    int fv [16];
    int sc [12];
    for (int c = 0; c < NCH; c++)
      fv[c] = norm_ref(log_ref(cal_ref(stp[c] << DL2, cb[c], ca[c])), cm[c], cs[c]);
    return step(fv, sc);
  endfunction

  task automatic one_inference();
    int ecls;
    byte tx [];
    // wait for the vector that starts an inference
    do @(negedge clk); while (!(fv_valid && dut.run && !dut.busy));
    if (dut.clear) reset_state();
    ecls = exp_class();
    do @(negedge clk); while (!class_valid);
    n_inf++;
    checks++;
    if (int'(class_idx) != ecls) begin failures++; $display("class %0d expected %0d", class_idx, ecls); end
    @(negedge clk);
    checks++;
    if (!irq) begin failures++; $display("irq not raised"); end
    tx = new[2];
    tx[0] = 8'h03; tx[1] = 8'h00;
    spi(tx, rx);
    checks += 2;
    if (rx[1] != {1'b1, 3'b000, 4'(ecls)}) begin failures++; $display("result byte %h", rx[1]); end
    if (irq) begin failures++; $display("irq not cleared by the read"); end
    $display("inference %0d: class %0d", n_inf, class_idx);
  endtask

  initial begin
    byte tx [];
    gen_net(40);
    build_image();
    for (int c = 0; c < NCH; c++) begin
      ph[c] = 0; pfm_phase[c] = '0;
      stp[c] = (5 * c + 2) % 16;
      cb[c] = int'($urandom_range(0, 1500));
      ca[c] = int'($urandom_range(32, 160));
      cm[c] = int'($urandom_range(250, 600));
      cs[c] = int'($urandom_range(200, 700));
    end
    repeat (3) @(posedge clk);
    rst_n = 1;
    // weights
    tx = new[3 + img_words * 8];
    tx[0] = 8'h01; tx[1] = 8'h00; tx[2] = 8'h00;
    for (int a = 0; a < img_words * 8; a++) tx[3 + a] = img[a];
    spi(tx, rx);
    // calibration
    tx = new[3 + 8 * NCH];
    tx[0] = 8'h02; tx[1] = 8'h00; tx[2] = 8'h10;
    for (int c = 0; c < NCH; c++) begin
      tx[3+8*c+0] = 8'(cb[c]); tx[3+8*c+1] = 8'(cb[c] >> 8);
      tx[3+8*c+2] = 8'(ca[c]);
      tx[3+8*c+3] = 8'(cm[c]); tx[3+8*c+4] = 8'(cm[c] >> 8);
      tx[3+8*c+5] = 8'(cs[c]); tx[3+8*c+6] = 8'(cs[c] >> 8);
      tx[3+8*c+7] = 8'h00;
    end
    spi(tx, rx);
    checks += 2;
    if (n_wm != img_words * 8) begin failures++; $display("weight writes %0d", n_wm); end
    if (n_start != 0) begin failures++; $display("inference without run"); end
    // feature read-back
    tx = new[1 + 2 * NCH]; tx[0] = 8'h04;
    for (int i = 1; i <= 2 * NCH; i++) tx[i] = 8'h00;
    spi(tx, rx);
    n_raw++;
    for (int c = 0; c < NCH; c++) begin
      checks++;
      if ({rx[1+2*c], rx[2+2*c]} != 16'(stp[c] << DL2)) begin failures++; $display("raw %0d: %h%h", c, rx[1+2*c], rx[2+2*c]); end
    end
    // run with a state clear
    tx = new[4]; tx[0] = 8'h02; tx[1] = 8'h00; tx[2] = 8'h00; tx[3] = 8'h03;
    spi(tx, rx);
    one_inference();
    one_inference();
    // clear the state again between two inferences
    tx = new[4]; tx[0] = 8'h02; tx[1] = 8'h00; tx[2] = 8'h00; tx[3] = 8'h03;
    spi(tx, rx);
    one_inference();
    one_inference();
    checks += 10;
    if (n_fv == 0)      begin failures++; $display("no feature vector"); end
    if (n_idle == 0)    begin failures++; $display("no vector ignored while stopped"); end
    if (n_over == 0 || !overrun) begin failures++; $display("no overrun"); end
    if (n_inf != 4)     begin failures++; $display("inferences %0d", n_inf); end
    if (n_start != 4)   begin failures++; $display("starts %0d", n_start); end
    if (n_clear != 2)   begin failures++; $display("state clears %0d", n_clear); end
    if (n_irq_set != 4) begin failures++; $display("irq set %0d", n_irq_set); end
    if (n_irq_clr != 4) begin failures++; $display("irq cleared %0d", n_irq_clr); end
    if (n_cfg != 8 * NCH + 2) begin failures++; $display("config writes %0d", n_cfg); end
    if (n_raw == 0)     begin failures++; $display("no feature read-back"); end
    $display("vectors %0d (ignored %0d, overrun %0d), inferences %0d, clears %0d, irq %0d/%0d, weight bytes %0d, config writes %0d",
             n_fv, n_idle, n_over, n_inf, n_clear, n_irq_set, n_irq_clr, n_wm, n_cfg);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

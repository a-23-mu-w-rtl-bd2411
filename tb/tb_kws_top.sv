// tb_kws_top: end-to-end test of the whole chip model at its default sizes
// (250 kHz clock, 62.5 kHz oversampling, 1024-sample decimation, 16-48-48-12
// network). The 32 band-pass switch inputs are driven with random pulse
// trains whose density differs per channel and changes every frame, standing
// in for the rectified filter outputs of speech; the 16 oscillator models
// turn them into phases for the digital back-end. Over SPI the host loads the
// full weight image, a calibration per channel and run + clear. In every
// frame it then reads FV_Raw back, runs the reference feature path and
// network on it, waits for the class and reads the result, which must match
// and must clear irq. The state is cleared again before the fourth frame.
// The latency from feature vector to class is checked against the frame
// (4096 clocks) and printed next to the paper's 12.4 ms. Every mechanism is
// counted and a failure is counted for one that never happened. Each FV_Raw
// is also checked, within +-300 counts, against the count the oscillator
// model should produce for that channel's input density in that frame, which
// ties every channel's analog input to its own feature.
module tb_kws_top;
  import kws_pkg::*;
  import kws_ref_pkg::*;
  localparam int NFRAMES = 5;
  logic clk = 0, rst_n = 0;
  logic [NCH-1:0] bpf_p = '0, bpf_n = '0;
  logic sclk = 0, cs_n = 1, mosi = 0, miso;
  logic irq, class_valid, fv_valid, overrun;
  logic [CLS_W-1:0] class_idx;
  int checks = 0, failures = 0;
  int cb [NCH], ca [NCH], cm [NCH], cs [NCH];
  int dp [NCH], dn [NCH];
  int wp [NCH], wn [NCH];   // densities in force during the frame just ended
  int n_fv = 0, n_idle = 0, n_start = 0, n_over = 0, n_inf = 0, n_irq_set = 0, n_irq_clr = 0;
  int n_clear = 0, n_wm = 0, n_cfg = 0, n_raw = 0, cyc = 0, t_fv = 0, lat = 0;
  logic irq_q = 0;
  byte rx [];

  kws_top dut (
    .clk, .rst_n, .bpf_p, .bpf_n, .spi_sclk(sclk), .spi_cs_n(cs_n), .spi_mosi(mosi),
    .spi_miso(miso), .irq, .class_idx, .class_valid, .fv_valid, .overrun
  );
  always #2us clk = ~clk;

  initial begin
    #60s; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // band-pass switch inputs: a new random level every 16 us
  always #16us
    for (int c = 0; c < NCH; c++) begin
      bpf_p[c] = ($urandom_range(0, 99) < dp[c]);
      bpf_n[c] = ($urandom_range(0, 99) < dn[c]);
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
    cyc++;
    if (fv_valid) begin
      n_fv++;
      t_fv = cyc;
      if (!dut.u_dbe.run) n_idle++;
      else if (dut.u_dbe.busy) n_over++;
    end
    if (class_valid) lat = cyc - t_fv;
    if (dut.u_dbe.start) n_start++;
    if (dut.u_dbe.start && dut.u_dbe.clear) n_clear++;
    if (dut.u_dbe.wm_we) n_wm++;
    if (dut.u_dbe.cfg_we) n_cfg++;
    if (irq && !irq_q) n_irq_set++;
    if (!irq && irq_q) n_irq_clr++;
    irq_q = irq;
  end

  task automatic one_frame(int k);
    int ecls;
    int fv [16];
    int sc [12];
    int raw, exp_raw;
    byte tx [];
    do @(negedge clk); while (!fv_valid);
    // new input densities for the next frame
    for (int c = 0; c < NCH; c++) begin
      wp[c] = dp[c]; wn[c] = dn[c];
      dp[c] = int'($urandom_range(0, 100));
      dn[c] = int'($urandom_range(0, 100));
    end
    if (dut.u_dbe.clear) reset_state();
    // read FV_Raw of this frame
    tx = new[1 + 2 * NCH]; tx[0] = 8'h04;
    for (int i = 1; i <= 2 * NCH; i++) tx[i] = 8'h00;
    spi(tx, rx);
    n_raw++;
    for (int c = 0; c < NCH; c++) begin
      raw = (int'(rx[1+2*c]) & 255) * 256 + (int'(rx[2+2*c]) & 255);
      // oscillator model: 30 steps per cycle at 4 kHz + 6 kHz per active
      // input, over 4096 clocks of 4 us
      exp_raw = $rtoi(30.0 * 0.016384 * (4000.0 + 6000.0 * real'(wp[c] + wn[c]) / 100.0));
      checks++;
      if (raw < exp_raw - 300 || raw > exp_raw + 300) begin
        failures++;
        $display("frame %0d channel %0d: FV_Raw %0d, input density predicts %0d", k, c, raw, exp_raw);
      end
      fv[c] = norm_ref(log_ref(cal_ref(raw, cb[c], ca[c])), cm[c], cs[c]);
    end
    ecls = step(fv, sc);
    do @(negedge clk); while (!class_valid);
    n_inf++;
    checks += 2;
    if (int'(class_idx) != ecls) begin failures++; $display("frame %0d: class %0d expected %0d", k, class_idx, ecls); end
    if (lat > 4096) begin failures++; $display("latency %0d clocks exceeds the frame", lat); end
    @(negedge clk);
    checks++;
    if (!irq) begin failures++; $display("irq not raised"); end
    tx = new[2];
    tx[0] = 8'h03; tx[1] = 8'h00;
    spi(tx, rx);
    checks += 2;
    if (rx[1] != {1'b1, 3'b000, 4'(ecls)}) begin failures++; $display("result byte %h", rx[1]); end
    if (irq) begin failures++; $display("irq not cleared by the read"); end
    $display("frame %0d: class %0d, latency %0d clocks = %0.2f ms (paper: 12.4 ms)", k, class_idx, lat, real'(lat) * 0.004);
  endtask

  initial begin
    byte tx [];
    gen_net(40);
    build_image();
    for (int c = 0; c < NCH; c++) begin
      dp[c] = (c * 13) % 100;
      dn[c] = (c * 29 + 7) % 100;
      cb[c] = int'($urandom_range(1500, 2500));
      ca[c] = int'($urandom_range(48, 128));
      cm[c] = int'($urandom_range(400, 600));
      cs[c] = int'($urandom_range(300, 900));
    end
    repeat (3) @(posedge clk);
    rst_n = 1;
    tx = new[3 + img_words * 8];
    tx[0] = 8'h01; tx[1] = 8'h00; tx[2] = 8'h00;
    for (int a = 0; a < img_words * 8; a++) tx[3 + a] = img[a];
    spi(tx, rx);
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
    tx = new[4]; tx[0] = 8'h02; tx[1] = 8'h00; tx[2] = 8'h00; tx[3] = 8'h03;
    spi(tx, rx);
    for (int k = 0; k < NFRAMES; k++) begin
      if (k == 3) begin
        tx = new[4]; tx[0] = 8'h02; tx[1] = 8'h00; tx[2] = 8'h00; tx[3] = 8'h03;
        spi(tx, rx);
      end
      one_frame(k);
    end
    checks += 10;
    if (n_fv == 0)      begin failures++; $display("no feature vector"); end
    if (n_idle == 0)    begin failures++; $display("no vector ignored while stopped"); end
    if (n_over != 0 || overrun) begin failures++; $display("overrun at the full frame length"); end
    if (n_inf != NFRAMES)   begin failures++; $display("inferences %0d", n_inf); end
    if (n_start != NFRAMES) begin failures++; $display("starts %0d", n_start); end
    if (n_clear != 2)   begin failures++; $display("state clears %0d", n_clear); end
    if (n_irq_set != NFRAMES) begin failures++; $display("irq set %0d", n_irq_set); end
    if (n_irq_clr != NFRAMES) begin failures++; $display("irq cleared %0d", n_irq_clr); end
    if (n_cfg != 8 * NCH + 2) begin failures++; $display("config writes %0d", n_cfg); end
    if (n_raw != NFRAMES) begin failures++; $display("feature read-backs %0d", n_raw); end
    $display("vectors %0d (ignored %0d), inferences %0d, clears %0d, irq %0d/%0d, weight bytes %0d, config writes %0d, read-backs %0d",
             n_fv, n_idle, n_inf, n_clear, n_irq_set, n_irq_clr, n_wm, n_cfg, n_raw);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

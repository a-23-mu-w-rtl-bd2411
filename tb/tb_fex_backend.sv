// tb_fex_backend: drives the 16 channels of the digital feature extraction
// with ideal ring-oscillator phases advancing by a fixed number of 1/30-cycle
// steps per oversampling sample (channel c steps (3c + 1) mod 16 per sample)
// and a random calibration per channel. Enables come as on the chip: one
// oversampling sample every 4 clocks, a decimation dump every 1024 samples.
// Checks every FV_Raw against 1024 * step, FV_Log and FV_Norm against the
// reference feature path, and that fv_valid comes once per 4096 clocks.
module tb_fex_backend;
  import kws_pkg::*;
  import kws_ref_pkg::*;
  logic clk = 0, rst_n = 0, over_en = 0, deci_en = 0;
  logic [NPH-1:0] phase [NCH];
  ch_cfg_t cfg [NCH];
  logic [RAW_W-1:0] fv_raw [NCH];
  logic [LOG_W-1:0] fv_log [NCH];
  act_t fv_norm [NCH];
  logic fv_valid;
  int checks = 0, failures = 0, nvalid = 0, last_v = -1, cyc = 0;
  int ph [NCH];
  int step [NCH];
  int div = 0, smp = 0;

  fex_backend dut (.clk, .rst_n, .over_en, .deci_en, .phase, .cfg, .fv_raw, .fv_log,
                   .fv_norm, .fv_valid);
  always #5 clk = ~clk;

  initial begin
    #1s; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic logic [NPH-1:0] ring(int s);
    logic [NPH-1:0] v;
    for (int i = 0; i < NPH; i++) v[i] = (s < 15) ? (i < s) : (i >= s - 15);
    return v;
  endfunction

  // enables and phases
  always @(posedge clk) begin
    if (rst_n) begin
      cyc++;
      div = (div + 1) % 4;
      if (div == 0) begin
        for (int c = 0; c < NCH; c++) begin
          ph[c] = (ph[c] + step[c]) % 30;
          phase[c] <= ring(ph[c]);
        end
      end
      over_en <= (div == 3);
      if (div == 3) smp = (smp + 1) % 1024;
      deci_en <= (div == 3) && (smp == 1023);
    end
  end

  always @(posedge clk) begin
    #1;
    if (fv_valid) begin
      nvalid++;
      if (last_v >= 0) begin
        checks++;
        if (cyc - last_v != 4096) begin failures++; $display("fv period %0d", cyc - last_v); end
      end
      last_v = cyc;
      if (nvalid > 1)
        for (int c = 0; c < NCH; c++) begin
          automatic int cal = cal_ref(1024 * step[c], int'(cfg[c].beta), int'(cfg[c].alpha));
          automatic int lg  = log_ref(cal);
          automatic int nr  = norm_ref(int'(fv_log[c]), int'(cfg[c].mu), int'(cfg[c].inv_sigma));
          checks += 3;
          if (int'(fv_raw[c]) != 1024 * step[c]) begin failures++; $display("raw[%0d] %0d expected %0d", c, fv_raw[c], 1024*step[c]); end
          if (int'(fv_log[c]) != lg) begin failures++; $display("log[%0d] %0d expected %0d (cal %0d)", c, fv_log[c], lg, cal); end
          if (int'(fv_norm[c]) != nr) begin failures++; $display("norm[%0d] %0d expected %0d", c, fv_norm[c], nr); end
        end
    end
  end

  initial begin
    for (int c = 0; c < NCH; c++) begin
      ph[c] = 0; phase[c] = '0;
      step[c] = (3 * c + 1) % 16;
      cfg[c].beta = RAW_W'($urandom_range(0, 4000));
      cfg[c].alpha = ALPHA_W'($urandom_range(16, 255));
      cfg[c].mu = LOG_W'($urandom_range(0, 700));
      cfg[c].inv_sigma = ISIG_W'($urandom_range(0, 4095));
    end
    cfg[0].beta = '0; cfg[0].alpha = 8'd64; cfg[0].mu = '0; cfg[0].inv_sigma = 12'd256;
    repeat (3) @(posedge clk);
    rst_n = 1;
    wait (nvalid == 6);
    checks++;
    if (nvalid != 6) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

// tb_gru_accel: loads a random network into the weight memory, runs a sequence
// of random feature vectors through the accelerator (the first with a state
// clear, two more clears later) and compares all 12 scores after every step
// with the fixed-point reference in kws_ref_pkg. Also checks the inference
// latency against the 16 ms frame (4096 cycles at 250 kHz) and reports it
// next to the paper's 12.4 ms (3100 cycles).
module tb_gru_accel;
  import kws_pkg::*;
  import kws_ref_pkg::*;
  logic clk = 0, rst_n = 0, start = 0, clear = 0;
  act_t fv [NIN];
  logic busy, done;
  act_t scores [NCLS];
  logic wm_we = 0;
  logic [14:0] wm_waddr;
  logic [7:0]  wm_wdata;
  int checks = 0, failures = 0;
  int fvi [16];
  int sc [12];
  int cyc, lat;

  gru_accel dut (.clk, .rst_n, .start, .clear, .fv, .busy, .done, .scores,
                 .wm_we, .wm_waddr, .wm_wdata);
  always #5 clk = ~clk;

  initial begin
    #5000000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    gen_net(40);
    build_image();
    for (int c = 0; c < 16; c++) fv[c] = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    checks++;
    if (img_words != 3026) begin failures++; $display("image words %0d", img_words); end
    for (int a = 0; a < img_words * 8; a++) begin
      wm_we = 1; wm_waddr = 15'(a); wm_wdata = img[a];
      @(posedge clk); #1;
    end
    wm_we = 0;
    reset_state();
    for (int s = 0; s < 8; s++) begin
      int cls;
      for (int c = 0; c < 16; c++) begin
        fvi[c] = int'($urandom_range(0, 1023)) - 512;     // +-2.0
        fv[c]  = act_t'(fvi[c]);
      end
      clear = (s == 0 || s == 4);
      if (clear) reset_state();
      cls = step(fvi, sc);
      start = 1;
      @(posedge clk); #1;
      start = 0; clear = 0;
      cyc = 1;
      while (!done) begin @(posedge clk); #1; cyc++; end
      lat = cyc;
      for (int c = 0; c < 12; c++) begin
        checks++;
        if (int'(scores[c]) != sc[c]) begin
          failures++;
          if (failures < 10) $display("step %0d class %0d: %0d expected %0d", s, c, scores[c], sc[c]);
        end
      end
      checks++;
      if (lat > 4096) begin failures++; $display("latency %0d cycles exceeds the frame", lat); end
      $display("step %0d: latency %0d cycles (%0.2f ms at 250 kHz; paper 12.4 ms), class %0d", s, lat, real'(lat) * 0.004, cls);
      repeat (3) @(posedge clk); #1;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

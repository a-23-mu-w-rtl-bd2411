// tb_gru_ctrl: starts the sequencer twice (with and without a state clear) and
// checks the shape of the schedule it issues against counts worked out from the
// network: 3026 weight-memory reads at consecutive addresses from 0, 2976
// multiply-accumulates (per group of 8 neurons: 3 * (16 + 48) in layer 1,
// 3 * (48 + 48) in layer 2; 2 * 48 for the classifier), 50 bias loads, 24
// sigmoids, 12 tanh, 12 state updates and 48 zeroed state words after a
// clear; busy must cover the whole run and done must pulse once at its end.
// The measured length is printed next to the paper's latency (12.4 ms, 3100
// clocks at 250 kHz) and must fit the 4096-clock frame.
module tb_gru_ctrl;
  import kws_pkg::*;
  logic clk = 0, rst_n = 0, start = 0, clear = 0;
  logic busy, done, wm_re;
  logic [WMEM_AW-1:0] wm_raddr;
  logic [OBUF_AW-1:0] ob_raddr;
  uop_t uop1;
  int checks = 0, failures = 0;
  int n_rd, next_a, n_mac, n_bias, n_sig, n_tanh, n_mult, n_wrz, n_done, cyc;

  gru_ctrl dut (.clk, .rst_n, .start, .clear, .busy, .done, .wm_re, .wm_raddr, .ob_raddr, .uop1);
  always #5 clk = ~clk;

  initial begin
    #1ms; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) if (rst_n) begin
    if (wm_re) begin
      n_rd++;
      if (int'(wm_raddr) != next_a) begin
        failures++;
        if (failures < 10) $display("read address %0d expected %0d", wm_raddr, next_a);
      end
      next_a++;
    end
    case (uop1.op)
      OP_MAC:  n_mac++;
      OP_BIAS: n_bias++;
      OP_SIG:  n_sig++;
      OP_TANH: n_tanh++;
      OP_MULT: n_mult++;
      OP_WRZ:  n_wrz++;
      default: ;
    endcase
    if (done) n_done++;
  end

  task automatic run(bit clr);
    n_rd = 0; next_a = 0; n_mac = 0; n_bias = 0; n_sig = 0; n_tanh = 0; n_mult = 0; n_wrz = 0; n_done = 0;
    start = 1; clear = clr;
    @(posedge clk); #1;
    start = 0; clear = 0;
    cyc = 1;
    while (!done) begin
      checks++;
      if (!busy) begin failures++; $display("busy low during the run"); end
      @(posedge clk); #1; cyc++;
    end
    repeat (5) @(posedge clk); #1;
    checks += 10;
    if (n_rd != 3026)  begin failures++; $display("reads %0d", n_rd); end
    if (n_mac != 2976) begin failures++; $display("MACs %0d", n_mac); end
    if (n_bias != 50)  begin failures++; $display("biases %0d", n_bias); end
    if (n_sig != 24)   begin failures++; $display("sigmoids %0d", n_sig); end
    if (n_tanh != 12)  begin failures++; $display("tanh %0d", n_tanh); end
    if (n_mult != 12)  begin failures++; $display("state updates %0d", n_mult); end
    if (n_wrz != (clr ? 24 : 0)) begin failures++; $display("cleared words %0d", n_wrz); end
    if (n_done != 1)   begin failures++; $display("done pulses %0d", n_done); end
    if (busy)          begin failures++; $display("busy after done"); end
    if (cyc > 4096)    begin failures++; $display("run exceeds the frame"); end
    $display("run (clear=%0d): %0d clocks = %0.2f ms at 250 kHz (paper: 12.4 ms)", clr, cyc, real'(cyc) * 0.004);
  endtask

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1;
    @(posedge clk); #1;
    run(1);
    run(0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

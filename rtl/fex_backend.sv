// fex_backend: digital part of the 16-channel feature extractor.
//
// For every channel the 15 oscillator phases go through an XOR differentiator
// (the delta-sigma TDC), a first-order CIC decimator by 2^10, the offset and gain
// calibration, the log(x+1) table and the normaliser, giving one 16 x 14-bit
// feature vector per decimation window (every 16 ms at the paper's rates). The
// post-processing of all channels runs in parallel, one pipeline stage each,
// clocked by the decimation strobe, as the paper runs it at f_S,Deci.
//
// Timing: the decimators update on the `deci_en` strobe; `fv_raw` is valid one
// cycle later and `fv_valid` pulses three cycles after `deci_en`, with `fv_norm`
// holding the new vector until the next one.
module fex_backend
  import kws_pkg::*;
(
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 over_en,
  input  logic                 deci_en,
  input  logic [NPH-1:0]       phase   [NCH],
  input  ch_cfg_t              cfg     [NCH],
  output logic [RAW_W-1:0]     fv_raw  [NCH],
  output logic [LOG_W-1:0]     fv_log  [NCH],
  output act_t                 fv_norm [NCH],
  output logic                 fv_valid
);

  logic [CNT_W-1:0] cnt   [NCH];
  logic             rvalid[NCH];
  logic [CAL_W-1:0] cal_c [NCH];
  logic [LOG_W-1:0] log_c [NCH];
  act_t             norm_c[NCH];
  logic [CAL_W-1:0] cal_q [NCH];
  logic             v_cal, v_log;

  for (genvar c = 0; c < int'(NCH); c++) begin : g_ch
    xor_diff #(.N(NPH)) u_xd (
      .clk, .rst_n, .en(over_en), .phase(phase[c]), .cnt(cnt[c])
    );
    cic_decim u_cic (
      .clk, .rst_n, .en(over_en), .dump(deci_en), .din(cnt[c]),
      .raw(fv_raw[c]), .valid(rvalid[c])
    );
    fv_calib u_cal (
      .raw(fv_raw[c]), .beta(cfg[c].beta), .alpha(cfg[c].alpha), .cal(cal_c[c])
    );
    log_lut u_log (.x(cal_q[c]), .y(log_c[c]));
    fv_norm u_norm (
      .x(fv_log[c]), .mu(cfg[c].mu), .inv_sigma(cfg[c].inv_sigma), .y(norm_c[c])
    );
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      v_cal    <= 1'b0;
      v_log    <= 1'b0;
      fv_valid <= 1'b0;
      for (int c = 0; c < int'(NCH); c++) begin
        cal_q[c]   <= '0;
        fv_log[c]  <= '0;
        fv_norm[c] <= '0;
      end
    end else begin
      v_cal    <= rvalid[0];
      v_log    <= v_cal;
      fv_valid <= v_log;
      for (int c = 0; c < int'(NCH); c++) begin
        if (rvalid[0]) cal_q[c]   <= cal_c[c];
        if (v_cal)     fv_log[c]  <= log_c[c];
        if (v_log)     fv_norm[c] <= norm_c[c];
      end
    end
  end

endmodule

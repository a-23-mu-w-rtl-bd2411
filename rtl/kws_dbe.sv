// kws_dbe: digital back-end of the keyword-spotting chip.
//
// Takes the 15-phase outputs of the 16 ring-oscillator PFM encoders and the SPI
// pins, and produces the detected class with an interrupt. Inside: the clock
// generator (oversampling and decimation strobes from the 250 kHz system
// clock), the feature-extractor back-end (XOR differentiators, CIC decimators,
// offset/gain calibration, log table, normaliser), the configuration registers,
// the GRU-FC accelerator, the arg-max decoder and the SPI target.
//
// Every new feature vector (every 2^10 oversampling periods, 16.4 ms at the
// paper's clocks) starts one inference when the `run` control bit is set. The
// inference takes about 3200 cycles (12.8 ms at 250 kHz), so it always ends
// before the next vector. On completion the class is registered, `irq` is raised
// and stays high until the host reads the result over SPI. A vector that
// arrives while an inference is still running is dropped and counted in
// `overrun` (only possible with a shortened decimation window).
module kws_dbe
  import kws_pkg::*;
#(
  parameter int unsigned OVER_DIV  = 4,
  parameter int unsigned DECI_LOG2 = kws_pkg::DECI_LOG2
) (
  input  logic             clk,        // 250 kHz system clock
  input  logic             rst_n,
  input  logic [NPH-1:0]   pfm_phase [NCH],
  input  logic             spi_sclk,
  input  logic             spi_cs_n,
  input  logic             spi_mosi,
  output logic             spi_miso,
  output logic             irq,
  output logic [CLS_W-1:0] class_idx,
  output logic             class_valid,
  output logic             fv_valid,
  output logic             overrun
);

  logic                          over_en, deci_en;
  ch_cfg_t                       cfg [NCH];
  logic [RAW_W-1:0]              fv_raw [NCH];
  logic [LOG_W-1:0]              fv_log [NCH];
  act_t                          fv_norm [NCH];
  logic                          run, clear, start;
  logic                          busy, done;
  act_t                          scores [NCLS];
  logic                          wm_we, cfg_we, result_read;
  logic [$clog2(WMEM_BYTES)-1:0] wm_addr;
  logic [7:0]                    wm_data, cfg_data;
  logic [CFG_AW-1:0]             cfg_addr;

  clk_gen #(.OVER_DIV(OVER_DIV), .DECI_LOG2(DECI_LOG2)) u_clk (
    .clk, .rst_n, .over_en, .deci_en
  );

  fex_backend u_fex (
    .clk, .rst_n, .over_en, .deci_en, .phase(pfm_phase), .cfg,
    .fv_raw, .fv_log, .fv_norm, .fv_valid
  );

  config_reg u_cfg (
    .clk, .rst_n, .we(cfg_we), .addr(cfg_addr), .wdata(cfg_data),
    .clear_ack(start), .run, .clear, .cfg
  );

  assign start = fv_valid && run && !busy;

  gru_accel u_acc (
    .clk, .rst_n, .start, .clear, .fv(fv_norm), .busy, .done, .scores,
    .wm_we, .wm_waddr(wm_addr), .wm_wdata(wm_data)
  );

  argmax u_arg (
    .clk, .rst_n, .valid(done), .scores, .class_idx, .class_valid
  );

  spi_slave u_spi (
    .clk, .rst_n, .sclk(spi_sclk), .cs_n(spi_cs_n), .mosi(spi_mosi), .miso(spi_miso),
    .wm_we, .wm_addr, .wm_data, .cfg_we, .cfg_addr, .cfg_data,
    .result_byte({irq, 3'b000, class_idx}), .fv_raw, .result_read
  );

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      irq     <= 1'b0;
      overrun <= 1'b0;
    end else begin
      if (class_valid)      irq <= 1'b1;
      else if (result_read) irq <= 1'b0;
      if (fv_valid && run && busy) overrun <= 1'b1;
    end
  end

endmodule

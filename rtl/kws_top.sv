// kws_top: keyword-spotting chip top: PFM encoders and digital back-end.
//
// The rectifying band-pass filter bank delivers two rectified PWM signals per
// channel (BPF_P and BPF_N). Each channel's pair drives a switched-ring-oscillator
// PFM encoder (a behavioural model, sro_pfm), whose 15 phases feed the digital
// back-end (kws_dbe): XOR differentiators, decimation, calibration, log
// compression, normalisation, GRU-FC classifier, arg-max and SPI.
// The voltage-to-time converter and the band-pass filters are analog circuits
// without a model here, so the filter outputs are the top's inputs.
// Because the oscillators are behavioural models (delays, initial values),
// this level simulates but does not synthesise; kws_dbe is the synthesisable
// digital part. Parameters: OVER_DIV clocks per oversampling sample and
// 2^DECI_LOG2 samples per frame (defaults 4 and 10 give the 16.4 ms frame).
module kws_top
  import kws_pkg::*;
#(
  parameter int unsigned OVER_DIV  = 4,
  parameter int unsigned DECI_LOG2 = kws_pkg::DECI_LOG2
) (
  input  logic             clk,          // 250 kHz
  input  logic             rst_n,
  input  logic [NCH-1:0]   bpf_p,        // rectified PWM, positive half
  input  logic [NCH-1:0]   bpf_n,        // rectified PWM, negative half
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

  logic [NPH-1:0] pfm_phase [NCH];

  for (genvar c = 0; c < int'(NCH); c++) begin : g_pfm
    sro_pfm u_sro (.bpf_p(bpf_p[c]), .bpf_n(bpf_n[c]), .phase(pfm_phase[c]));
  end

  kws_dbe #(.OVER_DIV(OVER_DIV), .DECI_LOG2(DECI_LOG2)) u_dbe (
    .clk, .rst_n, .pfm_phase, .spi_sclk, .spi_cs_n, .spi_mosi, .spi_miso,
    .irq, .class_idx, .class_valid, .fv_valid, .overrun
  );

endmodule

// fv_calib: programmable offset subtractor (beta) and per-channel gain calibrator (alpha).
//
// FV_Cal = clamp((FV_Raw - beta) * alpha, 0, 4095). beta removes the count that
// the free-running PFM oscillator produces with no input; alpha (unsigned Q2.6,
// so 64 is a gain of 1) corrects gain mismatch between channels. Both follow the
// paper; their widths, the Q2.6 format and the clamping to the 12-bit range of
// the quantiser are choices of this design. Combinational.
module fv_calib
  import kws_pkg::*;
(
  input  logic [RAW_W-1:0]   raw,
  input  logic [RAW_W-1:0]   beta,
  input  logic [ALPHA_W-1:0] alpha,
  output logic [CAL_W-1:0]   cal
);

  logic [RAW_W-1:0]           diff;
  logic [RAW_W+ALPHA_W-1:0]   prod;
  logic [RAW_W+ALPHA_W-1:0]   scaled;

  always_comb begin
    diff   = (raw > beta) ? raw - beta : '0;
    prod   = (RAW_W+ALPHA_W)'(diff) * (RAW_W+ALPHA_W)'(alpha);
    scaled = prod >> ALPHA_FB;
    cal    = (scaled > (RAW_W+ALPHA_W)'(2**CAL_W - 1)) ? '1 : CAL_W'(scaled);
  end

endmodule

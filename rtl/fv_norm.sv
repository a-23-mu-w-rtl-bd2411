// fv_norm: input normaliser, FV_Norm = (FV_Log - mu) / sigma.
//
// mu and 1/sigma are the per-channel mean and inverse standard deviation of the
// log features over the training set, programmed through the configuration
// registers. FV_Log and mu are unsigned Q4.6, 1/sigma is unsigned Q4.8 and the
// result is a signed 14-bit Q6.8 activation, saturated (the 14-bit signed output
// and its 6.8 split follow the paper; the other formats are this design's).
// Combinational.
module fv_norm
  import kws_pkg::*;
(
  input  logic [LOG_W-1:0]  x,
  input  logic [LOG_W-1:0]  mu,
  input  logic [ISIG_W-1:0] inv_sigma,
  output act_t              y
);

  logic signed [LOG_W:0]          d;     // Q4.6 difference
  logic signed [LOG_W+ISIG_W+1:0] p;     // Q.14 product

  always_comb begin
    d = $signed({1'b0, x}) - $signed({1'b0, mu});
    p = d * $signed({1'b0, inv_sigma});
    // Q.14 -> Q.8 (arithmetic shift truncates towards minus infinity)
    y = sat_act(32'(p >>> (LOG_FB + ISIG_FB - ACT_FB)));
  end

endmodule

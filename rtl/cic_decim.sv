// cic_decim: first-order CIC decimation filter with output buffer, one channel.
//
// A first-order CIC with decimation R is an integrator at the input rate and a
// comb at the output rate; with the comb delay equal to one output sample this is
// the sum of the last R inputs, so it is built here as an integrate-and-dump:
// the accumulator adds the 4-bit delta-sigma count on every oversampling strobe
// and, on the decimation strobe, its total (including that strobe's input) is
// copied to the output buffer and the accumulator restarts. R = 2^10 as in the
// paper, which gives a 14-bit FV_Raw at about 61 Hz for 62.5 kHz oversampling.
//
// Timing: `dump` must coincide with an `en` strobe (clk_gen guarantees it);
// `raw` and `valid` are registered, `valid` is a one-cycle pulse.
module cic_decim
  import kws_pkg::*;
#(
  parameter int unsigned IN_W  = CNT_W,
  parameter int unsigned R_LOG2 = DECI_LOG2
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     en,     // input sample strobe
  input  logic                     dump,   // last input of a decimation window
  input  logic [IN_W-1:0]          din,
  output logic [IN_W+R_LOG2-1:0]   raw,    // FV_Raw
  output logic                     valid
);

  logic [IN_W+R_LOG2-1:0] acc;
  logic [IN_W+R_LOG2-1:0] sum;

  assign sum = acc + (IN_W+R_LOG2)'(din);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      acc   <= '0;
      raw   <= '0;
      valid <= 1'b0;
    end else begin
      valid <= 1'b0;
      if (en) begin
        if (dump) begin
          raw   <= sum;
          valid <= 1'b1;
          acc   <= '0;
        end else begin
          acc <= sum;
        end
      end
    end
  end

endmodule

// xor_diff: 1-bit XOR differentiator array of one channel (first-order delta-sigma TDC).
//
// The 15 phases of a ring oscillator are sampled at the oversampling rate
// f_S,Over. Each phase passes a first flip-flop (which also absorbs the
// asynchronous arrival) and a second one holding the previous sample; the XOR of
// the two tells whether that phase toggled during the last period, i.e. a
// 1 - z^-1 of the phase. The 15 XOR outputs are summed to a 4-bit count, the
// number of half-period steps the oscillator advanced (0..15), as in the paper's
// figure of the PFM encoder and XOR differentiator. The oscillator must advance
// less than one period per sample for the count to be exact.
//
// Timing: the flip-flops update on clock edges where `en` is high (the design
// runs on one clock with enables); `cnt` is combinational from the registers and
// valid for the sample taken at the last enabled edge.
module xor_diff
  import kws_pkg::*;
#(
  parameter int unsigned N = NPH
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 en,      // f_S,Over sampling strobe
  input  logic [N-1:0]         phase,   // ring-oscillator phases (asynchronous)
  output logic [$clog2(N+1)-1:0] cnt    // number of phases that toggled
);

  logic [N-1:0] q1, q2;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      q1 <= '0;
      q2 <= '0;
    end else if (en) begin
      q1 <= phase;
      q2 <= q1;
    end
  end

  always_comb begin
    cnt = '0;
    for (int i = 0; i < int'(N); i++)
      cnt += ($clog2(N+1))'(q1[i] ^ q2[i]);
  end

endmodule

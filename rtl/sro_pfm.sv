// sro_pfm: behavioural model of one switched-ring-oscillator PFM encoder channel.
//
// This is a behavioural model of an analog circuit, not synthesizable logic. On
// the chip each channel is a 15-stage ring oscillator whose bias current is
// switched by the two rectified PWM outputs of its band-pass filter (BPF_P and
// BPF_N, summed at the oscillator's current DAC), so its frequency is
//     f = F_FREE + K_SW * (BPF_P + BPF_N)
// and its phase integrates the rectified filter output; a 2*pi wrap is one
// pulse of the pulse-frequency-modulated output. The model advances an integer
// phase accumulator (units of 1e-9 of a 1/30 cycle) every TSTEP_NS and shows it on 15 phase outputs as the ring would: each
// half-period step of 1/30 of a cycle toggles exactly one stage, stage 0 first.
// The 15 outputs are the model's phase taps; their polarity pattern is the
// model's (a real ring alternates inverting stages, which does not matter to
// the XOR differentiator that follows). F_FREE and K_SW are this model's
// values; the paper gives no numbers for them. Keep F_FREE + 2*K_SW below
// 15 * f_S,Over / 30 so the differentiator never sees a full cycle per sample.
// Synthesis tools reject this model (it uses delays and initial values); it
// exists for simulation only.
module sro_pfm #(
  parameter int F_FREE   = 4000,   // free-running frequency, Hz
  parameter int K_SW     = 6000,   // frequency step per active input, Hz
  parameter int TSTEP_NS = 250     // model time step, ns (even)
) (
  input  logic        bpf_p,
  input  logic        bpf_n,
  output logic [14:0] phase
);

  localparam longint UNIT = 64'd1_000_000_000;   // one 1/30-cycle step
  localparam longint WRAP = 30 * UNIT;             // one full cycle

  longint ph;          // phase accumulator
  longint inc;         // phase advance per model step
  int     s;           // phase in 1/30-cycle steps, 0..29
  logic   tick;        // model time step

  initial begin
    ph   = 0;
    tick = 1'b0;
  end

  always #(TSTEP_NS / 2 * 1ns) tick = ~tick;

  always_comb begin
    inc = (longint'(F_FREE) + longint'(K_SW) * (longint'(bpf_p) + longint'(bpf_n)))
          * 30 * longint'(TSTEP_NS);
    s   = int'(ph / UNIT);
    for (int i = 0; i < 15; i++)
      phase[i] = (s < 15) ? (i < s) : (i >= s - 15);
  end

  always @(posedge tick)
    ph <= (ph + inc >= WRAP) ? ph + inc - WRAP : ph + inc;

endmodule

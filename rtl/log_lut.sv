// log_lut: logarithmic compression of the calibrated feature, FV_Log = log2(FV_Cal + 1).
//
// The paper compresses the 12-bit calibrated feature with a log(x+1) look-up
// table into a 10-bit value. This unit writes y = x + 1 as 2^e * (1 + m/64 + ...),
// takes e from a leading-one detector and the 6 bits below the leading one as m,
// and adds a 64-entry table of the fraction:
//     frac[m] = round(64 * log2(1 + m / 64))
// The output is unsigned Q4.6, so 0 .. 768 for x = 0 .. 4095 (the base of the
// logarithm and the Q4.6 format are choices of this design). The error against
// 64*log2(x+1) is below 2 LSB (truncating the mantissa
// to 6 bits costs up to 1.43 LSB, rounding the table up to 0.5). Combinational.
module log_lut
  import kws_pkg::*;
(
  input  logic [CAL_W-1:0] x,
  output logic [LOG_W-1:0] y
);

  function automatic logic [5:0] frac(input logic [5:0] m);
    case (m)
      6'd0: frac = 6'd0;
      6'd1: frac = 6'd1;
      6'd2: frac = 6'd3;
      6'd3: frac = 6'd4;
      6'd4: frac = 6'd6;
      6'd5: frac = 6'd7;
      6'd6: frac = 6'd8;
      6'd7: frac = 6'd10;
      6'd8: frac = 6'd11;
      6'd9: frac = 6'd12;
      6'd10: frac = 6'd13;
      6'd11: frac = 6'd15;
      6'd12: frac = 6'd16;
      6'd13: frac = 6'd17;
      6'd14: frac = 6'd18;
      6'd15: frac = 6'd19;
      6'd16: frac = 6'd21;
      6'd17: frac = 6'd22;
      6'd18: frac = 6'd23;
      6'd19: frac = 6'd24;
      6'd20: frac = 6'd25;
      6'd21: frac = 6'd26;
      6'd22: frac = 6'd27;
      6'd23: frac = 6'd28;
      6'd24: frac = 6'd29;
      6'd25: frac = 6'd30;
      6'd26: frac = 6'd31;
      6'd27: frac = 6'd32;
      6'd28: frac = 6'd34;
      6'd29: frac = 6'd35;
      6'd30: frac = 6'd35;
      6'd31: frac = 6'd36;
      6'd32: frac = 6'd37;
      6'd33: frac = 6'd38;
      6'd34: frac = 6'd39;
      6'd35: frac = 6'd40;
      6'd36: frac = 6'd41;
      6'd37: frac = 6'd42;
      6'd38: frac = 6'd43;
      6'd39: frac = 6'd44;
      6'd40: frac = 6'd45;
      6'd41: frac = 6'd46;
      6'd42: frac = 6'd47;
      6'd43: frac = 6'd47;
      6'd44: frac = 6'd48;
      6'd45: frac = 6'd49;
      6'd46: frac = 6'd50;
      6'd47: frac = 6'd51;
      6'd48: frac = 6'd52;
      6'd49: frac = 6'd52;
      6'd50: frac = 6'd53;
      6'd51: frac = 6'd54;
      6'd52: frac = 6'd55;
      6'd53: frac = 6'd56;
      6'd54: frac = 6'd56;
      6'd55: frac = 6'd57;
      6'd56: frac = 6'd58;
      6'd57: frac = 6'd59;
      6'd58: frac = 6'd60;
      6'd59: frac = 6'd60;
      6'd60: frac = 6'd61;
      6'd61: frac = 6'd62;
      6'd62: frac = 6'd63;
      6'd63: frac = 6'd63;
      default: frac = 6'd0;
    endcase
  endfunction

  logic [CAL_W:0] v;        // x + 1, 1 .. 4096
  logic [3:0]     e;        // position of the leading one
  logic [CAL_W+6:0] shifted;
  logic [5:0]     m;

  always_comb begin
    v = {1'b0, x} + 1'b1;
    e = '0;
    for (int i = 0; i <= CAL_W; i++)
      if (v[i]) e = 4'(i);
    // bring the leading one to bit CAL_W+6, the six bits below it are m
    shifted = (CAL_W+7)'(v) << (CAL_W - e + 6);
    m = shifted[CAL_W+5 -: 6];
    y = LOG_W'({e, 6'b0} + frac(m));
  end

endmodule

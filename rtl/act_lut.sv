// act_lut: look-up-table sigmoid / tanh unit of one processing element.
//
// Each processing element owns one of these units (the paper gives a LUT-based
// Sigmoid/Tanh unit per element; the table size and addressing are this design's
// choice). Input and output are signed Q6.8 activations (14 bits, 8 fractional).
// A single 64-entry table holds tanh on [0, 4) in steps of 1/16:
//     rom[i] = round(256 * tanh((i + 0.5) / 16))
// tanh(x) reads entry |x| * 16 (saturating at 1.0 above 4) and restores the sign.
// sigmoid(x) = (1 + tanh(x / 2)) / 2 reads entry |x| * 8, so it spans [-8, 8).
// Purely combinational; the processing element registers the result.
module act_lut
  import kws_pkg::*;
(
  input  act_t x,
  input  logic is_sigmoid,   // 1: sigmoid, 0: tanh
  output act_t y
);

  function automatic logic [8:0] rom(input logic [5:0] i);
    case (i)
      6'd0: rom = 9'd8;
      6'd1: rom = 9'd24;
      6'd2: rom = 9'd40;
      6'd3: rom = 9'd55;
      6'd4: rom = 9'd70;
      6'd5: rom = 9'd85;
      6'd6: rom = 9'd99;
      6'd7: rom = 9'd112;
      6'd8: rom = 9'd125;
      6'd9: rom = 9'd136;
      6'd10: rom = 9'd147;
      6'd11: rom = 9'd158;
      6'd12: rom = 9'd167;
      6'd13: rom = 9'd176;
      6'd14: rom = 9'd184;
      6'd15: rom = 9'd192;
      6'd16: rom = 9'd198;
      6'd17: rom = 9'd204;
      6'd18: rom = 9'd210;
      6'd19: rom = 9'd215;
      6'd20: rom = 9'd219;
      6'd21: rom = 9'd223;
      6'd22: rom = 9'd227;
      6'd23: rom = 9'd230;
      6'd24: rom = 9'd233;
      6'd25: rom = 9'd236;
      6'd26: rom = 9'd238;
      6'd27: rom = 9'd240;
      6'd28: rom = 9'd242;
      6'd29: rom = 9'd243;
      6'd30: rom = 9'd245;
      6'd31: rom = 9'd246;
      6'd32: rom = 9'd247;
      6'd33: rom = 9'd248;
      6'd34: rom = 9'd249;
      6'd35: rom = 9'd250;
      6'd36: rom = 9'd251;
      6'd37: rom = 9'd251;
      6'd38: rom = 9'd252;
      6'd39: rom = 9'd252;
      6'd40: rom = 9'd253;
      6'd41: rom = 9'd253;
      6'd42: rom = 9'd253;
      6'd43: rom = 9'd254;
      6'd44: rom = 9'd254;
      6'd45: rom = 9'd254;
      6'd46: rom = 9'd254;
      6'd47: rom = 9'd255;
      6'd48: rom = 9'd255;
      6'd49: rom = 9'd255;
      6'd50: rom = 9'd255;
      6'd51: rom = 9'd255;
      6'd52: rom = 9'd255;
      6'd53: rom = 9'd255;
      6'd54: rom = 9'd255;
      6'd55: rom = 9'd256;
      6'd56: rom = 9'd256;
      6'd57: rom = 9'd256;
      6'd58: rom = 9'd256;
      6'd59: rom = 9'd256;
      6'd60: rom = 9'd256;
      6'd61: rom = 9'd256;
      6'd62: rom = 9'd256;
      6'd63: rom = 9'd256;
      default: rom = 9'd256;
    endcase
  endfunction

  logic               neg;
  logic [ACT_W-1:0]   mag;      // |x|, Q6.8, at most 8192
  logic [ACT_W-1:0]   idx_full; // |x| scaled to table steps
  logic [8:0]         tv;       // tanh magnitude, Q1.8
  logic signed [10:0] ts;       // signed tanh, Q2.8

  always_comb begin
    neg      = x[ACT_W-1];
    mag      = neg ? ACT_W'(-x) : ACT_W'(x);
    idx_full = is_sigmoid ? (mag >> 5) : (mag >> 4);
    tv       = (idx_full > 14'd63) ? 9'd256 : rom(idx_full[5:0]);
    ts       = neg ? -$signed({2'b00, tv}) : $signed({2'b00, tv});
    if (is_sigmoid) y = act_t'((ts + 11'sd256) >>> 1);
    else            y = act_t'(ts);
  end

endmodule

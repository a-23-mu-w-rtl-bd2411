// hpe: heterogeneous processing element of the GRU-FC accelerator.
//
// One 14-bit signed multiplier, a 24-bit accumulator and a look-up-table
// sigmoid/tanh unit, with operand multiplexers in front of the multiplier, as
// in the paper. The multiplexers choose between the weight-memory byte, the
// broadcast input (feature vector or a hidden state from the output buffer),
// this element's own lane of the output buffer, and the element's registers.
// That lets the same element run the matrix-vector products, the element-wise
// products of the GRU gates, 1 - z, and the activation functions.
//
// Registers: acc (Q10.14), act (Q6.8, the last activation or saturated result)
// and t (Q6.8, a held gate value). The micro-operations are listed in kws_pkg;
// each takes one cycle. Accumulator additions saturate at 24 bits. The micro-op
// set and the fixed-point scaling are this design's choice. `t` must only hold
// a gate value in 0 .. 1.0 (256), so that 1 - t fits the 14-bit operand; the
// controller only loads it from sigmoid outputs.
module hpe
  import kws_pkg::*;
(
  input  logic           clk,
  input  logic           rst_n,
  input  hpe_op_e        op,
  input  wgt_t           w,       // weight or bias byte of this element
  input  act_t           bcast,   // broadcast input operand
  input  acc_t           own,     // this element's lane of the output-buffer word
  output acc_t           acc_o,
  output act_t           act_o
);

  localparam act_t ONE = act_t'(1 << ACT_FB);
  localparam logic signed [ACC_W+1:0] ACC_MAX = (ACC_W+2)'((1 << (ACC_W-1)) - 1);
  localparam logic signed [ACC_W+1:0] ACC_MIN = -ACC_MAX - 1;

  acc_t acc;
  act_t act, t;

  act_t                       ma, mb;
  logic signed [2*ACT_W-1:0]  prod;
  logic signed [2*ACT_W-1:0]  prod_s;   // product aligned to the accumulator
  logic signed [ACC_W+1:0]    addend, base, sum;
  acc_t                       sum_sat;
  act_t                       sat_v, lut_y;
  act_t                       own_act;

  assign own_act = act_t'(own);

  // operand multiplexers and multiplier
  always_comb begin
    ma = act_t'(w);
    mb = bcast;
    unique case (op)
      OP_MULOWN: begin ma = act;      mb = own_act; end
      OP_MULT:   begin ma = t;        mb = own_act; end
      OP_MAC1MT: begin ma = ONE - t;  mb = act;     end
      default:   begin ma = act_t'(w); mb = bcast; end
    endcase
    prod   = ma * mb;
    // weight x activation is already Q.14; activation x activation is Q.16
    prod_s = (op == OP_MAC) ? prod : (prod >>> (2*ACT_FB - ACC_FB));
  end

  // adder with saturation
  always_comb begin
    base   = (op == OP_MAC || op == OP_MAC1MT || op == OP_ADDOWN) ? (ACC_W+2)'(acc) : '0;
    addend = (op == OP_ADDOWN) ? (ACC_W+2)'(own) :
             (op == OP_BIAS)   ? (ACC_W+2)'($signed(w)) <<< (ACC_FB - W_FB) :
                                 (ACC_W+2)'(prod_s);
    sum    = base + addend;
    if (sum > ACC_MAX)      sum_sat = acc_t'(ACC_MAX);
    else if (sum < ACC_MIN) sum_sat = acc_t'(ACC_MIN);
    else                                       sum_sat = acc_t'(sum);
  end

  // Q10.14 accumulator to a Q6.8 activation
  assign sat_v = sat_act(32'(acc >>> (ACC_FB - ACT_FB)));

  act_lut u_lut (.x(sat_v), .is_sigmoid(op == OP_SIG), .y(lut_y));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      acc <= '0;
      act <= '0;
      t   <= '0;
    end else begin
      unique case (op)
        OP_BIAS, OP_MAC, OP_MULOWN, OP_ADDOWN, OP_MULT, OP_MAC1MT: acc <= sum_sat;
        OP_SAT:            act <= sat_v;
        OP_SIG, OP_TANH:   act <= lut_y;
        OP_LDT:            t   <= own_act;
        default: ;
      endcase
    end
  end

  assign acc_o = acc;
  assign act_o = act;

endmodule

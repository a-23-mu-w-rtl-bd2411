// tb_hpe: drives one processing element with a random stream of operations and
// operands, plus a directed run of large products that drives the accumulator
// into positive and negative saturation, and compares the accumulator and the
// activation register after every cycle with a model of each operation:
// BIAS acc = w * 256; MAC acc += w * x; SAT/SIG/TANH act = f(sat14(acc >> 6));
// MULOWN acc = act * own >> 2; ADDOWN acc += own; LDT t = own;
// MULT acc = t * own >> 2; MAC1MT acc += (256 - t) * act >> 2, all saturating
// at 24 bits. LDT only ever loads a sigmoid output (0 .. 256), as in the
// network, so 1 - t stays inside the 14-bit operand. Counts how often saturation occurred and fails if it never did.
module tb_hpe;
  import kws_pkg::*;
  import kws_ref_pkg::*;
  logic clk = 0, rst_n = 0;
  hpe_op_e op;
  wgt_t w;
  act_t bcast;
  acc_t own, acc_o;
  act_t act_o;
  int checks = 0, failures = 0, n_sat_p = 0, n_sat_n = 0;
  int m_acc = 0, m_act = 0, m_t = 0;

  hpe dut (.clk, .rst_n, .op, .w, .bcast, .own, .acc_o, .act_o);
  always #5 clk = ~clk;

  initial begin
    #1ms; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic apply(hpe_op_e o, int wv, int bv, int ov);
    int own_act;
    op = o; w = wgt_t'(wv); bcast = act_t'(bv); own = acc_t'(ov);
    own_act = int'(act_t'(ov));
    @(posedge clk); #1;
    case (o)
      OP_BIAS:   m_acc = wv * 256;
      OP_MAC:    m_acc = sat24(longint'(m_acc) + wv * bv);
      OP_SAT:    m_act = act_of(m_acc);
      OP_SIG:    m_act = sigm_q(act_of(m_acc));
      OP_TANH:   m_act = tanh_q(act_of(m_acc));
      OP_MULOWN: m_acc = sat24(asr(longint'(m_act) * own_act, 2));
      OP_ADDOWN: m_acc = sat24(longint'(m_acc) + ov);
      OP_LDT:    m_t   = own_act;
      OP_MULT:   m_acc = sat24(asr(longint'(m_t) * own_act, 2));
      OP_MAC1MT: m_acc = sat24(longint'(m_acc) + asr(longint'(256 - m_t) * m_act, 2));
      default: ;
    endcase
    if (m_acc == 8388607) n_sat_p++;
    if (m_acc == -8388608) n_sat_n++;
    checks++;
    if (int'(acc_o) != m_acc || int'(act_o) != m_act) begin
      failures++;
      if (failures < 10) $display("op %s: acc %0d/%0d act %0d/%0d", o.name(), acc_o, m_acc, act_o, m_act);
    end
  endtask

  initial begin
    op = OP_NOP; w = '0; bcast = '0; own = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    @(posedge clk); #1;
    checks++;
    if (acc_o != '0 || act_o != '0) failures++;
    for (int s = 0; s < 2; s++) begin
      apply(OP_BIAS, s ? -128 : 127, 0, 0);
      repeat (12) apply(OP_MAC, s ? -128 : 127, 8191, 0);
      apply(OP_SAT, 0, 0, 0);
      apply(OP_ADDOWN, 0, 0, s ? -8388608 : 8388607);
    end
    for (int i = 0; i < 20000; i++) begin
      automatic hpe_op_e o = hpe_op_e'($urandom_range(0, 13));
      automatic int ov = int'($urandom_range(0, 32'hffffff));
      if (ov >= 8388608) ov -= 16777216;
      if (o == OP_LDT) ov = int'($urandom_range(0, 256));   // a gate value in [0, 1]
      apply(o, int'($urandom_range(0, 255)) - 128, int'($urandom_range(0, 16383)) - 8192, ov);
    end
    checks++;
    if (n_sat_p == 0 || n_sat_n == 0) begin failures++; $display("saturation not reached"); end
    $display("saturation hits: +%0d -%0d", n_sat_p, n_sat_n);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

// gru_ctrl: finite-state machine that sequences the GRU-FC network on the 8 HPEs.
//
// The network is 16 inputs -> GRU(48) -> GRU(48) -> FC(12), the configuration
// of the paper. The 8 processing elements each compute one neuron, so a GRU
// layer runs as 6 groups of 8 neurons and the FC layer as 2 groups. For every
// group the controller issues one micro-operation per cycle, reading the weight
// memory strictly sequentially (the host stores the weights in that order):
//
//   reset gate r : bias, W_ir * x (I cycles), W_hr * h (48 cycles), sigmoid, store
//   update gate z: the same with z's weights, store
//   candidate n  : b_in + W_in * x stored as a partial sum, then b_hn + W_hn * h,
//                  saturate, times r, plus the stored partial sum, tanh
//   new state    : h' = z * h + (1 - z) * n, saturate, store in the other bank
//   FC group     : bias, W * h2 (48 cycles), saturate, store as class scores
//
// Biases: b_r and b_z are b_ih + b_hh folded into one byte; b_in and b_hn are
// kept apart because r multiplies only the hidden part (PyTorch's GRU).
// I = 16 for layer 1 (the feature vector) and 48 for layer 2 (layer 1's new
// state). Memory use: 3026 of the 3072 words.
//
// Pipeline: the micro-op and the memory addresses are issued together (stage 0);
// the memories answer one cycle later, when the registered micro-op reaches the
// elements (stage 1). `clear` at `start` zeroes both hidden states first.
// `done` pulses once the last score is in place; one inference takes 3212 cycles.
// The schedule and the weight order are this design's choice; the paper gives
// the network, the 8 elements, the FSM and the 12.4 ms latency.
module gru_ctrl
  import kws_pkg::*;
(
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 start,
  input  logic                 clear,
  output logic                 busy,
  output logic                 done,
  // stage-0 memory requests
  output logic                 wm_re,
  output logic [WMEM_AW-1:0]   wm_raddr,
  output logic [OBUF_AW-1:0]   ob_raddr,
  // stage-1 micro-operation
  output uop_t                 uop1
);

  typedef enum logic [4:0] {
    S_IDLE, S_CLR, S_BIAS, S_MACX, S_MACH, S_SIG, S_WRG,
    S_WRNX, S_BIASH, S_SATH, S_MULR, S_ADDNX, S_TANH,
    S_LDZ, S_MULZH, S_MAC1M, S_SATU, S_WRH, S_SATF, S_WRF, S_DONE
  } state_e;

  localparam int unsigned KW = $clog2(NHID);

  state_e             st;
  logic [1:0]         layer;   // 0: GRU 1, 1: GRU 2, 2: FC
  logic [2:0]         grp;
  logic [1:0]         gate;    // 0: r, 1: z, 2: n
  logic [KW-1:0]      k;
  logic               b1, b2;  // current bank of each hidden state
  logic [WMEM_AW-1:0] waddr_q;
  uop_t               u0;

  // sizes of the current layer
  logic [KW-1:0]      n_in;
  logic [2:0]         n_grp;
  logic [OBUF_AW-1:0] h_cur, h_new, x_base;

  always_comb begin
    n_in   = (layer == 2'd0) ? KW'(NIN - 1) : KW'(NHID - 1);
    n_grp  = (layer == 2'd2) ? 3'd1 : 3'(HWORDS - 1);
    h_cur  = (layer == 2'd0) ? OBUF_AW'(OB_H1 + (b1 ? HWORDS : 0))
                             : OBUF_AW'(OB_H2 + (b2 ? HWORDS : 0));
    h_new  = (layer == 2'd0) ? OBUF_AW'(OB_H1 + (b1 ? 0 : HWORDS))
                             : OBUF_AW'(OB_H2 + (b2 ? 0 : HWORDS));
    // layer 2 reads layer 1's newest state, FC reads layer 2's
    x_base = (layer == 2'd1) ? OBUF_AW'(OB_H1 + (b1 ? HWORDS : 0))
                             : OBUF_AW'(OB_H2 + (b2 ? HWORDS : 0));
  end

  // stage-0 micro-op and read address
  always_comb begin
    u0       = '0;
    u0.op    = OP_NOP;
    u0.bsrc  = BSRC_FV;
    u0.k     = k;
    wm_re    = 1'b0;
    ob_raddr = '0;
    unique case (st)
      S_CLR:   begin u0.op = OP_WRZ; u0.waddr = OBUF_AW'(k); end
      S_BIAS, S_BIASH: begin u0.op = OP_BIAS; wm_re = 1'b1; end
      S_MACX:  begin
        u0.op = OP_MAC; wm_re = 1'b1;
        u0.bsrc = (layer == 2'd0) ? BSRC_FV : BSRC_OBUF;
        ob_raddr = x_base + OBUF_AW'(k >> 3);
      end
      S_MACH:  begin
        u0.op = OP_MAC; wm_re = 1'b1; u0.bsrc = BSRC_OBUF;
        ob_raddr = h_cur + OBUF_AW'(k >> 3);
      end
      S_SIG:   u0.op = OP_SIG;
      S_WRG:   begin u0.op = OP_WR; u0.waddr = (gate == 2'd0) ? OBUF_AW'(OB_R) : OBUF_AW'(OB_Z); end
      S_WRNX:  begin u0.op = OP_WRACC; u0.waddr = OBUF_AW'(OB_NX); end
      S_SATH, S_SATU, S_SATF: u0.op = OP_SAT;
      S_MULR:  begin u0.op = OP_MULOWN; ob_raddr = OBUF_AW'(OB_R); end
      S_ADDNX: begin u0.op = OP_ADDOWN; ob_raddr = OBUF_AW'(OB_NX); end
      S_TANH:  u0.op = OP_TANH;
      S_LDZ:   begin u0.op = OP_LDT; ob_raddr = OBUF_AW'(OB_Z); end
      S_MULZH: begin u0.op = OP_MULT; ob_raddr = h_cur + OBUF_AW'(grp); end
      S_MAC1M: u0.op = OP_MAC1MT;
      S_WRH:   begin u0.op = OP_WR; u0.waddr = h_new + OBUF_AW'(grp); end
      S_WRF:   begin
        u0.op = OP_WR; u0.waddr = OBUF_AW'(OB_SC) + OBUF_AW'(grp);
        u0.score = 1'b1; u0.sgrp = grp[0];
      end
      default: ;
    endcase
  end

  assign wm_raddr = waddr_q;
  assign busy     = (st != S_IDLE);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st      <= S_IDLE;
      layer   <= '0;
      grp     <= '0;
      gate    <= '0;
      k       <= '0;
      b1      <= 1'b0;
      b2      <= 1'b0;
      waddr_q <= '0;
      uop1    <= '0;
      done    <= 1'b0;
    end else begin
      uop1 <= u0;
      done <= (st == S_DONE);
      if (wm_re) waddr_q <= waddr_q + 1'b1;
      unique case (st)
        S_IDLE: if (start) begin
          layer   <= '0;
          grp     <= '0;
          gate    <= '0;
          k       <= '0;
          waddr_q <= '0;
          st      <= clear ? S_CLR : S_BIAS;
        end
        S_CLR: begin
          k <= k + 1'b1;
          if (k == KW'(4*HWORDS - 1)) begin k <= '0; st <= S_BIAS; end
        end
        S_BIAS: begin k <= '0; st <= S_MACX; end
        S_MACX: begin
          k <= k + 1'b1;
          if (k == n_in) begin
            k <= '0;
            if (layer == 2'd2)      st <= S_SATF;
            else if (gate == 2'd2)  st <= S_WRNX;
            else                    st <= S_MACH;
          end
        end
        S_MACH: begin
          k <= k + 1'b1;
          if (k == KW'(NHID - 1)) begin
            k  <= '0;
            st <= (gate == 2'd2) ? S_SATH : S_SIG;
          end
        end
        S_SIG:   st <= S_WRG;
        S_WRG:   begin gate <= gate + 1'b1; st <= S_BIAS; end
        S_WRNX:  st <= S_BIASH;
        S_BIASH: begin k <= '0; st <= S_MACH; end
        S_SATH:  st <= S_MULR;
        S_MULR:  st <= S_ADDNX;
        S_ADDNX: st <= S_TANH;
        S_TANH:  st <= S_LDZ;
        S_LDZ:   st <= S_MULZH;
        S_MULZH: st <= S_MAC1M;
        S_MAC1M: st <= S_SATU;
        S_SATU:  st <= S_WRH;
        S_WRH: begin
          gate <= '0;
          if (grp == n_grp) begin
            grp <= '0;
            if (layer == 2'd0) b1 <= ~b1; else b2 <= ~b2;
            layer <= layer + 1'b1;
          end else begin
            grp <= grp + 1'b1;
          end
          st <= S_BIAS;
        end
        S_SATF:  st <= S_WRF;
        S_WRF: begin
          if (grp == n_grp) st <= S_DONE;
          else begin grp <= grp + 1'b1; st <= S_BIAS; end
        end
        S_DONE:  st <= S_IDLE;
        default: st <= S_IDLE;
      endcase
    end
  end

  // the sequence must never run past the end of the weight memory
  a_wmem_range: assert property (@(posedge clk) disable iff (!rst_n)
    wm_re |-> (waddr_q < WMEM_AW'(WMEM_DEPTH)));

endmodule

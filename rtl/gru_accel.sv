// gru_accel: GRU-FC accelerator: controller, 8 HPEs, weight memory and output buffer.
//
// Runs one step of the 16-48-48-12 GRU-FC network per feature vector. The
// vector is latched at `start`; the controller (gru_ctrl) streams weights from
// the 24 KB weight memory, one byte per element per cycle, and broadcasts either
// a feature (layer 1) or a hidden state read from the 1.3 KB output buffer to
// all 8 elements. Elements write activations, partial sums and new hidden
// states back to the output buffer. The 12 class scores are captured in a
// register array as they are written and held for the arg-max decoder.
// The network shape, the 8 elements and the two memory sizes follow the paper;
// the instruction schedule, memory layout and operand routing are this
// design's own.
//
// Interface: `start` (with `clear` to begin a new utterance from a zero state)
// is accepted when `busy` is low; `done` pulses when `scores` are updated.
// The weight memory is written byte-wise by the host through `wm_we/wm_waddr/
// wm_wdata`, which should only happen while the accelerator is idle.
module gru_accel
  import kws_pkg::*;
(
  input  logic                          clk,
  input  logic                          rst_n,
  input  logic                          start,
  input  logic                          clear,
  input  act_t                          fv     [NIN],
  output logic                          busy,
  output logic                          done,
  output act_t                          scores [NCLS],
  input  logic                          wm_we,
  input  logic [$clog2(WMEM_BYTES)-1:0] wm_waddr,
  input  logic [W_W-1:0]                wm_wdata
);

  act_t                          fv_q [NIN];
  logic                          wm_re;
  logic [WMEM_AW-1:0]            wm_raddr;
  logic [NHPE*W_W-1:0]           wm_rdata;
  logic [OBUF_AW-1:0]            ob_raddr;
  logic [NHPE-1:0][OBUF_LW-1:0]  ob_rdata, ob_wdata;
  logic                          ob_we;
  uop_t                          uop1;
  act_t                          bcast;
  acc_t                          acc_l [NHPE];
  act_t                          act_l [NHPE];

  gru_ctrl u_ctrl (
    .clk, .rst_n, .start(start && !busy), .clear, .busy, .done,
    .wm_re, .wm_raddr, .ob_raddr, .uop1
  );

  wmem u_wmem (
    .clk, .re(wm_re), .raddr(wm_raddr), .rdata(wm_rdata),
    .we(wm_we), .waddr(wm_waddr), .wdata(wm_wdata)
  );

  obuf u_obuf (
    .clk, .raddr(ob_raddr), .rdata(ob_rdata),
    .we(ob_we), .waddr(uop1.waddr), .wdata(ob_wdata)
  );

  // broadcast operand
  always_comb begin
    if (uop1.bsrc == BSRC_FV) bcast = fv_q[uop1.k[$clog2(NIN)-1:0]];
    else                      bcast = act_t'(ob_rdata[uop1.k[2:0]]);
  end

  for (genvar l = 0; l < int'(NHPE); l++) begin : g_hpe
    hpe u_hpe (
      .clk, .rst_n, .op(uop1.op),
      .w(wgt_t'(wm_rdata[l*W_W +: W_W])),
      .bcast, .own(acc_t'(ob_rdata[l])),
      .acc_o(acc_l[l]), .act_o(act_l[l])
    );
  end

  // output-buffer write data
  always_comb begin
    ob_we = (uop1.op == OP_WR) || (uop1.op == OP_WRZ) || (uop1.op == OP_WRACC);
    for (int l = 0; l < int'(NHPE); l++) begin
      unique case (uop1.op)
        OP_WR:    ob_wdata[l] = OBUF_LW'(act_l[l]);
        OP_WRACC: ob_wdata[l] = OBUF_LW'(acc_l[l]);
        default:  ob_wdata[l] = '0;
      endcase
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int c = 0; c < int'(NIN); c++)  fv_q[c]   <= '0;
      for (int c = 0; c < int'(NCLS); c++) scores[c] <= '0;
    end else begin
      if (start && !busy)
        for (int c = 0; c < int'(NIN); c++) fv_q[c] <= fv[c];
      if (uop1.op == OP_WR && uop1.score)
        for (int l = 0; l < int'(NHPE); l++)
          if (int'(uop1.sgrp) * int'(NHPE) + l < int'(NCLS))
            scores[int'(uop1.sgrp) * int'(NHPE) + l] <= act_l[l];
    end
  end

endmodule

// config_reg: configuration registers of the digital back-end.
//
// Holds the per-channel offset (beta), gain (alpha), log-feature mean (mu) and
// inverse standard deviation (1/sigma), and a control byte, all written byte by
// byte from SPI. The paper makes beta, alpha and the normaliser programmable and
// shows a "Config Reg" block; the byte map (kws_pkg CFG_*) and the reset values
// (beta 0, alpha 1.0, mu 0, 1/sigma 1.0) are this design's choice.
//
// Control byte: bit 0 `run` starts an inference on every new feature vector;
// bit 1 `clear` makes the next inference start from a zero hidden state and
// drops back to 0 when that inference starts (`clear_ack`).
module config_reg
  import kws_pkg::*;
(
  input  logic              clk,
  input  logic              rst_n,
  input  logic              we,
  input  logic [CFG_AW-1:0] addr,
  input  logic [7:0]        wdata,
  input  logic              clear_ack,
  output logic              run,
  output logic              clear,
  output ch_cfg_t           cfg [NCH]
);

  logic [CFG_AW-1:0] rel;
  logic [3:0]        ch;
  logic [2:0]        off;

  assign rel = addr - CFG_AW'(CFG_CH_BASE);
  assign ch  = rel[6:3];
  assign off = rel[2:0];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      run   <= 1'b0;
      clear <= 1'b0;
      for (int c = 0; c < int'(NCH); c++) begin
        cfg[c].beta      <= '0;
        cfg[c].alpha     <= ALPHA_W'(1 << ALPHA_FB);
        cfg[c].mu        <= '0;
        cfg[c].inv_sigma <= ISIG_W'(1 << ISIG_FB);
      end
    end else begin
      if (clear_ack) clear <= 1'b0;
      if (we) begin
        if (addr == CFG_AW'(CFG_CTRL)) begin
          run   <= wdata[0];
          clear <= wdata[1];
        end else if (addr >= CFG_AW'(CFG_CH_BASE) &&
                     addr <  CFG_AW'(CFG_CH_BASE + 8*NCH)) begin
          unique case (int'(off))
            CFG_BETA_L: cfg[ch].beta[7:0]               <= wdata;
            CFG_BETA_H: cfg[ch].beta[RAW_W-1:8]         <= wdata[RAW_W-9:0];
            CFG_ALPHA:  cfg[ch].alpha                   <= wdata;
            CFG_MU_L:   cfg[ch].mu[7:0]                 <= wdata;
            CFG_MU_H:   cfg[ch].mu[LOG_W-1:8]           <= wdata[LOG_W-9:0];
            CFG_ISIG_L: cfg[ch].inv_sigma[7:0]          <= wdata;
            CFG_ISIG_H: cfg[ch].inv_sigma[ISIG_W-1:8]   <= wdata[ISIG_W-9:0];
            default: ;
          endcase
        end
      end
    end
  end

endmodule

// kws_pkg: constants and types shared by the keyword-spotting digital back-end.
//
// The back-end turns 16 channels of ring-oscillator phase (pulse-frequency
// modulated, 15 phases each) into a 16 x 14-bit normalised feature vector every
// 1024 oversampling periods, runs it through a 2-layer 48-unit GRU and a 12-class
// fully connected layer, and reports the arg-max class over SPI.
//
// Numbers that follow the paper: 16 channels, 15 oscillator phases, a 4-bit
// per-sample count, decimation by 2^10, a 12-bit calibrated feature, a 10-bit
// log output, 14-bit activations with 8 fractional bits, 8-bit weights, a 24-bit
// accumulator, 8 processing elements, 48 hidden units, 12 classes, a 24 KB weight
// memory and a 1.3 KB output buffer. Fixed-point formats of the calibration
// constants, of the weights and the exact memory layouts are choices of this design.
package kws_pkg;

  // ---------------- feature extractor ----------------
  localparam int unsigned NCH       = 16;  // BPF / PFM channels
  localparam int unsigned NPH       = 15;  // phases per ring oscillator
  localparam int unsigned CNT_W     = 4;   // XOR-differentiator sum width (0..15)
  localparam int unsigned DECI_LOG2 = 10;  // decimation 2^10
  localparam int unsigned RAW_W     = CNT_W + DECI_LOG2; // FV_Raw width (14)
  localparam int unsigned CAL_W     = 12;  // FV_Cal, the 12-bit quantiser output
  localparam int unsigned ALPHA_W   = 8;   // gain, unsigned Q2.6
  localparam int unsigned ALPHA_FB  = 6;
  localparam int unsigned LOG_W     = 10;  // FV_Log, unsigned Q4.6 of log2(x+1)
  localparam int unsigned LOG_FB    = 6;
  localparam int unsigned ISIG_W    = 12;  // 1/sigma, unsigned Q4.8
  localparam int unsigned ISIG_FB   = 8;

  // ---------------- classifier ----------------
  localparam int unsigned ACT_W   = 14;    // activations, signed Q6.8
  localparam int unsigned ACT_FB  = 8;
  localparam int unsigned W_W     = 8;     // weights and biases, signed Q2.6
  localparam int unsigned W_FB    = 6;
  localparam int unsigned ACC_W   = 24;    // accumulator, signed Q10.14
  localparam int unsigned ACC_FB  = W_FB + ACT_FB;  // 14
  localparam int unsigned NHPE    = 8;     // heterogeneous processing elements
  localparam int unsigned NIN     = NCH;   // network input width
  localparam int unsigned NHID    = 48;    // GRU units per layer
  localparam int unsigned NCLS    = 12;    // classes
  localparam int unsigned CLS_W   = 4;

  // Weight memory: 24 KB, one byte per processing element per word.
  localparam int unsigned WMEM_BYTES = 24 * 1024;
  localparam int unsigned WMEM_DEPTH = WMEM_BYTES / NHPE;   // 3072 words of 64 bits
  localparam int unsigned WMEM_AW    = $clog2(WMEM_DEPTH);

  // Output buffer: 56 words x 8 lanes x 24 bits = 1344 bytes (1.3 KB).
  localparam int unsigned OBUF_DEPTH = 56;
  localparam int unsigned OBUF_AW    = $clog2(OBUF_DEPTH);
  localparam int unsigned OBUF_LW    = 24;                  // lane width in the SRAM
  localparam int unsigned HWORDS     = NHID / NHPE;         // 6 words per hidden vector

  // Output-buffer map (word addresses).
  localparam int unsigned OB_H1   = 0;    // layer-1 state, banks at 0 and 6
  localparam int unsigned OB_H2   = 12;   // layer-2 state, banks at 12 and 18
  localparam int unsigned OB_R    = 24;   // reset gate of the current group
  localparam int unsigned OB_Z    = 25;   // update gate of the current group
  localparam int unsigned OB_NX   = 26;   // input part of the candidate gate
  localparam int unsigned OB_SC   = 27;   // class scores, words 27 and 28

  // SPI commands (first byte of a transaction)
  typedef enum logic [7:0] {
    CMD_WR_WMEM   = 8'h01,  // addr_hi, addr_lo, data... : weight-memory bytes
    CMD_WR_CFG    = 8'h02,  // addr_hi, addr_lo, data... : configuration bytes
    CMD_RD_RESULT = 8'h03,  // -> {irq, 3'b0, class}; clears the interrupt
    CMD_RD_FVRAW  = 8'h04   // -> FV_Raw of channels 0..15, high byte first
  } spi_cmd_e;

  // Configuration byte map
  localparam int unsigned CFG_CTRL    = 'h000;  // bit0 run, bit1 clear state
  localparam int unsigned CFG_CH_BASE = 'h010;  // + 8*channel + offset below
  localparam int unsigned CFG_BETA_L  = 0, CFG_BETA_H = 1, CFG_ALPHA = 2,
                          CFG_MU_L    = 3, CFG_MU_H   = 4,
                          CFG_ISIG_L  = 5, CFG_ISIG_H = 6;
  localparam int unsigned CFG_AW      = 9;

  typedef logic signed [ACT_W-1:0] act_t;
  typedef logic signed [W_W-1:0]   wgt_t;
  typedef logic signed [ACC_W-1:0] acc_t;

  // Micro-operations executed by every processing element in lock step.
  typedef enum logic [3:0] {
    OP_NOP,
    OP_BIAS,    // acc <= bias << 8
    OP_MAC,     // acc <= acc + w * bcast
    OP_SAT,     // act <= sat(acc >> 6)
    OP_SIG,     // act <= sigmoid(sat(acc >> 6))
    OP_TANH,    // act <= tanh(sat(acc >> 6))
    OP_MULOWN,  // acc <= (act * own) >> 2
    OP_ADDOWN,  // acc <= acc + own (a stored 24-bit partial sum)
    OP_LDT,     // t   <= own
    OP_MULT,    // acc <= (t * own) >> 2
    OP_MAC1MT,  // acc <= acc + (((1 - t) * act) >> 2)
    OP_WR,      // output buffer[addr] <= act (all lanes)
    OP_WRZ,     // output buffer[addr] <= 0
    OP_WRACC    // output buffer[addr] <= acc (all lanes)
  } hpe_op_e;

  // Source of the broadcast operand of OP_MAC.
  typedef enum logic {
    BSRC_FV   = 1'b0,   // the latched input feature vector
    BSRC_OBUF = 1'b1    // one lane of the output-buffer read word
  } bsrc_e;

  // Micro-operation as it travels to the processing elements.
  typedef struct packed {
    hpe_op_e                 op;
    bsrc_e                   bsrc;
    logic [$clog2(NHID)-1:0] k;       // input index for the broadcast operand
    logic [OBUF_AW-1:0]      waddr;   // output-buffer write address for OP_WR/OP_WRZ
    logic                    score;   // OP_WR of class scores
    logic                    sgrp;    // which score group (0: classes 0..7, 1: 8..11)
  } uop_t;

  // Per-channel calibration and normalisation constants.
  typedef struct packed {
    logic [RAW_W-1:0]   beta;      // offset of the free-running oscillator
    logic [ALPHA_W-1:0] alpha;     // gain, Q2.6
    logic [LOG_W-1:0]   mu;        // mean of FV_Log, Q4.6
    logic [ISIG_W-1:0]  inv_sigma; // 1/sigma, Q4.8
  } ch_cfg_t;

  // Saturate a wide signed value to ACT_W bits.
  function automatic act_t sat_act(input logic signed [31:0] v);
    if (v > 32'sd8191)       return act_t'(14'sd8191);
    else if (v < -32'sd8192) return act_t'(-14'sd8192);
    else                     return act_t'(v);
  endfunction

endpackage

// spi_slave: SPI target interface of the chip (weights in, results out).
//
// The paper loads the classifier weights over SPI and sends the class to the
// host over SPI with an interrupt flag; the framing below is this design's.
// SPI mode 0 (data sampled on the rising SCLK edge, changed on the falling
// edge), MSB first, CS_N active low. SCLK, CS_N and MOSI are synchronised into
// the system clock and their edges detected there, so SCLK must stay below
// 1/8 of the system clock (31 kHz at 250 kHz).
//
// A transaction starts with a command byte (kws_pkg spi_cmd_e):
//   01 a_hi a_lo d0 d1 ...  write weight-memory bytes from byte address a
//   02 a_hi a_lo d0 d1 ...  write configuration bytes from address a
//   03 xx                   read {irq, 3'b0, class}; the interrupt is cleared
//                           when CS_N rises
//   04 xx xx ...            read FV_Raw of channels 0..15, 2 bytes each, high first
// Writes are issued one system cycle after the last bit of each data byte.
module spi_slave
  import kws_pkg::*;
(
  input  logic                          clk,
  input  logic                          rst_n,
  input  logic                          sclk,
  input  logic                          cs_n,
  input  logic                          mosi,
  output logic                          miso,
  // weight memory
  output logic                          wm_we,
  output logic [$clog2(WMEM_BYTES)-1:0] wm_addr,
  output logic [7:0]                    wm_data,
  // configuration registers
  output logic                          cfg_we,
  output logic [CFG_AW-1:0]             cfg_addr,
  output logic [7:0]                    cfg_data,
  // read-back
  input  logic [7:0]                    result_byte,
  input  logic [RAW_W-1:0]              fv_raw [NCH],
  output logic                          result_read   // pulse: result was read
);

  logic [2:0]  sclk_s, cs_s;
  logic [1:0]  mosi_s;
  logic        rise, fall, cs_act, cs_end;
  logic [2:0]  bitcnt;
  logic [7:0]  sh_in, sh_out;
  logic [15:0] bytecnt;
  spi_cmd_e    cmd;
  logic [15:0] addr;
  logic        rd_pending;
  logic [7:0]  next_out;
  logic [4:0]  fv_idx;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      sclk_s <= '0;
      cs_s   <= '1;
      mosi_s <= '0;
    end else begin
      sclk_s <= {sclk_s[1:0], sclk};
      cs_s   <= {cs_s[1:0], cs_n};
      mosi_s <= {mosi_s[0], mosi};
    end
  end

  assign cs_act = !cs_s[1];
  assign rise   = cs_act && (sclk_s[2:1] == 2'b01);
  assign fall   = cs_act && (sclk_s[2:1] == 2'b10);
  assign cs_end = (cs_s[2:1] == 2'b01);

  // byte the target sends next (bytes after the command byte)
  assign fv_idx = 5'(bytecnt - 16'd1);
  always_comb begin
    next_out = 8'h00;
    if (bytecnt >= 16'd1) begin
      if (cmd == CMD_RD_RESULT)
        next_out = result_byte;
      else if (cmd == CMD_RD_FVRAW && bytecnt <= 16'(2*NCH))
        next_out = fv_idx[0] ? fv_raw[fv_idx[4:1]][7:0]
                             : 8'(fv_raw[fv_idx[4:1]] >> 8);
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      bitcnt      <= '0;
      sh_in       <= '0;
      sh_out      <= '0;
      bytecnt     <= '0;
      cmd         <= CMD_WR_WMEM;
      addr        <= '0;
      rd_pending  <= 1'b0;
      wm_we       <= 1'b0;
      wm_addr     <= '0;
      wm_data     <= '0;
      cfg_we      <= 1'b0;
      cfg_addr    <= '0;
      cfg_data    <= '0;
      result_read <= 1'b0;
    end else begin
      wm_we       <= 1'b0;
      cfg_we      <= 1'b0;
      result_read <= 1'b0;
      if (!cs_act) begin
        bitcnt  <= '0;
        bytecnt <= '0;
        sh_out  <= '0;
        if (cs_end && rd_pending) begin
          result_read <= 1'b1;
          rd_pending  <= 1'b0;
        end
      end else begin
        if (rise) begin
          sh_in  <= {sh_in[6:0], mosi_s[1]};
          bitcnt <= bitcnt + 1'b1;
          if (bitcnt == 3'd7) begin : byte_done
            logic [7:0] b;
            b = {sh_in[6:0], mosi_s[1]};
            bytecnt <= bytecnt + 1'b1;
            if (bytecnt == 16'd0) begin
              cmd <= spi_cmd_e'(b);
              if (spi_cmd_e'(b) == CMD_RD_RESULT) rd_pending <= 1'b1;
            end else if (bytecnt == 16'd1) begin
              addr[15:8] <= b;
            end else if (bytecnt == 16'd2) begin
              addr[7:0] <= b;
            end else begin
              if (cmd == CMD_WR_WMEM) begin
                wm_we   <= 1'b1;
                wm_addr <= ($clog2(WMEM_BYTES))'(addr);
                wm_data <= b;
              end else if (cmd == CMD_WR_CFG) begin
                cfg_we   <= 1'b1;
                cfg_addr <= CFG_AW'(addr);
                cfg_data <= b;
              end
              addr <= addr + 1'b1;
            end
          end
        end
        // load the next output byte at the falling edge after a byte ends,
        // otherwise shift
        if (fall) begin
          if (bitcnt == 3'd0) sh_out <= next_out;
          else                sh_out <= {sh_out[6:0], 1'b0};
        end
      end
    end
  end

  assign miso = sh_out[7];

endmodule

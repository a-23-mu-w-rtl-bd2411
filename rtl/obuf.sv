// obuf: shared output buffer of the GRU-FC accelerator (1.3 KB).
//
// Holds the hidden states of both GRU layers (two banks each, so a layer can
// write its new state while still reading the old one), the reset and update
// gates of the group of neurons being computed, the partial sum of the
// candidate gate's input part and the class scores. 56 words of 8 lanes x 24
// bits = 1344 bytes; lane l belongs to processing element l. Word map in
// kws_pkg. On the chip an SRAM; here an array with one synchronous read port and
// one write port (size from the paper, organisation this design's choice).
//
// Timing: `rdata` holds word `raddr` one cycle after the read; a write lands at
// the clock edge.
module obuf
  import kws_pkg::*;
#(
  parameter int unsigned DEPTH = OBUF_DEPTH
) (
  input  logic                          clk,
  input  logic [$clog2(DEPTH)-1:0]      raddr,
  output logic [NHPE-1:0][OBUF_LW-1:0]  rdata,
  input  logic                          we,
  input  logic [$clog2(DEPTH)-1:0]      waddr,
  input  logic [NHPE-1:0][OBUF_LW-1:0]  wdata
);

  logic [NHPE-1:0][OBUF_LW-1:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (we) mem[waddr] <= wdata;
    rdata <= mem[raddr];
  end

endmodule

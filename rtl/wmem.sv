// wmem: 24 KB weight memory of the GRU-FC accelerator.
//
// On the chip this is a compiled 6T SRAM macro; here it is an array with the
// same capacity that a synthesis tool maps to memory. It is 64 bits wide so that
// one read gives one weight byte to each of the 8 processing elements (byte l of
// a word belongs to element l); 3072 words. The host loads it byte by byte over
// SPI, so the write port has a byte address. One synchronous read port and one
// write port (the width and the two ports are this design's choice; the paper
// gives the capacity and that the weights are loaded over SPI).
//
// Timing: `rdata` holds the word at `raddr` one cycle after `re`.
module wmem
  import kws_pkg::*;
#(
  parameter int unsigned DEPTH = WMEM_DEPTH
) (
  input  logic                           clk,
  input  logic                           re,
  input  logic [$clog2(DEPTH)-1:0]       raddr,
  output logic [NHPE*W_W-1:0]            rdata,
  input  logic                           we,
  input  logic [$clog2(DEPTH*NHPE)-1:0]  waddr,   // byte address
  input  logic [W_W-1:0]                 wdata
);

  localparam int unsigned LB = $clog2(NHPE);

  logic [NHPE-1:0][W_W-1:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (we)
      mem[waddr[$clog2(DEPTH*NHPE)-1:LB]][waddr[LB-1:0]] <= wdata;
    if (re)
      rdata <= mem[raddr];
  end

endmodule

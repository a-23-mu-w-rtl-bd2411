// clk_gen: oversampling and decimation strobes derived from the system clock.
//
// The paper names a clock generator and gives a 250 kHz system clock, a
// 62.5 kHz oversampling clock for the XOR differentiators and a decimated rate
// f_S,Deci = f_S,Over / 2^10 (about 61 Hz) for the post-processing. This design
// keeps a single clock and produces one-cycle enable strobes instead of derived
// clocks: `over_en` every OVER_DIV system cycles and `deci_en` on the over_en
// strobe that ends each window of 2^DECI_LOG2 oversampling periods.
module clk_gen
  import kws_pkg::*;
#(
  parameter int unsigned OVER_DIV  = 4,          // 250 kHz / 62.5 kHz
  parameter int unsigned DECI_LOG2 = kws_pkg::DECI_LOG2
) (
  input  logic clk,
  input  logic rst_n,
  output logic over_en,   // f_S,Over strobe
  output logic deci_en    // f_S,Deci strobe, coincides with over_en
);

  localparam int unsigned DW = (OVER_DIV > 1) ? $clog2(OVER_DIV) : 1;

  logic [DW-1:0]        div;
  logic [DECI_LOG2-1:0] smp;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      div <= '0;
      smp <= '0;
    end else begin
      if (div == DW'(OVER_DIV - 1)) begin
        div <= '0;
        smp <= smp + 1'b1;
      end else begin
        div <= div + 1'b1;
      end
    end
  end

  assign over_en = (div == DW'(OVER_DIV - 1));
  assign deci_en = over_en && (smp == '1);

endmodule

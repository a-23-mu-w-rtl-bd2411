// argmax: arg-max decoder of the 12 class scores.
//
// Returns the index of the largest signed score; on a tie the lower index wins
// (the tie rule is this design's choice). The decoder itself follows the
// published chip, which feeds the classifier's scores to an arg-max decoder. The result is registered when `valid`
// is high and `class_valid` pulses one cycle later.
module argmax
  import kws_pkg::*;
#(
  parameter int unsigned N = NCLS
) (
  input  logic                   clk,
  input  logic                   rst_n,
  input  logic                   valid,
  input  act_t                   scores [N],
  output logic [$clog2(N)-1:0]   class_idx,
  output logic                   class_valid
);

  logic [$clog2(N)-1:0] best;
  act_t                 best_v;

  always_comb begin
    best   = '0;
    best_v = scores[0];
    for (int i = 1; i < int'(N); i++)
      if (scores[i] > best_v) begin
        best   = ($clog2(N))'(i);
        best_v = scores[i];
      end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      class_idx   <= '0;
      class_valid <= 1'b0;
    end else begin
      class_valid <= valid;
      if (valid) class_idx <= best;
    end
  end

endmodule

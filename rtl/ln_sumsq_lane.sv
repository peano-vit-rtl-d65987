// ln_sumsq_lane -- one "Sum and sum squared calculation" lane of the
// PEANO-ViT layer normalization.
//
// Delivers the two terms a lane contributes to the row statistics: the
// element x itself (for the mean) and x^2 (for the mean of squares), with
// x in Q7.8 and x^2 in Q14.16. A padding lane (en = 0) contributes zeros.
// One register stage: the terms appear one clock after the input.
module ln_sumsq_lane
  import peano_pkg::*;
(
  input  logic                    clk,
  input  logic                    en,
  input  fix_t                    x,
  output fix_t                    s,
  output logic signed [2*DW:0]    q     // x^2, kept signed for the adder tree
);
  always_ff @(posedge clk) begin
    s <= en ? x : '0;
    q <= en ? (2*DW+1)'(x * x) : '0;
  end
endmodule

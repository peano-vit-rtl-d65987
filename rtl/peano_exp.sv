// peano_exp -- one "PEANOexp and MSR-approx" lane of the PEANO-ViT softmax.
//
// Computes PEANOexp(xt) for xt = x - max + 2 (max is the row maximum):
//     0                                   if xt < -3
//     (12 + 6xt + xt^2) / (12 - 6xt + xt^2) otherwise,
// the [2,2] Pade approximant of e^xt. Numerator and denominator share xt^2
// (one multiplier) and 6xt = (xt << 2) + (xt << 1), as in the paper. The
// division by the denominator (which lies in [4, 39]) is done with
// msr_recip: num * StoredRecip[den >> alpha] >> (RF + alpha - EF).
//
// Input: activation x and the row maximum, both Q7.8; en = 0 (a padding
// lane) forces the result to 0. Output: unsigned 16-bit exponential with
// EF = 13 fraction bits (saturating). Four register stages, one element per
// clock: x/max in -> xt; -> num, den; -> reciprocal of den; -> product.
module peano_exp
  import peano_pkg::*;
#(
  parameter bit          LMSR  = 1'b0,
  parameter int unsigned ASTAR = ALPHA_STAR   // paper: alpha*
) (
  input  logic        clk,
  input  logic        rst,
  input  logic        in_valid,
  input  logic        en,
  input  fix_t        x,
  input  fix_t        xmax,
  output logic        out_valid,
  output logic [15:0] e
);
  localparam int unsigned LAT = 4;
  localparam int unsigned NW  = 23;                 // num / den width (2*FW fraction bits)
  localparam logic signed [NW-1:0] TWELVE = NW'(12) <<< (2 * FW);

  // stage 1: shifted input xt = x - max + 2, clipped at -3
  logic signed [DW+1:0]  diff_c;
  logic signed [11:0]    xt1;
  logic                  zero1;
  // stage 2: numerator and denominator
  logic signed [NW-1:0]  sq_c, six_c;
  logic [NW-2:0]         num2, den2;
  logic                  zero2;
  // stage 3: MSR reciprocal of the denominator
  logic [RF:0]           mant_c, mant3;
  logic [$clog2(NW-1)-1:0] alpha_c, alpha3;
  logic [NW-2:0]         num3;
  logic                  zero3;
  // stage 4: product and scaling
  logic [NW-1+RF:0]      prod_c;
  logic [NW-1+RF:0]      scaled_c;
  logic [LAT:1]          vld;

  always_comb begin
    diff_c = $signed({{2{x[DW-1]}}, x}) - $signed({{2{xmax[DW-1]}}, xmax})
           + $signed((DW+2)'(2) <<< FW);
  end

  always_ff @(posedge clk) begin
    // stage 1
    zero1 <= !en || (diff_c < -$signed((DW+2)'(3) <<< FW));
    xt1   <= (!en || (diff_c < -$signed((DW+2)'(3) <<< FW))) ? '0 : 12'(diff_c);
    // stage 2
    num2  <= (NW-1)'(TWELVE + six_c + sq_c);
    den2  <= (NW-1)'(TWELVE - six_c + sq_c);
    zero2 <= zero1;
    // stage 3
    num3   <= num2;
    mant3  <= mant_c;
    alpha3 <= alpha_c;
    zero3  <= zero2;
    // stage 4
    e <= zero3 ? '0 : ((scaled_c > (NW+RF)'(16'hFFFF)) ? 16'hFFFF : scaled_c[15:0]);
    if (rst) vld <= '0;
    else     vld <= {vld[LAT-1:1], in_valid};
  end

  always_comb begin
    sq_c  = NW'(xt1) * NW'(xt1);
    six_c = (NW'(xt1) <<< (2 + FW)) + (NW'(xt1) <<< (1 + FW));   // 6*xt, aligned to 2*FW
  end

  msr_recip #(.XW(NW-1), .ASTAR(ASTAR), .LMSR(LMSR)) u_recip (
    .x(den2), .mant(mant_c), .alpha(alpha_c)
  );

  always_comb begin
    prod_c   = (NW+RF)'(num3) * (NW+RF)'(mant3);
    scaled_c = prod_c >> (RF + 32'(alpha3) - EF);
  end

  assign out_valid = vld[LAT];
endmodule

// msr_recip -- multi-scale reciprocal approximation (MSR-approx, and its
// interpolated form LMSR-approx) of the PEANO-ViT softmax.
//
// 1/x is approximated without a divider. The leading '1' of x gives its
// octave k. If k <= ALPHA_STAR the scale exponent alpha is 0, otherwise
// alpha = k - ALPHA_STAR, so that x >> alpha always lies in
// [1, 2^(ALPHA_STAR+1) - 1]. A table StoredRecip[i] = 1/i (2^(ALPHA_STAR+1)
// entries, RF fraction bits, built at elaboration) then gives
//     1/x  ~=  StoredRecip[x >> alpha] * 2^-(RF + alpha).
// This is the paper's algorithm. Here the final right shift by alpha is
// not applied inside the block: the mantissa and alpha are returned
// separately and the consumer shifts after its multiplication, which keeps
// the precision the shifted-out bits would lose (this design's choice).
// With LMSR = 1 the bits dropped by x >> alpha are used to interpolate
// linearly between StoredRecip[i] and StoredRecip[i+1] (the paper's
// LMSR-approx). x = 0 is treated as x = 1.
//
// Purely combinational; the enclosing pipeline registers the result.
module msr_recip
  import peano_pkg::*;
#(
  parameter int unsigned XW         = 27,
  parameter int unsigned ASTAR      = ALPHA_STAR,
  parameter int unsigned TF         = RF,
  parameter bit          LMSR       = 1'b0,
  parameter int unsigned IPF        = 8,       // interpolation fraction bits (LMSR)
  localparam int unsigned SW        = $clog2(XW)
) (
  input  logic [XW-1:0] x,
  output logic [TF:0]   mant,     // 1/x = mant * 2^-(TF + alpha)
  output logic [SW-1:0] alpha
);
  localparam int unsigned TN = 2 ** (ASTAR + 1);   // entries 1 .. TN-1 are used

  function automatic logic [TN:0][TF:0] make_table();
    logic [TN:0][TF:0] t;
    for (int i = 0; i <= TN; i++) t[i] = (TF+1)'(recip_entry(i, TF));
    return t;
  endfunction
  localparam logic [TN:0][TF:0] STORED_RECIP = make_table();

  logic [SW-1:0]      k;
  logic [ASTAR:0]     idx;
  logic [XW-1:0]      rem;
  logic [IPF-1:0]     frac;
  logic [TF:0]        lo, hi, diff;
  logic [TF+IPF:0]    corr;

  always_comb begin
    k = '0;
    for (int i = 0; i < XW; i++) if (x[i]) k = SW'(i);
    alpha = (k <= SW'(ASTAR)) ? '0 : k - SW'(ASTAR);
    idx   = (ASTAR+1)'(x >> alpha);
    if (idx == '0) idx = (ASTAR+1)'(1);
    lo    = STORED_RECIP[idx];
    // LMSR: fraction of the step between idx and idx+1 given by the dropped bits
    rem   = x & ((XW'(1) << alpha) - XW'(1));
    frac  = IPF'(({rem, IPF'(0)}) >> alpha);
    hi    = STORED_RECIP[{1'b0, idx} + 1'b1];
    diff  = lo - hi;
    corr  = diff * frac;
    if (LMSR && alpha != '0) mant = lo - (TF+1)'(corr >> IPF);
    else                     mant = lo;
  end
endmodule

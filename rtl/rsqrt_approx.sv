// rsqrt_approx -- division-free reciprocal square root of the PEANO-ViT
// layer normalization.
//
// For an unsigned fixed-point variance V (VF fraction bits) it returns
// 1/sqrt(V) as  mant * 2^-P * 2^e  without a square root or a divider:
//   1. k = leading '1' of V, x = the bits below it read as a fraction, so
//      log2(V_int) ~= k + x  (mantissa kept to M+1 bits);
//   2. log2Approx = -(k + x) / 2, split into u = floor(log2Approx) and
//      v = log2Approx - u in [0, 1);
//   3. the top M bits of v index fracPow2[i] = 2^(i / 2^M), a 2^M-entry table
//      built at elaboration (P fraction bits);
//   4. the power 2^u becomes a shift, returned as the exponent
//      e = u + VF/2 (VF/2 undoes the fixed-point scaling of V).
// The algorithm is the paper's; the paper's line "v = u - log2Approx"
// is read as v = log2Approx - u, which its own definition v in [0, 1)
// requires. V = 0 is treated as one LSB. Purely combinational.
module rsqrt_approx
  import peano_pkg::*;
#(
  parameter int unsigned VW = 32,        // variance width
  parameter int unsigned VF = 2 * FW,    // variance fraction bits (even)
  parameter int unsigned M  = LN_M,      // paper: m
  parameter int unsigned P  = RS_P,      // fracPow2 fraction bits
  localparam int unsigned KW = $clog2(VW)
) (
  input  logic [VW-1:0]    var_in,
  output logic [P:0]       mant,          // in [1, 2): 2^v~ with P fraction bits
  output logic signed [7:0] e             // 1/sqrt(var) = mant * 2^(e - P)
);
  localparam int unsigned LF = M + 1;     // fraction bits kept of x

  function automatic logic [2**M-1:0][P:0] make_table();
    logic [2**M-1:0][P:0] t;
    for (int i = 0; i < 2 ** M; i++) t[i] = (P+1)'(frac_pow2_entry(i, M, P));
    return t;
  endfunction
  localparam logic [2**M-1:0][P:0] FRAC_POW2 = make_table();

  logic [KW-1:0]          k;
  logic [VW+LF-1:0]       norm;
  logic [LF-1:0]          xf;
  logic signed [KW+LF+1:0] t;       // log2Approx, LF+1 fraction bits
  logic signed [KW+1:0]   u;
  logic [LF:0]            v;
  logic [M-1:0]           vt;

  always_comb begin
    k = '0;
    for (int i = 0; i < VW; i++) if (var_in[i]) k = KW'(i);
    norm = {var_in, LF'(0)} >> k;            // 1.x with LF fraction bits
    xf   = norm[LF-1:0];
    // -(k + x) with LF fraction bits, read with LF+1 fraction bits = halved
    t    = -$signed({2'b00, k, xf});
    u    = (KW+2)'(t >>> (LF + 1));          // floor
    v    = t[LF:0];                          // log2Approx - u, in [0, 1)
    vt   = v[LF -: M];                       // top M fraction bits
    mant = FRAC_POW2[vt];
    e    = 8'(u) + 8'(VF / 2);
  end
endmodule

// peano_pkg -- shared number formats, sizes and constant functions of the
// PEANO-ViT non-linear units (layer normalization, softmax, GELU).
//
// Number formats. Activations are 16-bit signed fixed point ("FiP16") with
// FW = 8 fraction bits (Q7.8); the 16-bit width follows the paper, the split
// into integer and fraction bits is this design's choice. Every unit handles
// LOP = 16 elements per clock (the paper's level of parallelism). The paper's
// main approximation settings are m = 4 table bits for 1/sqrt and
// alpha* = 4 for the multi-scale reciprocal (MSR), without interpolation.
//
// The lookup tables the paper "pre-stores" (1/i for MSR, 2^(i/2^m) for the
// reciprocal square root, the GELU segment constants) are computed here at
// elaboration from their formulas, so changing m or alpha* regenerates them.
package peano_pkg;

  // ---------------------------------------------------------------- sizes
  parameter int unsigned LOP        = 16;   // elements per beat (paper: LoP = 16)
  parameter int unsigned DW         = 16;   // activation width (paper: FiP16)
  parameter int unsigned FW         = 8;    // activation fraction bits (assumed)
  parameter int unsigned LN_M       = 4;    // paper: m = 4
  parameter int unsigned ALPHA_STAR = 4;    // paper: alpha* = 4
  parameter int unsigned MAX_ROW    = 1024; // longest row a unit buffers (assumed)
  parameter int unsigned ACT_WORDS  = 4096; // activation BRAM depth in beats (assumed)
  parameter int unsigned RF         = 16;   // fraction bits of the stored 1/i table
  parameter int unsigned EF         = 13;   // fraction bits of PEANOexp results
  parameter int unsigned SM_OFW     = 15;   // softmax output: unsigned Q1.15
  parameter int unsigned RS_P       = 15;   // fraction bits of the fracPow2 table
  parameter int unsigned GELU_SF    = 12;   // fraction bits of the GELU slopes
  parameter int unsigned INV_W      = 24;   // fraction bits of the 1/n config word

  typedef logic signed [DW-1:0] fix_t;
  typedef logic [15:0]          len_t;      // row length / row count registers

  // ------------------------------------------------------- constant helpers
  // Round a real number to a fixed-point integer with 'frac' fraction bits.
  function automatic longint fix_of_real(real r, int frac);
    real s;
    s = r * (2.0 ** frac);
    if (s >= 0.0) return longint'($floor(s + 0.5));
    else          return -longint'($floor(-s + 0.5));
  endfunction

  // StoredRecip[i] = 1/i with 'rf' fraction bits, rounded (index 0 holds the
  // value for 1/1 so that an all-zero input saturates instead of dividing by 0).
  function automatic longint recip_entry(int i, int rf);
    longint one;
    one = longint'(1) << rf;
    if (i <= 1) return one;
    return (one + longint'(i) / 2) / longint'(i);
  endfunction

  // fracPow2[i] = 2^(i / 2^m) with 'p' fraction bits.
  function automatic longint frac_pow2_entry(int i, int m, int p);
    return fix_of_real(2.0 ** (real'(i) / real'(2 ** m)), p);
  endfunction

  // Position of the leading '1' of v (0 when v is 0 or 1).
  function automatic int unsigned leading_one64(logic [63:0] v);
    int unsigned k;
    k = 0;
    for (int i = 0; i < 64; i++) if (v[i]) k = i;
    return k;
  endfunction

  // ------------------------------------------------------------ GELU table
  // PEANO-GELU: seven segments y = s * (x - p) + c. Breakpoints and the
  // paper's slope/offset numbers, in real units.
  localparam int GELU_SEGS = 7;
  localparam real GELU_BP  [GELU_SEGS-1] = '{-3.0, -2.1, -0.75, 0.0, 0.5, 3.0};
  localparam real GELU_S   [GELU_SEGS]   = '{0.0, -0.0414, -0.0982, 0.2266, 0.6914, 1.0617, 1.0};
  localparam real GELU_P   [GELU_SEGS]   = '{0.0, -3.0,    -2.1,    -0.75,  0.0,    0.5,    0.0};
  localparam real GELU_C   [GELU_SEGS]   = '{0.0,  0.0,    -0.0373, -0.17,  0.0,    0.3457, 0.0};

endpackage

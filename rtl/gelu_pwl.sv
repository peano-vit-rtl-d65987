// gelu_pwl -- one PEANO-GELU lane: "Comparators", "GELU-LUTs" and "Linear
// Calculation" of the paper's GELU unit.
//
// GELU is approximated by seven straight segments with breakpoints at
// -3, -2.1, -0.75, 0, 0.5 and 3 (the paper's numbers):
//   x < -3: 0;  -3..-2.1: -0.0414(x+3);  -2.1..-0.75: -0.0982(x+2.1)-0.0373;
//   -0.75..0: 0.2266(x+0.75)-0.17;  0..0.5: 0.6914x;
//   0.5..3: 1.0617(x-0.5)+0.3457;  x >= 3: x.
// Stage 1 compares x with the six breakpoints to pick the segment; stage 2
// reads that segment's slope s, anchor p and offset c from a small table;
// stage 3 computes y = s*(x - p) + c with one multiplier. The constants are
// rounded at elaboration: slopes to GELU_SF = 12 fraction bits, anchors and
// offsets to the activation format (Q7.8). en = 0 gives 0 (padding lane).
// Three register stages, one element per clock; the result saturates.
module gelu_pwl
  import peano_pkg::*;
(
  input  logic clk,
  input  logic rst,
  input  logic in_valid,
  input  logic en,
  input  fix_t x,
  output logic out_valid,
  output fix_t y
);
  localparam int unsigned LAT = 3;
  typedef logic [2:0] seg_t;

  typedef struct packed {
    logic signed [15:0] s;   // slope, GELU_SF fraction bits
    fix_t               p;   // anchor
    fix_t               c;   // offset
  } seg_coef_t;

  function automatic logic [GELU_SEGS-1:0][47:0] make_lut();
    logic [GELU_SEGS-1:0][47:0] t;
    seg_coef_t c;
    for (int i = 0; i < GELU_SEGS; i++) begin
      c.s = 16'(fix_of_real(GELU_S[i], GELU_SF));
      c.p = DW'(fix_of_real(GELU_P[i], FW));
      c.c = DW'(fix_of_real(GELU_C[i], FW));
      t[i] = c;
    end
    return t;
  endfunction
  function automatic logic [GELU_SEGS-2:0][DW-1:0] make_bp();
    logic [GELU_SEGS-2:0][DW-1:0] t;
    for (int i = 0; i < GELU_SEGS - 1; i++) t[i] = DW'(fix_of_real(GELU_BP[i], FW));
    return t;
  endfunction
  localparam logic [GELU_SEGS-1:0][47:0]      GELU_LUT = make_lut();
  localparam logic [GELU_SEGS-2:0][DW-1:0]    BREAK    = make_bp();

  seg_t                 seg_c, seg1;
  fix_t                 x1, x2;
  logic                 en1, en2;
  seg_coef_t            coef2;
  logic signed [DW:0]   dx_c;
  logic signed [DW+16:0] prod_c;
  logic signed [DW+16:0] y_c;
  logic [LAT:1]         vld;

  // comparators: the segment index is the number of breakpoints <= x
  always_comb begin
    seg_c = '0;
    for (int i = 0; i < GELU_SEGS - 1; i++)
      if (x >= $signed(BREAK[i])) seg_c = seg_t'(i + 1);
  end

  always_comb begin
    dx_c   = $signed({x2[DW-1], x2}) - $signed({coef2.p[DW-1], coef2.p});
    prod_c = (DW+17)'(dx_c) * (DW+17)'(coef2.s);
    y_c    = (prod_c >>> GELU_SF) + (DW+17)'(coef2.c);
  end

  always_ff @(posedge clk) begin
    seg1  <= seg_c;
    x1    <= x;
    en1   <= en;
    coef2 <= GELU_LUT[seg1];
    x2    <= x1;
    en2   <= en1;
    if (!en2)                                  y <= '0;
    else if (y_c > (DW+17)'(32767))            y <= 16'sh7FFF;
    else if (y_c < -(DW+17)'(32768))           y <= 16'sh8000;
    else                                       y <= DW'(y_c);
    if (rst) vld <= '0;
    else     vld <= {vld[LAT-1:1], in_valid};
  end

  assign out_valid = vld[LAT];
endmodule

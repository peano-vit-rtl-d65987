// softmax_norm -- "MSR-approx of summation and normalization" of the
// PEANO-ViT softmax (lines 9-11 of the paper's softmax algorithm).
//
// Per row: accumulates the per-beat sums of PEANOexp values coming from the
// adder tree until the beat flagged 'last', takes 1/Sum with the
// multi-scale reciprocal (msr_recip: mantissa and scale exponent alpha),
// and then pops the row's exponentials from the side FIFO and outputs
//     y = e * StoredRecip[Sum >> alpha] >> (RF + alpha - SM_OFW)
// on N lanes, i.e. softmax values as unsigned Q1.15 (saturating). Padding
// lanes (mask 0) give 0.
//
// Flow: ACC (take sums) -> RECIP (one clock, register 1/Sum) -> NORM (pop
// the exponentials of the row while the output FIFO has room for the beat
// and the two beats in flight) -> ACC.
module softmax_norm
  import peano_pkg::*;
#(
  parameter int unsigned N    = LOP,
  parameter int unsigned SW   = 17 + $clog2(LOP),                 // beat-sum width
  parameter int unsigned ACCW = SW + $clog2(MAX_ROW / LOP),
  parameter bit          LMSR = 1'b0,
  parameter int unsigned ASTAR = ALPHA_STAR,                       // paper: alpha*
  localparam int unsigned CW  = 16
) (
  input  logic                 clk,
  input  logic                 rst,
  // beat sums from the adder-tree FIFO
  input  logic                 sum_valid,
  input  logic signed [SW-1:0] sum_in,
  input  logic                 sum_last,
  output logic                 sum_pop,
  // exponentials from the side FIFO
  input  logic                 e_valid,
  input  logic [N-1:0][15:0]   e_data,
  input  logic [N-1:0]         e_mask,
  input  logic                 e_last,
  output logic                 e_pop,
  // results
  input  logic [CW-1:0]        out_free,
  output logic                 out_valid,
  output logic [N-1:0][15:0]   out_y,
  output logic                 out_last
);
  localparam int unsigned AW = $clog2(ACCW);

  typedef enum logic [1:0] {ACC, RECIP, NORM} state_t;
  state_t state;

  logic [ACCW-1:0] acc;
  logic [RF:0]     mant_c, mant;
  logic [AW-1:0]   alpha_c, alpha;
  logic            v1, v2, l1;
  logic [16+RF:0]  prod1 [N];
  logic [AW-1:0]   alpha1;

  msr_recip #(.XW(ACCW), .ASTAR(ASTAR), .LMSR(LMSR)) u_recip (.x(acc), .mant(mant_c), .alpha(alpha_c));

  assign sum_pop = (state == ACC) && sum_valid;
  assign e_pop   = (state == NORM) && e_valid && (out_free > CW'(32'(v1) + 32'(v2)));

  always_ff @(posedge clk) begin
    if (rst) begin
      state <= ACC;
      acc   <= '0;
    end else begin
      case (state)
        ACC: if (sum_valid) begin
          acc <= acc + ACCW'(sum_in);
          if (sum_last) state <= RECIP;
        end
        RECIP: begin
          mant  <= mant_c;
          alpha <= alpha_c;
          acc   <= '0;
          state <= NORM;
        end
        NORM: if (e_pop && e_last) state <= ACC;
        default: state <= ACC;
      endcase
    end
  end

  // stage 1: e * mantissa ; stage 2: scale and saturate
  logic [16+RF:0] sc_c [N];
  always_comb
    for (int i = 0; i < N; i++) sc_c[i] = prod1[i] >> (RF + 32'(alpha1) - SM_OFW);

  always_ff @(posedge clk) begin
    for (int i = 0; i < N; i++) begin
      prod1[i] <= e_mask[i] ? (17+RF)'(e_data[i]) * (17+RF)'(mant) : '0;
      out_y[i] <= (sc_c[i] > (17+RF)'(16'hFFFF)) ? 16'hFFFF : sc_c[i][15:0];
    end
    alpha1   <= alpha;
    l1       <= e_last;
    out_last <= l1;
    if (rst) {v1, v2} <= '0;
    else     {v1, v2} <= {e_pop, v1};
  end

  assign out_valid = v2;
endmodule

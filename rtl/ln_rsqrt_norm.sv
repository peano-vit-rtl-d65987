// ln_rsqrt_norm -- "Reciprocal square root approximation and normalization"
// of the PEANO-ViT layer normalization (lines 4-13 of the paper's
// algorithm).
//
// For each row it takes the statistics (Avg, Var) from ln_avg_var, forms
// recipSqrt = 1/sqrt(Var) with rsqrt_approx (a 2^m-entry table and a
// shift, no divider), then streams the row's elements back out of the
// bypass FIFO and computes, on N lanes,
//     y = (x - Avg) * recipSqrt * gamma + beta.
// gamma and beta are per-column parameters read from a parameter RAM at
// the beat index within the row (read address out, data one clock later).
//
// Flow: stats are accepted only between rows (stats_ready). A beat is
// popped when the bypass FIFO has one and the output FIFO has room for it
// and for all beats still in the 4-stage pipeline (out_free credit).
// Stages: x - Avg | * recipSqrt | * gamma | shift by the exponent, + beta,
// saturate. Padding lanes give 0. Results are Q7.8; rounding is by truncation (this design's
// choice). The per-row factors travel with the data so the next row's
// statistics can be loaded while the previous row drains.
module ln_rsqrt_norm
  import peano_pkg::*;
#(
  parameter int unsigned N    = LOP,
  parameter int unsigned GBAW = $clog2(MAX_ROW / LOP),
  parameter int unsigned M    = LN_M,                 // paper: m
  localparam int unsigned AF  = 2 * FW,
  localparam int unsigned CW  = 16
) (
  input  logic                  clk,
  input  logic                  rst,
  // row statistics
  input  logic                  stats_valid,
  input  logic signed [31:0]    stats_avg,
  input  logic [31:0]           stats_var,
  output logic                  stats_ready,
  // row elements from the bypass FIFO
  input  logic                  x_valid,
  input  fix_t [N-1:0]          x_data,
  input  logic [N-1:0]          x_mask,
  input  logic                  x_last,
  output logic                  x_pop,
  // gamma / beta parameter RAM (registered read)
  output logic [GBAW-1:0]       gb_raddr,
  output logic                  gb_re,
  input  fix_t [N-1:0]          gamma,
  input  fix_t [N-1:0]          beta,
  // results to the output FIFO
  input  logic [CW-1:0]         out_free,
  output logic                  out_valid,
  output fix_t [N-1:0]          out_y,
  output logic [N-1:0]          out_mask,
  output logic                  out_last
);
  localparam int unsigned DDW = 27;                 // x - Avg, AF fraction bits
  localparam int unsigned P1W = DDW + RS_P + 1;
  localparam int unsigned P2W = P1W + DW;

  logic                    have_row;
  logic signed [31:0]      avg;
  logic [RS_P:0]           mant, mant_c;
  logic signed [7:0]       ex, ex_c;
  logic [GBAW-1:0]         beat;

  // pipeline registers
  logic                    v1, v2, v3, v4;
  fix_t [N-1:0]            x1;
  logic [N-1:0]            m1, m2, m3;
  logic                    l1, l2, l3;
  logic signed [31:0]      avg1;
  logic [RS_P:0]           mant1;
  logic signed [7:0]       ex1, ex2, ex3;
  logic signed [DDW-1:0]   d_c [N];
  logic signed [P1W-1:0]   p1  [N];
  logic signed [P2W-1:0]   p2  [N];
  fix_t [N-1:0]            g2, b2, b3;

  rsqrt_approx #(.M(M)) u_rsqrt (.var_in(stats_var), .mant(mant_c), .e(ex_c));

  assign stats_ready = !have_row;
  assign x_pop       = have_row && x_valid &&
                       (out_free > CW'(32'(v1) + 32'(v2) + 32'(v3) + 32'(v4)));
  assign gb_raddr    = beat;
  assign gb_re       = x_pop;

  always_ff @(posedge clk) begin
    if (rst) begin
      have_row <= 1'b0;
      beat     <= '0;
    end else begin
      if (!have_row && stats_valid) begin
        have_row <= 1'b1;
        avg      <= stats_avg;
        mant     <= mant_c;
        ex       <= ex_c;
      end
      if (x_pop) begin
        beat <= x_last ? '0 : beat + 1'b1;
        if (x_last) have_row <= 1'b0;
      end
    end
  end

  // stage 1: latch the beat and this row's factors
  always_ff @(posedge clk) begin
    x1    <= x_data;
    m1    <= x_mask;
    l1    <= x_last;
    avg1  <= avg;
    mant1 <= mant;
    ex1   <= ex;
  end

  always_comb
    for (int i = 0; i < N; i++)
      d_c[i] = DDW'($signed({x1[i], {(AF - FW){1'b0}}})) - DDW'(avg1);

  // stage 2: (x - Avg) * recipSqrt ; stage 3: * gamma ; stage 4: scale, + beta
  logic signed [P2W-1:0] sh_c [N];
  logic signed [P2W-1:0] y_c  [N];
  always_comb
    for (int i = 0; i < N; i++) begin
      sh_c[i] = p2[i] >>> (AF + RS_P - 32'(ex3));
      y_c[i]  = sh_c[i] + P2W'(b3[i]);
    end

  always_ff @(posedge clk) begin
    for (int i = 0; i < N; i++) begin
      p1[i] <= P1W'(d_c[i]) * $signed({1'b0, mant1});
      p2[i] <= p1[i] * P2W'(g2[i]);
      if (!m3[i])                     out_y[i] <= '0;
      else if (y_c[i] > P2W'(32767))  out_y[i] <= 16'sh7FFF;
      else if (y_c[i] < -P2W'(32768)) out_y[i] <= 16'sh8000;
      else                            out_y[i] <= DW'(y_c[i]);
    end
    g2   <= gamma;
    b2   <= beta;
    b3   <= b2;
    m2   <= m1;  m3 <= m2;  out_mask <= m3;
    l2   <= l1;  l3 <= l2;  out_last <= l3;
    ex2  <= ex1; ex3 <= ex2;
    if (rst) {v1, v2, v3, v4} <= '0;
    else     {v1, v2, v3, v4} <= {x_pop, v1, v2, v3};
  end

  assign out_valid = v4;
endmodule

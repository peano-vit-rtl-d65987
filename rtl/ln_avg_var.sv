// ln_avg_var -- "Average and variance calculation" of the PEANO-ViT layer
// normalization (lines 1-3 of the paper's algorithm).
//
// Accumulates, over the beats of one row, the per-beat sums of x and x^2
// delivered by the adder trees. After the beat flagged 'last' it forms
//     Avg   = (sum x)   * inv_n
//     AvgSQ = (sum x^2) * inv_n
//     Var   = AvgSQ - Avg^2            (negative rounding results clip to 0)
// where inv_n = 1/n is a configuration word with INV_W fraction bits
// supplied with the row length (this design's choice: the division by n is
// a multiplication by a host-computed constant). Avg leaves with AF = 16
// fraction bits, Var with 2*FW = 16 fraction bits (unsigned).
//
// Handshake: beats are taken while in_ready is high; the row result is held
// on out_valid until out_ready. Between rows the unit spends two clocks on
// the multiplications, during which in_ready is low.
module ln_avg_var
  import peano_pkg::*;
#(
  parameter int unsigned S1W  = DW + 4,        // width of a beat's sum of x
  parameter int unsigned S2W  = 2 * DW + 5,    // width of a beat's sum of x^2
  parameter int unsigned ACCB = $clog2(MAX_ROW / LOP),
  localparam int unsigned AF  = 2 * FW
) (
  input  logic                   clk,
  input  logic                   rst,
  input  logic [INV_W:0]         inv_n,
  input  logic                   in_valid,
  input  logic signed [S1W-1:0]  in_sum,
  input  logic signed [S2W-1:0]  in_sumsq,
  input  logic                   in_last,
  output logic                   in_ready,
  output logic                   out_valid,
  output logic signed [31:0]     out_avg,
  output logic [31:0]            out_var,
  input  logic                   out_ready
);
  localparam int unsigned A1W = S1W + ACCB;
  localparam int unsigned A2W = S2W + ACCB;

  typedef enum logic [1:0] {ACC, MUL, SUB, OUT} state_t;
  state_t state;

  logic signed [A1W-1:0]        acc1;
  logic signed [A2W-1:0]        acc2;
  logic signed [A1W+INV_W+1:0]  p1_c;
  logic signed [A2W+INV_W+1:0]  p2_c;
  logic signed [31:0]           avg;
  logic signed [47:0]           avgsq;
  logic signed [63:0]           avg2_c;
  logic signed [47:0]           var_c;

  always_comb begin
    p1_c   = (A1W+INV_W+2)'(acc1) * $signed({1'b0, inv_n});
    p2_c   = (A2W+INV_W+2)'(acc2) * $signed({1'b0, inv_n});
    avg2_c = (64'(avg) * 64'(avg)) >>> AF;           // Avg^2, 2*FW fraction bits
    var_c  = avgsq - 48'(avg2_c);
  end

  assign in_ready  = (state == ACC);
  assign out_valid = (state == OUT);

  always_ff @(posedge clk) begin
    if (rst) begin
      state <= ACC;
      acc1  <= '0;
      acc2  <= '0;
    end else begin
      case (state)
        ACC: if (in_valid) begin
          acc1 <= acc1 + A1W'(in_sum);
          acc2 <= acc2 + A2W'(in_sumsq);
          if (in_last) state <= MUL;
        end
        MUL: begin
          avg   <= 32'(p1_c >>> (INV_W - (AF - FW)));   // FW -> AF fraction bits
          avgsq <= 48'(p2_c >>> INV_W);                 // stays 2*FW
          state <= SUB;
        end
        SUB: begin
          out_avg <= avg;
          out_var <= (var_c < 0) ? '0 :
                     (var_c > 48'sh0000_FFFF_FFFF) ? 32'hFFFF_FFFF : 32'(var_c);
          acc1    <= '0;
          acc2    <= '0;
          state   <= OUT;
        end
        OUT: if (out_ready) state <= ACC;
        default: state <= ACC;
      endcase
    end
  end
endmodule

// adder_tree -- pipelined N-input adder tree (the "Adder tree" of Fig. 5).
//
// Adds the N signed inputs of one beat in ceil(log2 N) register stages, one
// beat per clock, so the sum of a beat leaves LAT clocks after it entered.
// Each level grows the word by one bit, so the sum never overflows. A valid
// bit and a user tag (e.g. an end-of-row flag) travel alongside. The paper
// names the block; the balanced pipelined structure is this design's choice.
module adder_tree #(
  parameter int unsigned N     = 16,
  parameter int unsigned W     = 16,
  parameter int unsigned TAGW  = 1,
  localparam int unsigned LAT  = (N > 1) ? $clog2(N) : 1,
  localparam int unsigned OW   = W + LAT
) (
  input  logic                       clk,
  input  logic                       rst,
  input  logic                       in_valid,
  input  logic signed [N-1:0][W-1:0] in_data,
  input  logic [TAGW-1:0]            in_tag,
  output logic                       out_valid,
  output logic signed [OW-1:0]       out_sum,
  output logic [TAGW-1:0]            out_tag
);
  localparam int unsigned NP = 2 ** LAT;   // inputs padded to a power of two

  // level 0: the inputs, sign-extended to the output width and padded
  logic signed [NP-1:0][OW-1:0] lvl0;
  always_comb
    for (int i = 0; i < NP; i++)
      lvl0[i] = (i < N) ? OW'($signed(in_data[i])) : '0;

  // level l+1 adds pairs of level l; one register stage per level
  for (genvar l = 0; l < LAT; l++) begin : g_lvl
    localparam int unsigned NI = NP >> l;
    logic signed [NI-1:0][OW-1:0]     prev;
    logic signed [NI/2-1:0][OW-1:0]   sum;
    logic                             prev_v, v;
    logic [TAGW-1:0]                  prev_t, t;
    if (l == 0) begin : g_first
      assign prev   = lvl0;
      assign prev_v = in_valid;
      assign prev_t = in_tag;
    end else begin : g_next
      assign prev   = g_lvl[l-1].sum;
      assign prev_v = g_lvl[l-1].v;
      assign prev_t = g_lvl[l-1].t;
    end
    always_ff @(posedge clk) begin
      for (int i = 0; i < NI / 2; i++) sum[i] <= prev[2*i] + prev[2*i+1];
      t <= prev_t;
      if (rst) v <= 1'b0;
      else     v <= prev_v;
    end
  end

  assign out_valid = g_lvl[LAT-1].v;
  assign out_sum   = g_lvl[LAT-1].sum[0];
  assign out_tag   = g_lvl[LAT-1].t;
endmodule

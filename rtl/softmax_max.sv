// softmax_max -- row maximum of the softmax inputs (line 1 of the paper's
// softmax algorithm, MaxInput = max(x_i)).
//
// Takes one beat of N lanes per clock during the first read of a row.
// Stage 1 reduces the valid lanes of the beat with a comparator tree;
// stage 2 keeps a running maximum over the row and, on the beat flagged
// 'last', emits the row maximum with 'out_valid' for one clock. Lanes
// whose mask bit is 0 are ignored. The paper states the operation but not
// its hardware; this unit is this design's choice.
module softmax_max
  import peano_pkg::*;
#(
  parameter int unsigned N = LOP
) (
  input  logic              clk,
  input  logic              rst,
  input  logic              in_valid,
  input  fix_t [N-1:0]      in_data,
  input  logic [N-1:0]      in_mask,
  input  logic              in_last,
  output logic              out_valid,
  output fix_t              out_max
);
  localparam fix_t MOST_NEG = {1'b1, {(DW-1){1'b0}}};

  fix_t beat_max_c, beat_max1, run_max;
  logic v1, last1, first;

  always_comb begin
    beat_max_c = MOST_NEG;
    for (int i = 0; i < N; i++)
      if (in_mask[i] && in_data[i] > beat_max_c) beat_max_c = in_data[i];
  end

  always_ff @(posedge clk) begin
    beat_max1 <= beat_max_c;
    last1     <= in_last;
    out_valid <= 1'b0;
    if (rst) begin
      v1    <= 1'b0;
      first <= 1'b1;
    end else begin
      v1 <= in_valid;
      if (v1) begin
        if (first || beat_max1 > run_max) run_max <= beat_max1;
        first <= last1;
        if (last1) begin
          out_valid <= 1'b1;
          out_max   <= (first || beat_max1 > run_max) ? beat_max1 : run_max;
        end
      end
    end
  end
endmodule

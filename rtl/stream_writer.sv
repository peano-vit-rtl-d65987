// stream_writer -- drains a unit's output FIFO into its output activation
// BRAM, one N-element word per clock, at consecutive addresses from 0.
//
// 'start' loads the number of words the job will produce
// (num_rows * ceil(row_len / N)); 'done' rises when that many words have
// been written and stays high until the next start. A job with no words is
// done at once. The FIFO head is written in the clock it is popped.
module stream_writer
  import peano_pkg::*;
#(
  parameter int unsigned N  = LOP,
  parameter int unsigned AW = $clog2(ACT_WORDS),
  parameter int unsigned WIDTH = N * DW
) (
  input  logic             clk,
  input  logic             rst,
  input  logic             start,
  input  len_t             row_len,
  input  len_t             num_rows,
  output logic             done,
  // FIFO side
  input  logic             in_valid,
  input  logic [WIDTH-1:0] in_data,
  output logic             in_pop,
  // BRAM write port
  output logic             we,
  output logic [AW-1:0]    waddr,
  output logic [WIDTH-1:0] wdata
);
  logic [31:0] total, written;
  logic [15:0] beats_c;

  assign beats_c = 16'((32'(row_len) + N - 1) / N);
  assign in_pop  = in_valid && !done;
  assign we      = in_pop;
  assign waddr   = AW'(written);
  assign wdata   = in_data;

  always_ff @(posedge clk) begin
    if (rst) begin
      done    <= 1'b1;
      written <= '0;
      total   <= '0;
    end else if (start && done) begin
      total   <= 32'(beats_c) * 32'(num_rows);
      written <= '0;
      done    <= (beats_c == '0) || (num_rows == '0);
    end else if (in_pop) begin
      written <= written + 1;
      if (written + 1 == total) done <= 1'b1;
    end
  end
endmodule

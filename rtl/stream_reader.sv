// stream_reader -- reads rows of activations out of an activation BRAM as a
// stream of N-element beats, for the PEANO-ViT units.
//
// A job is num_rows rows of row_len elements each; every row starts on a
// fresh BRAM word (rows are padded to a multiple of N elements), beginning
// at word 0. Each beat carries a lane mask (lanes past the end of the row
// are 0) and a 'last' flag on the row's final beat. With PASSES = 2 every
// row is read twice in a row (pass 0, then pass 1), as the softmax needs a
// first pass for the row maximum; 'pass' tags each beat.
//
// Timing: a read is issued in a clock where 'space_ok' is high; the beat
// appears on out_* one clock later (BRAM read latency). 'cur_pass' tells
// the parent which destination the next read will go to, so it can
// compute 'space_ok' from that destination's free space. 'start' is
// ignored while busy. Zero rows or a zero row length give an empty job.
module stream_reader
  import peano_pkg::*;
#(
  parameter int unsigned N      = LOP,
  parameter int unsigned AW     = $clog2(ACT_WORDS),
  parameter int unsigned PASSES = 1
) (
  input  logic              clk,
  input  logic              rst,
  input  logic              start,
  input  len_t              row_len,
  input  len_t              num_rows,
  output logic              busy,
  input  logic              space_ok,
  output logic              cur_pass,
  // BRAM read port
  output logic              re,
  output logic [AW-1:0]     raddr,
  // beat stream (valid one clock after the read)
  output logic              out_valid,
  output logic [N-1:0]      out_mask,
  output logic              out_last,
  output logic              out_pass
);
  len_t          rows_left, rem;
  logic [AW-1:0] addr, row_base;
  logic          pass;
  logic          beat_last;
  logic [N-1:0]  beat_mask;

  always_comb begin
    beat_last = (rem <= len_t'(N));
    for (int i = 0; i < N; i++) beat_mask[i] = (len_t'(i) < rem);
  end

  assign re       = busy && space_ok;
  assign raddr    = addr;
  assign cur_pass = pass;

  always_ff @(posedge clk) begin
    if (rst) begin
      busy      <= 1'b0;
      out_valid <= 1'b0;
    end else begin
      out_valid <= re;
      out_mask  <= beat_mask;
      out_last  <= beat_last;
      out_pass  <= pass;
      if (!busy) begin
        if (start && num_rows != '0 && row_len != '0) begin
          busy      <= 1'b1;
          rows_left <= num_rows;
          rem       <= row_len;
          addr      <= '0;
          row_base  <= '0;
          pass      <= 1'b0;
        end
      end else if (re) begin
        if (!beat_last) begin
          addr <= addr + 1'b1;
          rem  <= rem - len_t'(N);
        end else if (PASSES > 1 && !pass) begin
          pass <= 1'b1;
          addr <= row_base;
          rem  <= row_len;
        end else begin
          pass      <= 1'b0;
          addr      <= addr + 1'b1;
          row_base  <= addr + 1'b1;
          rem       <= row_len;
          rows_left <= rows_left - 1'b1;
          if (rows_left == len_t'(1)) busy <= 1'b0;
        end
      end
    end
  end
endmodule

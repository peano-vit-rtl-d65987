// peano_gelu -- the PEANO-ViT GELU unit (bottom row of the paper's FPGA
// block diagram).
//
// Input BRAM -> reader -> FIFO -> N gelu_pwl lanes (comparators, segment
// table, linear calculation) -> FIFO -> writer -> output BRAM. GELU is
// element-wise, so the unit is a plain stream: N elements per clock once
// the pipeline is full. A job is num_rows rows of row_len elements, each
// row starting on a new BRAM word (see stream_reader); padding lanes are
// written as 0.
//
// Control: pulse 'start' while idle; 'busy' stays high until the last
// result word is in the output BRAM, and 'done' pulses for one clock then.
// Flow control is by credit: a beat leaves the input FIFO only when the
// output FIFO has room for it and for every beat still in the lanes.
// FIFO depths are this design's choice (the paper gives none).
// Lint notes: the FIFOs' full/count outputs and the reader's pass outputs
// are not needed here (flow control uses free), and only lane 0's valid is
// used since all lanes run in lock-step; these unused-signal warnings stand.
module peano_gelu
  import peano_pkg::*;
#(
  parameter int unsigned N          = LOP,
  parameter int unsigned AW         = $clog2(ACT_WORDS),
  parameter int unsigned FIFO_DEPTH = 16
) (
  input  logic           clk,
  input  logic           rst,
  input  logic           start,
  input  len_t           row_len,
  input  len_t           num_rows,
  output logic           busy,
  output logic           done,
  // input activation BRAM read port
  output logic           in_re,
  output logic [AW-1:0]  in_raddr,
  input  fix_t [N-1:0]   in_rdata,
  // output activation BRAM write port
  output logic           out_we,
  output logic [AW-1:0]  out_waddr,
  output fix_t [N-1:0]   out_wdata
);
  localparam int unsigned CW  = $clog2(FIFO_DEPTH + 1);

  typedef struct packed {
    fix_t [N-1:0] data;
    logic [N-1:0] mask;
  } beat_t;

  // reader
  logic          rd_busy, rd_space, rd_pass, rd_v, rd_last, rd_opass;
  logic [N-1:0]  rd_mask;
  // FIFOs
  beat_t         in_head;
  logic          in_empty, in_full, in_pop;
  logic [CW-1:0] in_count, in_free;
  fix_t [N-1:0]  res_head;
  logic          res_empty, res_full, res_pop, res_push;
  logic [CW-1:0] res_count, res_free;
  // lanes
  fix_t [N-1:0]  y;
  logic [N-1:0]  lane_v;
  logic [CW-1:0] inflight;
  logic          wr_done;

  stream_reader #(.N(N), .AW(AW), .PASSES(1)) u_reader (
    .clk, .rst, .start(start && !busy), .row_len, .num_rows, .busy(rd_busy),
    .space_ok(rd_space), .cur_pass(rd_pass), .re(in_re), .raddr(in_raddr),
    .out_valid(rd_v), .out_mask(rd_mask), .out_last(rd_last), .out_pass(rd_opass)
  );
  assign rd_space = in_free > CW'(rd_v);

  sync_fifo #(.T(beat_t), .DEPTH(FIFO_DEPTH)) u_in_fifo (
    .clk, .rst, .push(rd_v), .din('{data: in_rdata, mask: rd_mask}), .pop(in_pop),
    .dout(in_head), .empty(in_empty), .full(in_full), .count(in_count), .free(in_free)
  );

  assign in_pop = !in_empty && (res_free > inflight);

  for (genvar i = 0; i < N; i++) begin : g_lane
    gelu_pwl u_lane (
      .clk, .rst, .in_valid(in_pop), .en(in_head.mask[i]), .x(in_head.data[i]),
      .out_valid(lane_v[i]), .y(y[i])
    );
  end
  assign res_push = lane_v[0];

  always_ff @(posedge clk) begin
    if (rst) inflight <= '0;
    else     inflight <= inflight + CW'(in_pop) - CW'(res_push);
  end

  sync_fifo #(.T(fix_t [N-1:0]), .DEPTH(FIFO_DEPTH)) u_out_fifo (
    .clk, .rst, .push(res_push), .din(y), .pop(res_pop),
    .dout(res_head), .empty(res_empty), .full(res_full), .count(res_count), .free(res_free)
  );

  stream_writer #(.N(N), .AW(AW)) u_writer (
    .clk, .rst, .start(start && !busy), .row_len, .num_rows, .done(wr_done),
    .in_valid(!res_empty), .in_data(res_head), .in_pop(res_pop),
    .we(out_we), .waddr(out_waddr), .wdata(out_wdata)
  );

  always_ff @(posedge clk) begin
    if (rst)                 busy <= 1'b0;
    else if (start && !busy) busy <= 1'b1;
    else if (wr_done)        busy <= 1'b0;
  end
  assign done = busy && wr_done;
endmodule

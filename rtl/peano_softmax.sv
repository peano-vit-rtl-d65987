// peano_softmax -- the PEANO-ViT softmax unit (middle row of the paper's
// FPGA block diagram).
//
// Each row is read twice from the input BRAM. The first read feeds
// softmax_max, which finds the row maximum (the paper's algorithm starts
// with it; its block diagram does not show where, so this placement is this
// design's choice) and queues it in a small FIFO. The second read goes
// through the input FIFO to N peano_exp lanes, which compute
// PEANOexp(x - max + 2) with the Pade approximant and MSR-approx. Their
// results split: an adder tree sums each beat into the sum FIFO, and the
// exponentials themselves wait in the side FIFO (the paper's parallel
// FIFO, so they need not be recomputed or stored). softmax_norm then adds
// the beat sums of the row, forms MSR-approx(Sum) and scales every
// exponential by it. Outputs are unsigned Q1.15 probabilities.
//
// Rows may be at most MAX_ROW elements (the side FIFO holds two rows).
// Control as in peano_gelu (start / busy / done); flow control by credit.
// LMSR = 1 selects the interpolated reciprocal (LMSR-approx) in both
// divisions; the default is plain MSR-approx, the paper's main setting.
// ASTAR is alpha*, the reciprocal table size (2^(alpha*+1) entries; paper 4).
// Lint notes: FIFO full/count outputs, the reader's busy and the valids of
// lanes 1..N-1 (all lanes run in lock-step with lane 0) are unused on purpose.
module peano_softmax
  import peano_pkg::*;
#(
  parameter int unsigned N          = LOP,
  parameter int unsigned AW         = $clog2(ACT_WORDS),
  parameter int unsigned ROW_WORDS  = MAX_ROW / N,
  parameter int unsigned FIFO_DEPTH = 16,
  parameter bit          LMSR       = 1'b0,
  parameter int unsigned ASTAR      = ALPHA_STAR,      // paper: alpha*
  localparam int unsigned EXP_DEPTH = 2 * ROW_WORDS,
  localparam int unsigned MAX_DEPTH = FIFO_DEPTH + 4
) (
  input  logic              clk,
  input  logic              rst,
  input  logic              start,
  input  len_t              row_len,
  input  len_t              num_rows,
  output logic              busy,
  output logic              done,
  // input activation BRAM read port
  output logic              in_re,
  output logic [AW-1:0]     in_raddr,
  input  fix_t [N-1:0]      in_rdata,
  // output activation BRAM write port
  output logic              out_we,
  output logic [AW-1:0]     out_waddr,
  output logic [N-1:0][15:0] out_wdata
);
  localparam int unsigned TL   = $clog2(N);
  localparam int unsigned SW   = 17 + TL;
  localparam int unsigned ELAT = 4;                  // peano_exp latency

  typedef struct packed {
    fix_t [N-1:0] data;
    logic [N-1:0] mask;
    logic         last;
  } beat_t;
  typedef struct packed {
    logic [N-1:0][15:0] e;
    logic [N-1:0]       mask;
    logic               last;
  } ebeat_t;
  typedef struct packed {
    logic signed [SW-1:0] sum;
    logic                 last;
  } esum_t;
  typedef struct packed {
    logic [N-1:0][15:0] y;
    logic               last;
  } res_t;

  // reader
  logic         rd_space, rd_v, rd_last, rd_pass, rd_opass, rd_busy;
  logic [N-1:0] rd_mask;
  // row maximum
  logic         mx_v;
  fix_t         mx;
  fix_t         mq_head;
  logic         mq_empty, mq_full, mq_pop;
  logic [$clog2(MAX_DEPTH+1)-1:0] mq_count, mq_free;
  // input FIFO and exponentials
  beat_t        i_head;
  logic         i_empty, i_full, i_pop;
  logic [$clog2(FIFO_DEPTH+1)-1:0] i_count, i_free;
  logic [N-1:0][15:0] e_lane;
  logic [N-1:0] e_v;
  logic [ELAT:1]        d_last;
  logic [ELAT:1][N-1:0] d_mask;
  logic signed [N-1:0][16:0] e_ext;
  logic         t_v, t_last;
  logic signed [SW-1:0] t_sum;
  logic [7:0]   inflight;
  // side FIFO, sum FIFO
  ebeat_t       x_head;
  logic         x_empty, x_full, x_pop;
  logic [$clog2(EXP_DEPTH+1)-1:0] x_count, x_free;
  esum_t        s_head;
  logic         s_empty, s_full, s_pop;
  logic [$clog2(FIFO_DEPTH+1)-1:0] s_count, s_free;
  // normalization and output
  logic         n_valid, n_last;
  logic [N-1:0][15:0] n_y;
  res_t         o_head;
  logic         o_empty, o_full, o_pop;
  logic [$clog2(FIFO_DEPTH+1)-1:0] o_count, o_free;
  logic         wr_done;

  stream_reader #(.N(N), .AW(AW), .PASSES(2)) u_reader (
    .clk, .rst, .start(start && !busy), .row_len, .num_rows, .busy(rd_busy),
    .space_ok(rd_space), .cur_pass(rd_pass), .re(in_re), .raddr(in_raddr),
    .out_valid(rd_v), .out_mask(rd_mask), .out_last(rd_last), .out_pass(rd_opass)
  );
  // pass 0 needs room for a row maximum, pass 1 room in the input FIFO
  assign rd_space = rd_pass ? (32'(i_free) > 32'(rd_v && rd_opass))
                            : (32'(mq_free) > 32'd3);

  // ------------------------------------------------------ row maximum
  softmax_max #(.N(N)) u_max (
    .clk, .rst, .in_valid(rd_v && !rd_opass), .in_data(in_rdata), .in_mask(rd_mask),
    .in_last(rd_last), .out_valid(mx_v), .out_max(mx)
  );
  sync_fifo #(.T(fix_t), .DEPTH(MAX_DEPTH)) u_max_fifo (
    .clk, .rst, .push(mx_v), .din(mx), .pop(mq_pop),
    .dout(mq_head), .empty(mq_empty), .full(mq_full), .count(mq_count), .free(mq_free)
  );

  // ----------------------------------------------------- exponentials
  sync_fifo #(.T(beat_t), .DEPTH(FIFO_DEPTH)) u_in_fifo (
    .clk, .rst, .push(rd_v && rd_opass),
    .din('{data: in_rdata, mask: rd_mask, last: rd_last}), .pop(i_pop),
    .dout(i_head), .empty(i_empty), .full(i_full), .count(i_count), .free(i_free)
  );
  assign i_pop  = !i_empty && !mq_empty &&
                  (32'(x_free) > 32'(inflight)) && (32'(s_free) > 32'(inflight));
  assign mq_pop = i_pop && i_head.last;

  for (genvar i = 0; i < N; i++) begin : g_lane
    peano_exp #(.LMSR(LMSR), .ASTAR(ASTAR)) u_exp (
      .clk, .rst, .in_valid(i_pop), .en(i_head.mask[i]), .x(i_head.data[i]),
      .xmax(mq_head), .out_valid(e_v[i]), .e(e_lane[i])
    );
    assign e_ext[i] = $signed({1'b0, e_lane[i]});
  end

  always_ff @(posedge clk) begin
    d_last <= {d_last[ELAT-1:1], i_head.last};
    d_mask <= {d_mask[ELAT-1:1], i_head.mask};
    if (rst) inflight <= '0;
    else     inflight <= inflight + 8'(i_pop) - 8'(t_v);
  end

  sync_fifo #(.T(ebeat_t), .DEPTH(EXP_DEPTH)) u_side_fifo (
    .clk, .rst, .push(e_v[0]), .din('{e: e_lane, mask: d_mask[ELAT], last: d_last[ELAT]}),
    .pop(x_pop), .dout(x_head), .empty(x_empty), .full(x_full), .count(x_count), .free(x_free)
  );

  adder_tree #(.N(N), .W(17), .TAGW(1)) u_tree (
    .clk, .rst, .in_valid(e_v[0]), .in_data(e_ext), .in_tag(d_last[ELAT]),
    .out_valid(t_v), .out_sum(t_sum), .out_tag(t_last)
  );

  sync_fifo #(.T(esum_t), .DEPTH(FIFO_DEPTH)) u_sum_fifo (
    .clk, .rst, .push(t_v), .din('{sum: t_sum, last: t_last}), .pop(s_pop),
    .dout(s_head), .empty(s_empty), .full(s_full), .count(s_count), .free(s_free)
  );

  // ---------------------------------------------------- normalization
  softmax_norm #(.N(N), .SW(SW), .ACCW(SW + $clog2(ROW_WORDS)), .LMSR(LMSR), .ASTAR(ASTAR)) u_norm (
    .clk, .rst,
    .sum_valid(!s_empty), .sum_in(s_head.sum), .sum_last(s_head.last), .sum_pop(s_pop),
    .e_valid(!x_empty), .e_data(x_head.e), .e_mask(x_head.mask), .e_last(x_head.last),
    .e_pop(x_pop), .out_free(16'(o_free)), .out_valid(n_valid), .out_y(n_y),
    .out_last(n_last)
  );

  sync_fifo #(.T(res_t), .DEPTH(FIFO_DEPTH)) u_out_fifo (
    .clk, .rst, .push(n_valid), .din('{y: n_y, last: n_last}), .pop(o_pop),
    .dout(o_head), .empty(o_empty), .full(o_full), .count(o_count), .free(o_free)
  );

  stream_writer #(.N(N), .AW(AW)) u_writer (
    .clk, .rst, .start(start && !busy), .row_len, .num_rows, .done(wr_done),
    .in_valid(!o_empty), .in_data(o_head.y), .in_pop(o_pop),
    .we(out_we), .waddr(out_waddr), .wdata(out_wdata)
  );

  always_ff @(posedge clk) begin
    if (rst)                 busy <= 1'b0;
    else if (start && !busy) busy <= 1'b1;
    else if (wr_done)        busy <= 1'b0;
  end
  assign done = busy && wr_done;
endmodule

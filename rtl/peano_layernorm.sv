// peano_layernorm -- the PEANO-ViT layer-normalization unit (top row of the
// paper's FPGA block diagram).
//
// Each row of the input BRAM is read once. Every beat goes into two FIFOs:
// the main one feeds N ln_sumsq_lane lanes (x and x^2) and two adder trees
// (sum of x, sum of x^2 per beat), whose results queue in a third FIFO for
// ln_avg_var (Avg, Var of the row); the bypass FIFO keeps the row's
// elements so that ln_rsqrt_norm can normalize them, once the row's
// statistics are known, without reading the BRAM a second time (the
// paper's parallel FIFO). Results go through an output FIFO to the output
// BRAM. gamma and beta come from a parameter RAM indexed by the beat
// within the row.
//
// Configuration per job: row_len (n), num_rows and inv_n = round(2^24 / n),
// the reciprocal of the row length (this design's choice; the paper does
// not say how 1/n is formed). Rows may be at most MAX_ROW elements: the
// bypass FIFO holds two full rows, so one row can be normalized while the
// next one's statistics are gathered. Control as in peano_gelu
// (start / busy / done). Flow control everywhere is credit based.
// M is m, the size of the rsqrt fracPow2 table (2^m entries; paper 4).
// Lint notes: several FIFO full/count outputs, the reader's pass outputs,
// the second adder tree's valid/tag (identical to the first's) and the
// normalizer's mask (padding lanes are already 0) are unused on purpose.
module peano_layernorm
  import peano_pkg::*;
#(
  parameter int unsigned N          = LOP,
  parameter int unsigned AW         = $clog2(ACT_WORDS),
  parameter int unsigned ROW_WORDS  = MAX_ROW / N,
  parameter int unsigned FIFO_DEPTH = 16,
  parameter int unsigned M          = LN_M,            // paper: m
  localparam int unsigned GBAW      = $clog2(ROW_WORDS),
  localparam int unsigned BYP_DEPTH = 2 * ROW_WORDS
) (
  input  logic              clk,
  input  logic              rst,
  input  logic              start,
  input  len_t              row_len,
  input  len_t              num_rows,
  input  logic [INV_W:0]    inv_n,
  output logic              busy,
  output logic              done,
  // input activation BRAM read port
  output logic              in_re,
  output logic [AW-1:0]     in_raddr,
  input  fix_t [N-1:0]      in_rdata,
  // gamma / beta parameter RAM read port
  output logic              gb_re,
  output logic [GBAW-1:0]   gb_raddr,
  input  fix_t [N-1:0]      gamma,
  input  fix_t [N-1:0]      beta,
  // output activation BRAM write port
  output logic              out_we,
  output logic [AW-1:0]     out_waddr,
  output fix_t [N-1:0]      out_wdata
);
  localparam int unsigned TL  = $clog2(N);          // adder-tree latency
  localparam int unsigned S1W = DW + TL;
  localparam int unsigned S2W = 2 * DW + 1 + TL;

  typedef struct packed {
    fix_t [N-1:0] data;
    logic [N-1:0] mask;
    logic         last;
  } beat_t;
  typedef struct packed {
    logic signed [S1W-1:0] sum;
    logic signed [S2W-1:0] sumsq;
    logic                  last;
  } bsum_t;
  typedef struct packed {
    fix_t [N-1:0] y;
    logic         last;
  } res_t;

  // reader
  logic         rd_space, rd_v, rd_last, rd_pass, rd_opass, rd_busy;
  logic [N-1:0] rd_mask;
  beat_t        rd_beat;
  // main FIFO and stats path
  beat_t        m_head;
  logic         m_empty, m_full, m_pop;
  logic [$clog2(FIFO_DEPTH+1)-1:0] m_count, m_free;
  fix_t [N-1:0]                 s_lane;
  logic signed [N-1:0][2*DW:0]  q_lane;
  logic         lane_v, lane_last, t1_v, t2_v, t1_last, t2_last;
  logic signed [S1W-1:0] t1_sum;
  logic signed [S2W-1:0] t2_sum;
  bsum_t        bs_head;
  logic         bs_empty, bs_full, bs_pop;
  logic [$clog2(FIFO_DEPTH+1)-1:0] bs_count, bs_free;
  logic [7:0]   inflight;
  // statistics
  logic              st_valid, st_ready, av_ready;
  logic signed [31:0] st_avg;
  logic [31:0]       st_var;
  // bypass FIFO
  beat_t        b_head;
  logic         b_empty, b_full, b_pop;
  logic [$clog2(BYP_DEPTH+1)-1:0] b_count, b_free;
  // normalization and output
  logic         n_valid, n_last;
  fix_t [N-1:0] n_y;
  logic [N-1:0] n_mask;
  res_t         o_head;
  logic         o_empty, o_full, o_pop;
  logic [$clog2(FIFO_DEPTH+1)-1:0] o_count, o_free;
  logic         wr_done;

  stream_reader #(.N(N), .AW(AW), .PASSES(1)) u_reader (
    .clk, .rst, .start(start && !busy), .row_len, .num_rows, .busy(rd_busy),
    .space_ok(rd_space), .cur_pass(rd_pass), .re(in_re), .raddr(in_raddr),
    .out_valid(rd_v), .out_mask(rd_mask), .out_last(rd_last), .out_pass(rd_opass)
  );
  assign rd_space = (32'(m_free) > 32'(rd_v)) && (32'(b_free) > 32'(rd_v));
  assign rd_beat  = '{data: in_rdata, mask: rd_mask, last: rd_last};

  // ---------------------------------------------------------- statistics
  sync_fifo #(.T(beat_t), .DEPTH(FIFO_DEPTH)) u_main_fifo (
    .clk, .rst, .push(rd_v), .din(rd_beat), .pop(m_pop),
    .dout(m_head), .empty(m_empty), .full(m_full), .count(m_count), .free(m_free)
  );
  assign m_pop = !m_empty && (32'(bs_free) > 32'(inflight));

  for (genvar i = 0; i < N; i++) begin : g_lane
    ln_sumsq_lane u_lane (.clk, .en(m_head.mask[i]), .x(m_head.data[i]),
                          .s(s_lane[i]), .q(q_lane[i]));
  end

  always_ff @(posedge clk) begin
    lane_last <= m_head.last;
    if (rst) lane_v <= 1'b0;
    else     lane_v <= m_pop;
  end

  adder_tree #(.N(N), .W(DW), .TAGW(1)) u_tree_sum (
    .clk, .rst, .in_valid(lane_v), .in_data(s_lane), .in_tag(lane_last),
    .out_valid(t1_v), .out_sum(t1_sum), .out_tag(t1_last)
  );
  adder_tree #(.N(N), .W(2 * DW + 1), .TAGW(1)) u_tree_sumsq (
    .clk, .rst, .in_valid(lane_v), .in_data(q_lane), .in_tag(lane_last),
    .out_valid(t2_v), .out_sum(t2_sum), .out_tag(t2_last)
  );

  always_ff @(posedge clk) begin
    if (rst) inflight <= '0;
    else     inflight <= inflight + 8'(m_pop) - 8'(t1_v);
  end

  sync_fifo #(.T(bsum_t), .DEPTH(FIFO_DEPTH)) u_sum_fifo (
    .clk, .rst, .push(t1_v), .din('{sum: t1_sum, sumsq: t2_sum, last: t1_last}),
    .pop(bs_pop), .dout(bs_head), .empty(bs_empty), .full(bs_full),
    .count(bs_count), .free(bs_free)
  );
  assign bs_pop = !bs_empty && av_ready;

  ln_avg_var #(.S1W(S1W), .S2W(S2W), .ACCB(GBAW)) u_avg_var (
    .clk, .rst, .inv_n,
    .in_valid(!bs_empty), .in_sum(bs_head.sum), .in_sumsq(bs_head.sumsq),
    .in_last(bs_head.last), .in_ready(av_ready),
    .out_valid(st_valid), .out_avg(st_avg), .out_var(st_var), .out_ready(st_ready)
  );

  // ------------------------------------------------------- normalization
  sync_fifo #(.T(beat_t), .DEPTH(BYP_DEPTH)) u_bypass_fifo (
    .clk, .rst, .push(rd_v), .din(rd_beat), .pop(b_pop),
    .dout(b_head), .empty(b_empty), .full(b_full), .count(b_count), .free(b_free)
  );

  ln_rsqrt_norm #(.N(N), .GBAW(GBAW), .M(M)) u_norm (
    .clk, .rst,
    .stats_valid(st_valid), .stats_avg(st_avg), .stats_var(st_var), .stats_ready(st_ready),
    .x_valid(!b_empty), .x_data(b_head.data), .x_mask(b_head.mask), .x_last(b_head.last),
    .x_pop(b_pop), .gb_raddr, .gb_re, .gamma, .beta,
    .out_free(16'(o_free)), .out_valid(n_valid), .out_y(n_y), .out_mask(n_mask),
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

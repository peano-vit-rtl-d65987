// peano_vit_nonlinear -- the non-linear layers of a PEANO-ViT Vision
// Transformer accelerator: one layer-normalization unit, one softmax unit
// and one GELU unit, each between its own input and output activation
// BRAM, as in the paper's FPGA block diagram.
//
// The rest of the accelerator (the linear layers that produce and consume
// the activations) is outside this module: it writes a unit's input BRAM
// through the *_in_* write port, sets the job registers (row length,
// number of rows; for layer normalization also 1/n and the gamma/beta
// parameter RAM), pulses *_start, waits for *_done and reads the results
// through the *_out_* read port (one clock read latency). The three units
// are independent and may run at the same time.
//
// Data layout: a BRAM word is LOP = 16 elements, element i in bits
// [16i+15:16i]; a row occupies ceil(row_len/16) consecutive words starting
// on a word boundary, rows packed one after another from address 0.
// Activations are Q7.8; softmax results are unsigned Q1.15.
//
// Parameters: N lanes (paper: LOP = 16), WORDS BRAM depth, ROW_WORDS the
// longest row in beats, and the paper's three accuracy knobs -- M (m, the
// rsqrt table size, paper 4), ASTAR (alpha*, the reciprocal table size,
// paper 4) and LMSR (0 = MSR as evaluated in the paper, 1 = interpolated).
module peano_vit_nonlinear
  import peano_pkg::*;
#(
  parameter int unsigned N         = LOP,
  parameter int unsigned WORDS     = ACT_WORDS,
  parameter int unsigned ROW_WORDS = MAX_ROW / N,
  parameter bit          LMSR      = 1'b0,
  parameter int unsigned ASTAR     = ALPHA_STAR,   // paper: alpha*
  parameter int unsigned M         = LN_M,         // paper: m
  localparam int unsigned AW       = $clog2(WORDS),
  localparam int unsigned GBAW     = $clog2(ROW_WORDS)
) (
  input  logic              clk,
  input  logic              rst,
  // ---------------- layer normalization
  input  logic              ln_start,
  input  len_t              ln_row_len,
  input  len_t              ln_num_rows,
  input  logic [INV_W:0]    ln_inv_n,
  output logic              ln_busy,
  output logic              ln_done,
  input  logic              ln_in_we,
  input  logic [AW-1:0]     ln_in_waddr,
  input  fix_t [N-1:0]      ln_in_wdata,
  input  logic              ln_gb_we,
  input  logic [GBAW-1:0]   ln_gb_waddr,
  input  fix_t [N-1:0]      ln_gb_wgamma,
  input  fix_t [N-1:0]      ln_gb_wbeta,
  input  logic              ln_out_re,
  input  logic [AW-1:0]     ln_out_raddr,
  output fix_t [N-1:0]      ln_out_rdata,
  // ---------------- softmax
  input  logic              sm_start,
  input  len_t              sm_row_len,
  input  len_t              sm_num_rows,
  output logic              sm_busy,
  output logic              sm_done,
  input  logic              sm_in_we,
  input  logic [AW-1:0]     sm_in_waddr,
  input  fix_t [N-1:0]      sm_in_wdata,
  input  logic              sm_out_re,
  input  logic [AW-1:0]     sm_out_raddr,
  output logic [N-1:0][15:0] sm_out_rdata,
  // ---------------- GELU
  input  logic              ge_start,
  input  len_t              ge_row_len,
  input  len_t              ge_num_rows,
  output logic              ge_busy,
  output logic              ge_done,
  input  logic              ge_in_we,
  input  logic [AW-1:0]     ge_in_waddr,
  input  fix_t [N-1:0]      ge_in_wdata,
  input  logic              ge_out_re,
  input  logic [AW-1:0]     ge_out_raddr,
  output fix_t [N-1:0]      ge_out_rdata
);
  localparam int unsigned WW = N * DW;

  // ------------------------------------------------ layer normalization
  logic              ln_re, ln_we, ln_gb_re;
  logic [AW-1:0]     ln_raddr, ln_waddr;
  logic [GBAW-1:0]   ln_gb_raddr;
  fix_t [N-1:0]      ln_rdata, ln_wdata, ln_gamma, ln_beta;

  act_bram #(.WORDS(WORDS), .WIDTH(WW)) u_ln_in_bram (
    .clk, .we(ln_in_we), .waddr(ln_in_waddr), .wdata(ln_in_wdata),
    .re(ln_re), .raddr(ln_raddr), .rdata(ln_rdata)
  );
  act_bram #(.WORDS(ROW_WORDS), .WIDTH(2 * WW)) u_ln_gb_ram (
    .clk, .we(ln_gb_we), .waddr(ln_gb_waddr), .wdata({ln_gb_wgamma, ln_gb_wbeta}),
    .re(ln_gb_re), .raddr(ln_gb_raddr), .rdata({ln_gamma, ln_beta})
  );
  peano_layernorm #(.N(N), .AW(AW), .ROW_WORDS(ROW_WORDS), .M(M)) u_layernorm (
    .clk, .rst, .start(ln_start), .row_len(ln_row_len), .num_rows(ln_num_rows),
    .inv_n(ln_inv_n), .busy(ln_busy), .done(ln_done),
    .in_re(ln_re), .in_raddr(ln_raddr), .in_rdata(ln_rdata),
    .gb_re(ln_gb_re), .gb_raddr(ln_gb_raddr), .gamma(ln_gamma), .beta(ln_beta),
    .out_we(ln_we), .out_waddr(ln_waddr), .out_wdata(ln_wdata)
  );
  act_bram #(.WORDS(WORDS), .WIDTH(WW)) u_ln_out_bram (
    .clk, .we(ln_we), .waddr(ln_waddr), .wdata(ln_wdata),
    .re(ln_out_re), .raddr(ln_out_raddr), .rdata(ln_out_rdata)
  );

  // ------------------------------------------------------------ softmax
  logic               sm_re, sm_we;
  logic [AW-1:0]      sm_raddr, sm_waddr;
  fix_t [N-1:0]       sm_rdata;
  logic [N-1:0][15:0] sm_wdata;

  act_bram #(.WORDS(WORDS), .WIDTH(WW)) u_sm_in_bram (
    .clk, .we(sm_in_we), .waddr(sm_in_waddr), .wdata(sm_in_wdata),
    .re(sm_re), .raddr(sm_raddr), .rdata(sm_rdata)
  );
  peano_softmax #(.N(N), .AW(AW), .ROW_WORDS(ROW_WORDS), .LMSR(LMSR), .ASTAR(ASTAR)) u_softmax (
    .clk, .rst, .start(sm_start), .row_len(sm_row_len), .num_rows(sm_num_rows),
    .busy(sm_busy), .done(sm_done),
    .in_re(sm_re), .in_raddr(sm_raddr), .in_rdata(sm_rdata),
    .out_we(sm_we), .out_waddr(sm_waddr), .out_wdata(sm_wdata)
  );
  act_bram #(.WORDS(WORDS), .WIDTH(WW)) u_sm_out_bram (
    .clk, .we(sm_we), .waddr(sm_waddr), .wdata(sm_wdata),
    .re(sm_out_re), .raddr(sm_out_raddr), .rdata(sm_out_rdata)
  );

  // --------------------------------------------------------------- GELU
  logic              ge_re, ge_we;
  logic [AW-1:0]     ge_raddr, ge_waddr;
  fix_t [N-1:0]      ge_rdata, ge_wdata;

  act_bram #(.WORDS(WORDS), .WIDTH(WW)) u_ge_in_bram (
    .clk, .we(ge_in_we), .waddr(ge_in_waddr), .wdata(ge_in_wdata),
    .re(ge_re), .raddr(ge_raddr), .rdata(ge_rdata)
  );
  peano_gelu #(.N(N), .AW(AW)) u_gelu (
    .clk, .rst, .start(ge_start), .row_len(ge_row_len), .num_rows(ge_num_rows),
    .busy(ge_busy), .done(ge_done),
    .in_re(ge_re), .in_raddr(ge_raddr), .in_rdata(ge_rdata),
    .out_we(ge_we), .out_waddr(ge_waddr), .out_wdata(ge_wdata)
  );
  act_bram #(.WORDS(WORDS), .WIDTH(WW)) u_ge_out_bram (
    .clk, .we(ge_we), .waddr(ge_waddr), .wdata(ge_wdata),
    .re(ge_out_re), .raddr(ge_out_raddr), .rdata(ge_out_rdata)
  );
endmodule

// peano_layernorm_check -- the whole layer-normalization unit between
// modelled activation BRAMs and gamma/beta RAM. Jobs: rows of 768 (DeiT-B
// embedding width), 384, 1024 (the longest row) and odd lengths with
// padding, with random offsets and spreads, plus a constant row (Var = 0).
// Checks every element bit for bit against the reference model, closeness
// to exact layer normalization, padding lanes 0, one 'done' per job and
// the rate: the row is read once and rows overlap (one is normalized while
// the next is summed), so a job of W words on R rows of B words takes at
// most W + B + 8R + 40 clocks -- one beat per clock after a one-row delay.
//
// The unit's table size m (parameter M) can be changed; the bit-exact
// reference follows it, and the tolerance against exact layer norm is 5% of
// the normalized value at m >= 4 and 12% at smaller m (at m = 3 one table
// step alone is 2^(1/8), about 9%).
//
// Interface: parameters N (lanes), AW (BRAM address width) and M; outputs
// the check and failure counts and 'finished'. tb_peano_layernorm runs it
// at two lane counts and three values of m.
module peano_layernorm_check #(
  parameter int N  = 16,   // lanes of the unit under test
  parameter int AW = 10,   // address width of the modelled BRAMs
  parameter int M  = int'(peano_pkg::LN_M) // rsqrt table bits of the unit
) (
  output int   n_checks,
  output int   n_failures,
  output logic finished   // all jobs run and checked
);
  import peano_pkg::*;
  import peano_ref_pkg::*;
  logic clk = 0, rst = 1;
  always #5 clk = ~clk;
  logic start, busy, done, in_re, out_we, gb_re;
  len_t row_len, num_rows;
  logic [INV_W:0] inv_n;
  logic [AW-1:0] in_raddr, out_waddr;
  logic [5:0] gb_raddr;
  fix_t [N-1:0] in_rdata, out_wdata, gamma, beta;
  fix_t [N-1:0] imem [2**AW], omem [2**AW], gmem [64], bmem [64];
  int checks = 0, failures = 0, dones = 0;

  localparam real REL = (M >= 4) ? 0.05 : 0.12;   // relative tolerance vs exact

  peano_layernorm #(.N(N), .AW(AW), .M(M)) dut (.*);

  always @(posedge clk) begin
    if (in_re) in_rdata <= imem[in_raddr];
    if (gb_re) begin gamma <= gmem[gb_raddr]; beta <= bmem[gb_raddr]; end
    if (out_we) omem[out_waddr] <= out_wdata;
    if (done) dones++;
  end

  assign n_checks = checks;
  assign n_failures = failures;
  initial finished = 1'b0;

  task automatic run_job(int rl, int nr, int spread, bit constant);
    int words, bpr, cyc, d0;
    bpr = (rl + N - 1) / N;
    words = nr * bpr;
    for (int a = 0; a < 64; a++)
      for (int i = 0; i < N; i++) begin
        gmem[a][i] = 16'($urandom_range(0, 511) - 128);
        bmem[a][i] = 16'($urandom_range(0, 511) - 256);
      end
    for (int r = 0; r < nr; r++) begin
      int off;
      off = $urandom_range(0, 1000) - 500;
      for (int b = 0; b < bpr; b++)
        for (int i = 0; i < N; i++)
          imem[r * bpr + b][i] = constant ? 16'(off) : 16'(off + $urandom_range(0, 2 * spread) - spread);
    end
    d0 = dones;
    @(negedge clk);
    row_len = len_t'(rl); num_rows = len_t'(nr); start = 1;
    inv_n = (INV_W+1)'(((longint'(1) << (INV_W + 1)) / rl + 1) / 2);
    @(negedge clk);
    start = 0;
    cyc = 1;
    while (busy) begin @(negedge clk); cyc++; end
    checks++;
    if (dones - d0 != 1) failures++;
    checks++;
    if (cyc > words + bpr + 8 * nr + 40) begin failures++; $display("FAIL %0d words took %0d clocks", words, cyc); end
    $display("layernorm job %0d x %0d: %0d words in %0d clocks", nr, rl, words, cyc);
    for (int r = 0; r < nr; r++) begin
      int xs [$];
      longint avg, var_q;
      real s, sq, mean, sd;
      peano_ref_pkg::me_t rs;
      xs = {};
      for (int k = 0; k < rl; k++) xs.push_back(int'(imem[r * bpr + k / N][k % N]));
      ref_ln_stats(xs, longint'(inv_n), avg, var_q);
      rs = ref_rsqrt(longint'(var_q), M);
      s = 0; sq = 0;
      foreach (xs[k]) begin s += real'(xs[k]) / 256.0; sq += (real'(xs[k]) / 256.0) ** 2; end
      mean = s / rl; sd = $sqrt(sq / rl - mean * mean);
      for (int k = 0; k < bpr * N; k++) begin
        int got, want;
        got = int'(omem[r * bpr + k / N][k % N]);
        want = (k < rl) ? ref_ln_elem(xs[k], avg, rs.mant, rs.e, int'(gmem[k / N][k % N]),
                                      int'(bmem[k / N][k % N])) : 0;
        checks++;
        if (got != want) begin
          failures++;
          if (failures < 8) $display("FAIL row %0d k %0d: %0d want %0d", r, k, got, want);
        end
        if (k < rl && !constant) begin
          real ng, ex;
          ng = (real'(xs[k]) / 256.0 - mean) / sd * real'(gmem[k / N][k % N]) / 256.0;
          ex = ng + real'(bmem[k / N][k % N]) / 256.0;
          if (ng < 0.0) ng = -ng;
          checks++;
          if ((real'(got) / 256.0 - ex) ** 2 > (REL * ng + 0.012) ** 2) begin
            failures++;
            if (failures < 8) $display("FAIL exact row %0d k %0d: %f want %f", r, k, real'(got) / 256.0, ex);
          end
        end
      end
    end
  endtask

  initial begin
    start = 0; row_len = 0; num_rows = 0; inv_n = 0;
    repeat (3) @(posedge clk);
    rst = 0;
    run_job(768, 4, 400, 0);
    run_job(384, 6, 100, 0);
    run_job(1024, 3, 1500, 0);
    run_job(197, 5, 50, 0);
    run_job(7, 30, 300, 0);
    run_job(64, 2, 0, 1);
    finished = 1'b1;
  end
endmodule

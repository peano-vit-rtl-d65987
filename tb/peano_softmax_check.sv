// peano_softmax_check -- the whole softmax unit between modelled activation
// BRAMs. Jobs: rows of 197 (DeiT/ViT token count at 224x224, 16x16
// patches), 49 (a Swin 7x7 window), 1024 (the longest row), 1 and odd
// lengths, with inputs spread so that some elements fall below the cut-off
// (x - max + 2 < -3). Checks every output against the reference model of
// the paper's algorithm bit for bit, against exact softmax, that each row
// sums to about 1, padding lanes 0, one 'done' per job, and the rate:
// each row is read twice, so a job of W words on R rows of B words takes
// at most 2W + 2B + 12R + 40 clocks. A second unit built with LMSR = LMSR2
// and alpha* = ASTAR2 (by default the interpolated reciprocal in both
// divisions, alpha* = 4) runs the same jobs side by side; it is checked bit
// for bit against the reference model at those settings, and when it uses
// LMSR its mean square error against exact softmax must not exceed plain
// MSR's at alpha* = 4.
//
// Interface: parameters N (lanes), AW (BRAM address width), LMSR2 and
// ASTAR2 (the second unit's settings); outputs the check and failure counts
// and 'finished'. tb_peano_softmax runs it at two lane counts and two
// alpha* values.
module peano_softmax_check #(
  parameter int N  = 16,   // lanes of the unit under test
  parameter int AW = 10,   // address width of the modelled BRAMs
  parameter bit LMSR2  = 1'b1,                    // second unit: LMSR-approx
  parameter int ASTAR2 = int'(peano_pkg::ALPHA_STAR) // second unit: alpha*
) (
  output int   n_checks,
  output int   n_failures,
  output logic finished   // all jobs run and checked
);
  import peano_pkg::*;
  import peano_ref_pkg::*;
  logic clk = 0, rst = 1;
  always #5 clk = ~clk;
  logic start, busy, done, in_re, out_we;
  len_t row_len, num_rows;
  logic [AW-1:0] in_raddr, out_waddr;
  fix_t [N-1:0] in_rdata;
  logic [N-1:0][15:0] out_wdata;
  fix_t [N-1:0] imem [2**AW];
  logic [N-1:0][15:0] omem [2**AW];
  int checks = 0, failures = 0, dones = 0, cut = 0;
  real se_msr = 0.0, se_lmsr = 0.0;

  peano_softmax #(.N(N), .AW(AW)) dut (.*);

  // the second unit (LMSR2, ASTAR2)
  logic busy_l, done_l, in_re_l, out_we_l;
  logic [AW-1:0] in_raddr_l, out_waddr_l;
  fix_t [N-1:0] in_rdata_l;
  logic [N-1:0][15:0] out_wdata_l;
  logic [N-1:0][15:0] omem_l [2**AW];
  int dones_l = 0;
  peano_softmax #(.N(N), .AW(AW), .LMSR(LMSR2), .ASTAR(ASTAR2)) dut_l (
    .clk, .rst, .start, .row_len, .num_rows, .busy(busy_l), .done(done_l),
    .in_re(in_re_l), .in_raddr(in_raddr_l), .in_rdata(in_rdata_l),
    .out_we(out_we_l), .out_waddr(out_waddr_l), .out_wdata(out_wdata_l));

  always @(posedge clk) begin
    if (in_re) in_rdata <= imem[in_raddr];
    if (out_we) omem[out_waddr] <= out_wdata;
    if (done && !rst) dones++;
    if (in_re_l) in_rdata_l <= imem[in_raddr_l];
    if (out_we_l) omem_l[out_waddr_l] <= out_wdata_l;
    if (done_l && !rst) dones_l++;
  end

  assign n_checks = checks;
  assign n_failures = failures;
  initial finished = 1'b0;

  task automatic run_job(int rl, int nr, int spread);
    int words, bpr, cyc, d0;
    bpr = (rl + N - 1) / N;
    words = nr * bpr;
    for (int r = 0; r < nr; r++) begin
      int off;
      off = $urandom_range(0, 4000) - 2000;
      for (int b = 0; b < bpr; b++)
        for (int i = 0; i < N; i++)
          imem[r * bpr + b][i] = 16'(off + $urandom_range(0, 2 * spread) - spread);
    end
    d0 = dones;
    @(negedge clk);
    row_len = len_t'(rl); num_rows = len_t'(nr); start = 1;
    @(negedge clk);
    start = 0;
    cyc = 1;
    while (busy || busy_l) begin @(negedge clk); cyc++; end
    checks++;
    if (dones - d0 != 1 || dones_l != dones) failures++;
    checks++;
    if (cyc > 2 * words + 2 * bpr + 12 * nr + 40) begin
      failures++; $display("FAIL %0d words took %0d clocks", words, cyc);
    end
    $display("softmax job %0d x %0d: %0d words in %0d clocks", nr, rl, words, cyc);
    for (int r = 0; r < nr; r++) begin
      int xs [$];
      longint es [$];
      int mx;
      longint tot;
      real rs, rtot, ytot;
      peano_ref_pkg::me_t m;
      xs = {}; es = {};
      mx = -40000;
      for (int k = 0; k < rl; k++) begin
        xs.push_back(int'(imem[r * bpr + k / N][k % N]));
        if (xs[k] > mx) mx = xs[k];
      end
      tot = 0; rtot = 0;
      for (int k = 0; k < rl; k++) begin
        es.push_back(ref_exp(xs[k], mx, 1'b0));
        if (es[k] == 0) cut++;
        tot += es[k];
        rtot += $exp(real'(xs[k] - mx) / 256.0);
      end
      m = ref_msr(longint'(tot), 1'b0);
      // the second unit: its own exponentials and reciprocal
      begin
        longint el [$];
        longint totl;
        peano_ref_pkg::me_t ml;
        el = {}; totl = 0;
        for (int k = 0; k < rl; k++) begin el.push_back(ref_exp(xs[k], mx, LMSR2, ASTAR2)); totl += el[k]; end
        ml = ref_msr(longint'(totl), LMSR2, ASTAR2);
        for (int k = 0; k < bpr * N; k++) begin
          longint want;
          int got;
          got = int'(omem_l[r * bpr + k / N][k % N]);
          want = (k < rl) ? ((el[k] * ml.mant) >> (RF + ml.e - SM_OFW)) : 0;
          if (want > 65535) want = 65535;
          checks++;
          if (longint'(got) != want) begin
            failures++;
            if (failures < 8) $display("FAIL lmsr row %0d k %0d: %0d want %0d", r, k, got, want);
          end
          if (k < rl) se_lmsr += (real'(got) / 32768.0 - $exp(real'(xs[k] - mx) / 256.0) / rtot) ** 2;
        end
      end
      ytot = 0;
      for (int k = 0; k < bpr * N; k++) begin
        longint want;
        int got;
        real ex;
        got = int'(omem[r * bpr + k / N][k % N]);
        want = (k < rl) ? ((es[k] * m.mant) >> (RF + m.e - SM_OFW)) : 0;
        if (want > 65535) want = 65535;
        checks++;
        if (longint'(got) != want) begin
          failures++;
          if (failures < 8) $display("FAIL row %0d k %0d: %0d want %0d", r, k, got, want);
        end
        if (k < rl) begin
          ex = $exp(real'(xs[k] - mx) / 256.0) / rtot;
          ytot += real'(got) / 32768.0;
          se_msr += (real'(got) / 32768.0 - ex) ** 2;
          checks++;
          if ((real'(got) / 32768.0 - ex) ** 2 > (0.2 * ex + 0.01) ** 2) begin
            failures++;
            if (failures < 8) $display("FAIL exact row %0d k %0d: %f want %f", r, k, real'(got) / 32768.0, ex);
          end
        end
      end
      checks++;
      if (ytot < 0.98 || ytot > 1.08) begin failures++; $display("FAIL row sum %f", ytot); end
    end
  endtask

  initial begin
    start = 0; row_len = 0; num_rows = 0;
    repeat (3) @(posedge clk);
    rst = 0;
    run_job(197, 4, 600);
    run_job(49, 10, 300);
    run_job(1024, 2, 1200);
    run_job(1, 5, 10);
    run_job(33, 12, 2000);
    checks++;
    if (cut == 0) begin failures++; $display("FAIL no element below the cut-off"); end
    $display("squared error against exact softmax: MSR %e, second unit (LMSR %0d, alpha* %0d) %e",
             se_msr, LMSR2, ASTAR2, se_lmsr);
    if (LMSR2) begin
      checks++;
      if (se_lmsr > se_msr) failures++;
    end
    finished = 1'b1;
  end
endmodule

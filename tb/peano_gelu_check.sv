// peano_gelu_check -- the whole GELU unit between modelled activation BRAMs.
// Runs jobs of various shapes (row lengths that are and are not multiples
// of N, one to many rows, a job with zero rows), checks every output word
// against the reference model (padding lanes 0), that 'done' pulses once
// per job, and the rate: one N-element beat per clock, i.e. a job of W
// words takes at most W + 12 clocks. Back-to-back starts while busy are
// ignored.
//
// Interface: parameters N (lanes) and AW (BRAM address width); outputs the
// check and failure counts and 'finished'. tb_peano_gelu runs it at two
// lane counts.
module peano_gelu_check #(
  parameter int N  = 16,   // lanes of the unit under test
  parameter int AW = 10    // address width of the modelled BRAMs
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
  fix_t [N-1:0] in_rdata, out_wdata;
  fix_t [N-1:0] imem [2**AW], omem [2**AW];
  int checks = 0, failures = 0, dones = 0;

  peano_gelu #(.N(N), .AW(AW)) dut (.*);

  always @(posedge clk) begin
    if (in_re) in_rdata <= imem[in_raddr];
    if (out_we) omem[out_waddr] <= out_wdata;
    if (done) dones++;
  end

  assign n_checks = checks;
  assign n_failures = failures;
  initial finished = 1'b0;

  task automatic run_job(int rl, int nr);
    int words, cyc, d0;
    words = nr * ((rl + N - 1) / N);
    for (int a = 0; a < 2**AW; a++)
      for (int i = 0; i < N; i++) begin
        imem[a][i] = 16'($urandom_range(0, 3071) - 1536);
        omem[a][i] = 16'h5555;
      end
    d0 = dones;
    @(negedge clk);
    row_len = len_t'(rl); num_rows = len_t'(nr); start = 1;
    @(negedge clk);
    start = 1;                     // a second start while busy is ignored
    @(negedge clk);
    start = 0;
    cyc = 2;
    while (busy) begin @(negedge clk); cyc++; end
    checks++;
    if (dones - d0 != 1) begin failures++; $display("FAIL done count %0d", dones - d0); end
    checks++;
    if (cyc > words + 12) begin failures++; $display("FAIL %0d words took %0d clocks", words, cyc); end
    for (int r = 0; r < nr; r++)
      for (int b = 0; b < (rl + N - 1) / N; b++) begin
        int a;
        a = r * ((rl + N - 1) / N) + b;
        for (int i = 0; i < N; i++) begin
          int want;
          want = (b * N + i < rl) ? ref_gelu(int'(imem[a][i])) : 0;
          checks++;
          if (int'(omem[a][i]) != want) begin
            failures++;
            if (failures < 8) $display("FAIL word %0d lane %0d: %0d want %0d", a, i, omem[a][i], want);
          end
        end
      end
    // nothing written past the job
    checks++;
    if (words < 2**AW && omem[words][0] != 16'h5555) failures++;
  endtask

  initial begin
    start = 0; row_len = 0; num_rows = 0;
    repeat (3) @(posedge clk);
    rst = 0;
    run_job(16, 1);
    run_job(3072, 3);     // one token of a DeiT-B/ViT MLP hidden layer is 3072 wide
    run_job(197, 5);
    run_job(5, 40);
    run_job(1000, 1);
    // a job with no rows finishes at once
    @(negedge clk); row_len = 16; num_rows = 0; start = 1;
    @(negedge clk); start = 0;
    @(negedge clk);
    checks++;
    if (busy) failures++;
    finished = 1'b1;
  end
endmodule

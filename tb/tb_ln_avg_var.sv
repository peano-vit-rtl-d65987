// tb_ln_avg_var -- feeds rows of random Q7.8 elements as per-beat sums of
// x and x^2 (as the adder trees deliver them), with random gaps and random
// stalls on the result side. Checks Avg and Var against the reference
// model bit for bit, against the exact mean and variance, the
// clip-to-zero of a constant row, and that beats are refused while a
// result waits.
module tb_ln_avg_var;
  import peano_pkg::*;
  import peano_ref_pkg::*;
  localparam int N = 16;
  logic clk = 0, rst = 1;
  always #5 clk = ~clk;
  logic [INV_W:0] inv_n;
  logic in_valid, in_last, in_ready, out_valid, out_ready;
  logic signed [19:0] in_sum;
  logic signed [36:0] in_sumsq;
  logic signed [31:0] out_avg;
  logic [31:0] out_var;
  int checks = 0, failures = 0;
  typedef struct { longint avg; longint var_q; real ravg; real rvar; } res_t;
  res_t q [$];

  ln_avg_var #(.S1W(20), .S2W(37)) dut (.*);

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) if (!rst && out_valid && out_ready) begin
    res_t w;
    w = q.pop_front();
    checks++;
    if (longint'(out_avg) != w.avg || longint'(out_var) != w.var_q) begin
      failures++;
      if (failures < 8) $display("FAIL avg=%0d/%0d var=%0d/%0d", out_avg, w.avg, out_var, w.var_q);
    end
    checks++;
    if ((real'(out_avg) / 65536.0 - w.ravg) ** 2 > 1e-6 ||
        (real'(out_var) / 65536.0 - w.rvar) ** 2 > (1e-3 + 1e-3 * w.rvar) ** 2) begin
      failures++;
      if (failures < 8) $display("FAIL exact avg=%f/%f var=%f/%f", real'(out_avg) / 65536.0, w.ravg, real'(out_var) / 65536.0, w.rvar);
    end
  end

  always @(negedge clk) out_ready = ($urandom_range(0, 3) != 0);

  initial begin
    in_valid = 0; in_last = 0; in_sum = 0; in_sumsq = 0; inv_n = 0;
    repeat (3) @(posedge clk);
    rst = 0;
    for (int r = 0; r < 200; r++) begin
      int n, beats, off;
      int xs [$];
      longint a, v;
      real s, sq;
      while (q.size() != 0) @(negedge clk);   // inv_n may change only between results
      n = (r < 3) ? 768 : $urandom_range(1, 1024);
      inv_n = (INV_W+1)'((longint'(1) << INV_W) / n + (((longint'(1) << INV_W) % n) * 2 >= n ? 1 : 0));
      off = $urandom_range(0, 2000) - 1000;
      xs = {};
      for (int i = 0; i < n; i++) xs.push_back((r == 1) ? 300 : off + $urandom_range(0, 1023) - 512);
      ref_ln_stats(xs, longint'(inv_n), a, v);
      s = 0; sq = 0;
      foreach (xs[i]) begin s += real'(xs[i]) / 256.0; sq += (real'(xs[i]) / 256.0) ** 2; end
      q.push_back('{avg: a, var_q: v, ravg: s / n, rvar: sq / n - (s / n) ** 2});
      beats = (n + N - 1) / N;
      for (int b = 0; b < beats; b++) begin
        longint bs, bq;
        bs = 0; bq = 0;
        for (int i = b * N; i < n && i < b * N + N; i++) begin bs += xs[i]; bq += longint'(xs[i]) * xs[i]; end
        @(negedge clk);
        in_valid = 1; in_sum = 20'(bs); in_sumsq = 37'(bq); in_last = (b == beats - 1);
        while (!in_ready) @(negedge clk);     // in_ready is registered: stable here
        @(posedge clk); #1;
        in_valid = 0;
      end
      // while the row's result is pending, beats are refused
      @(negedge clk);
      checks++;
      if (in_ready && !out_valid && q.size() > 0) begin
        @(negedge clk);
        if (in_ready && !out_valid && q.size() > 0) failures++;
      end
    end
    @(negedge clk); in_valid = 0;
    repeat (20) @(posedge clk);
    checks++;
    if (q.size() != 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

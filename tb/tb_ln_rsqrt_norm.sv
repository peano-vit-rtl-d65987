// tb_ln_rsqrt_norm -- drives row statistics and row elements into the
// normalization stage, with a modelled gamma/beta RAM (one-clock read) and
// a modelled output FIFO of depth 8 drained at random, so the credit
// back-pressure is exercised. Checks every output element bit for bit
// against the reference model (1/sqrt from the approximation), checks the
// result against exact layer normalization (within 5% of the normalized,
// scaled part -- the 1/sqrt approximation error -- plus 3 LSB), that padding lanes give 0, 'last' flags, and that the output FIFO
// never overflows.
module tb_ln_rsqrt_norm;
  import peano_pkg::*;
  import peano_ref_pkg::*;
  localparam int N = 16, OD = 8;
  logic clk = 0, rst = 1;
  always #5 clk = ~clk;
  logic stats_valid, stats_ready, x_valid, x_last, x_pop, gb_re, out_valid, out_last;
  logic signed [31:0] stats_avg;
  logic [31:0] stats_var;
  fix_t [N-1:0] x_data, gamma, beta, out_y;
  logic [N-1:0] x_mask, out_mask;
  logic [5:0] gb_raddr;
  logic [15:0] out_free;
  int checks = 0, failures = 0, stalls = 0;

  typedef struct { fix_t [N-1:0] d; logic [N-1:0] m; logic last; } beat_t;
  beat_t xq [$];
  fix_t [N-1:0] gmem [64], bmem [64];
  typedef struct { int y [N]; real ry [N]; real rn [N]; logic [N-1:0] m; logic last; } res_t;
  res_t rq [$];
  int occ = 0;

  ln_rsqrt_norm #(.N(N), .GBAW(6)) dut (.*);

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // bypass FIFO model
  always_comb begin
    x_valid = xq.size() > 0;
    x_data  = x_valid ? xq[0].d : '0;
    x_mask  = x_valid ? xq[0].m : '0;
    x_last  = x_valid ? xq[0].last : 1'b0;
  end
  // gamma / beta RAM model and output FIFO model
  assign out_free = 16'(OD - occ);
  always @(posedge clk) begin
    logic drain;
    if (gb_re) begin gamma <= gmem[gb_raddr]; beta <= bmem[gb_raddr]; end
    if (x_pop) void'(xq.pop_front());
    drain = (occ > 0) && ($urandom_range(0, 2) == 0);
    if (!rst && x_valid && !x_pop && dut.have_row) stalls++;
    occ <= occ + int'(out_valid) - int'(drain);
    if (!rst && out_valid) begin
      res_t w;
      checks++;
      if (occ >= OD && !drain) begin failures++; $display("FAIL output FIFO overflow"); end
      w = rq.pop_front();
      for (int i = 0; i < N; i++) begin
        checks++;
        if (int'(out_y[i]) != (w.m[i] ? w.y[i] : 0)) begin
          failures++;
          if (failures < 8) $display("FAIL y[%0d]=%0d want %0d", i, out_y[i], w.y[i]);
        end
        if (w.m[i]) begin
          real got;
          got = real'(out_y[i]) / 256.0;
          checks++;
          if ((got - w.ry[i]) ** 2 > (0.05 * w.rn[i] + 0.012) ** 2) begin
            failures++;
            if (failures < 8) $display("FAIL exact y=%f want %f", got, w.ry[i]);
          end
        end
      end
      checks++;
      if (out_last != w.last) failures++;
    end
  end

  initial begin
    stats_valid = 0; stats_avg = 0; stats_var = 0;
    for (int a = 0; a < 64; a++)
      for (int i = 0; i < N; i++) begin
        gmem[a][i] = 16'($urandom_range(0, 511) - 128);      // gamma in [-0.5, 1.5]
        bmem[a][i] = 16'($urandom_range(0, 511) - 256);      // beta in [-1, 1]
      end
    repeat (3) @(posedge clk);
    rst = 0;
    for (int r = 0; r < 40; r++) begin
      int n, beats;
      int xs [$];
      longint avg, var_q;
      real mean, sd, s, sq;
      peano_ref_pkg::me_t rs;
      n = (r == 0) ? 1024 : $urandom_range(1, 1024);
      beats = (n + N - 1) / N;
      xs = {};
      for (int i = 0; i < n; i++) xs.push_back($urandom_range(0, 2047) - 1024 + ((r % 3) - 1) * 700);
      ref_ln_stats(xs, (longint'(1) << INV_W) / n, avg, var_q);
      rs = ref_rsqrt(longint'(var_q));
      s = 0; sq = 0;
      foreach (xs[i]) begin s += real'(xs[i]) / 256.0; sq += (real'(xs[i]) / 256.0) ** 2; end
      mean = s / n; sd = $sqrt(sq / n - mean * mean);
      for (int b = 0; b < beats; b++) begin
        beat_t bt; res_t w;
        for (int i = 0; i < N; i++) begin
          int k;
          k = b * N + i;
          bt.m[i] = k < n;
          bt.d[i] = (k < n) ? 16'(xs[k]) : 16'(12345);
          w.m[i] = bt.m[i];
          w.y[i] = (k < n) ? ref_ln_elem(xs[k], avg, rs.mant, rs.e, int'(gmem[b][i]), int'(bmem[b][i])) : 0;
          w.rn[i] = (k < n) ? (real'(xs[k]) / 256.0 - mean) / sd * real'(gmem[b][i]) / 256.0 : 0.0;
          if (w.rn[i] < 0.0) w.rn[i] = -w.rn[i];
          w.ry[i] = (k < n) ? (real'(xs[k]) / 256.0 - mean) / sd * real'(gmem[b][i]) / 256.0
                             + real'(bmem[b][i]) / 256.0 : 0.0;
        end
        bt.last = (b == beats - 1);
        w.last = bt.last;
        xq.push_back(bt);
        rq.push_back(w);
      end
      @(negedge clk);
      stats_valid = 1; stats_avg = 32'(avg); stats_var = 32'(var_q);
      @(posedge clk);
      while (!stats_ready) @(posedge clk);
      #1 stats_valid = 0;
      while (xq.size() > 0) @(posedge clk);
    end
    repeat (40) @(posedge clk);
    checks++;
    if (rq.size() != 0) failures++;
    checks++;
    if (stalls == 0) begin failures++; $display("FAIL no back-pressure stall seen"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

// tb_softmax_norm -- feeds rows of PEANOexp values to the softmax
// normalization stage: the per-beat sums (as from the adder-tree FIFO)
// and the values themselves (as from the side FIFO), with random gaps,
// and a modelled output FIFO of depth 6 drained at random. Checks every
// output against e * MSR(Sum) from the reference model bit for bit,
// against e / Sum within MSR's 1/16, padding lanes, 'last' flags, that
// each row's results add up to about 1, and no output FIFO overflow.
module tb_softmax_norm;
  import peano_pkg::*;
  import peano_ref_pkg::*;
  localparam int N = 16, OD = 6, SW = 21;
  logic clk = 0, rst = 1;
  always #5 clk = ~clk;
  logic sum_valid, sum_last, sum_pop, e_valid, e_last, e_pop, out_valid, out_last;
  logic signed [SW-1:0] sum_in;
  logic [N-1:0][15:0] e_data, out_y;
  logic [N-1:0] e_mask;
  logic [15:0] out_free;
  int checks = 0, failures = 0, stalls = 0;

  typedef struct { logic signed [SW-1:0] s; logic last; } sb_t;
  typedef struct { logic [N-1:0][15:0] e; logic [N-1:0] m; logic last; } eb_t;
  typedef struct { int y [N]; real ry [N]; logic last; } res_t;
  sb_t sq [$];
  eb_t eq [$];
  res_t rq [$];
  int occ = 0;
  real row_total = 0.0;

  softmax_norm #(.N(N), .SW(SW), .ACCW(SW + 6)) dut (.*);

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always_comb begin
    sum_valid = sq.size() > 0;
    sum_in    = sum_valid ? sq[0].s : '0;
    sum_last  = sum_valid ? sq[0].last : 1'b0;
    e_valid   = eq.size() > 0;
    e_data    = e_valid ? eq[0].e : '0;
    e_mask    = e_valid ? eq[0].m : '0;
    e_last    = e_valid ? eq[0].last : 1'b0;
  end
  assign out_free = 16'(OD - occ);

  always @(posedge clk) begin
    logic drain;
    if (sum_pop) void'(sq.pop_front());
    if (e_pop) void'(eq.pop_front());
    if (!rst && dut.state == 2'd2 && e_valid && !e_pop) stalls++;
    drain = (occ > 0) && ($urandom_range(0, 2) == 0);
    occ <= occ + int'(out_valid) - int'(drain);
    if (!rst && out_valid) begin
      res_t w;
      if (occ >= OD && !drain) begin failures++; $display("FAIL overflow"); end
      w = rq.pop_front();
      for (int i = 0; i < N; i++) begin
        real got;
        got = real'(out_y[i]) / 32768.0;
        row_total += got;
        checks++;
        if (int'(out_y[i]) != w.y[i]) begin
          failures++;
          if (failures < 8) $display("FAIL y=%0d want %0d", out_y[i], w.y[i]);
        end
        checks++;
        if (got < w.ry[i] * 0.999 - 0.0001 || got > w.ry[i] * (1.0 + 1.0 / 16.0) + 0.0001) begin
          failures++;
          if (failures < 8) $display("FAIL exact y=%f want %f", got, w.ry[i]);
        end
      end
      checks++;
      if (out_last != w.last) failures++;
      if (w.last) begin
        checks++;
        if (row_total < 0.99 || row_total > 1.07) begin
          failures++;
          $display("FAIL row total %f", row_total);
        end
        row_total = 0.0;
      end
    end
  end

  initial begin
    repeat (3) @(posedge clk);
    rst = 0;
    for (int r = 0; r < 60; r++) begin
      int n, beats;
      int es [$];
      longint tot, y;
      peano_ref_pkg::me_t m;
      n = (r == 0) ? 1024 : (r == 1) ? 1 : $urandom_range(1, 300);
      beats = (n + N - 1) / N;
      es = {};
      tot = 0;
      for (int i = 0; i < n; i++) begin
        int v;
        v = (i == 0) ? 57344 : ($urandom_range(0, 3) == 0 ? 0 : $urandom_range(0, 57344));
        es.push_back(v);
        tot += v;
      end
      m = ref_msr(longint'(tot), 1'b0);
      for (int b = 0; b < beats; b++) begin
        eb_t eb; res_t w; longint bs;
        bs = 0;
        for (int i = 0; i < N; i++) begin
          int k;
          k = b * N + i;
          eb.m[i] = k < n;
          eb.e[i] = (k < n) ? 16'(es[k]) : 16'(999);
          if (k < n) bs += es[k];
          y = (k < n) ? ((longint'(es[k]) * m.mant) >> (RF + m.e - SM_OFW)) : 0;
          w.y[i] = int'((y > 65535) ? 65535 : y);
          w.ry[i] = (k < n) ? real'(es[k]) / real'(tot) : 0.0;
        end
        eb.last = (b == beats - 1);
        w.last = eb.last;
        eq.push_back(eb);
        rq.push_back(w);
        sq.push_back('{s: SW'(bs), last: eb.last});
      end
      while (eq.size() > 0) @(posedge clk);
    end
    repeat (40) @(posedge clk);
    checks++;
    if (rq.size() != 0) failures++;
    checks++;
    if (stalls == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

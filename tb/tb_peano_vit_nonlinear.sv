// tb_peano_vit_nonlinear -- end-to-end test of the three PEANO-ViT
// non-linear units at their default sizes (16 lanes, 4096-word BRAMs,
// rows up to 1024 elements), driven only through the top-level ports.
//
// Each round is one job per unit, all three started together. The first
// round is sized after DeiT-B (embedding 768, 197 tokens, MLP 3072):
//   layer normalization  64 tokens x 768 (3072 words) with random gamma/beta
//   softmax              one attention head, 197 rows x 197 (2561 words)
//   GELU                 21 tokens x 3072 (4032 words)
// Further rounds use the row sizes of DeiT-S (384 / 197 / 1536), ViT-L
// (1024 / 197 / 4096, filling a whole BRAM) and Swin-B's first stage
// (128 / 49-element window rows / 512), then a round of short jobs. The
// host writes the input BRAMs (and gamma/beta), starts the units, waits for
// all of them and reads the output BRAMs back. Every element is compared
// with the reference models bit for bit and with the exact functions
// within the approximation error.
//
// Mechanisms counted (each must occur at least once): all three units
// busy at the same time; layer-norm rows waiting in the bypass FIFO for
// their statistics; softmax exponentials waiting in the side FIFO for the
// row sum; softmax elements cut to 0 below x - max + 2 = -3; MSR with a
// scale shift (alpha > 0) in both softmax divisions; the 1/sqrt shift
// going each way (variance below and above 1); every GELU segment; padded
// partial beats.
module tb_peano_vit_nonlinear;
  import peano_pkg::*;
  import peano_ref_pkg::*;
  localparam int N = LOP, AW = $clog2(ACT_WORDS);
  logic clk = 0, rst = 1;
  always #5 clk = ~clk;

  logic ln_start, ln_busy, ln_done, ln_in_we, ln_gb_we, ln_out_re;
  len_t ln_row_len, ln_num_rows;
  logic [INV_W:0] ln_inv_n;
  logic [AW-1:0] ln_in_waddr, ln_out_raddr;
  logic [5:0] ln_gb_waddr;
  fix_t [N-1:0] ln_in_wdata, ln_gb_wgamma, ln_gb_wbeta, ln_out_rdata;
  logic sm_start, sm_busy, sm_done, sm_in_we, sm_out_re;
  len_t sm_row_len, sm_num_rows;
  logic [AW-1:0] sm_in_waddr, sm_out_raddr;
  fix_t [N-1:0] sm_in_wdata;
  logic [N-1:0][15:0] sm_out_rdata;
  logic ge_start, ge_busy, ge_done, ge_in_we, ge_out_re;
  len_t ge_row_len, ge_num_rows;
  logic [AW-1:0] ge_in_waddr, ge_out_raddr;
  fix_t [N-1:0] ge_in_wdata, ge_out_rdata;

  peano_vit_nonlinear dut (.*);

  int checks = 0, failures = 0;
  // mechanism counters
  int n_concurrent = 0, n_ln_wait = 0, n_sm_wait = 0, n_cut = 0, n_alpha_exp = 0;
  int n_alpha_sum = 0, n_rs_left = 0, n_rs_right = 0, n_pad = 0;
  int seg_hits [7];

  // host-side copies
  fix_t [N-1:0] ln_in [ACT_WORDS], sm_in [ACT_WORDS], ge_in [ACT_WORDS];
  fix_t [N-1:0] gam [64], bet [64];

  initial begin
    repeat (2000000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) if (!rst) begin
    if (ln_busy && sm_busy && ge_busy) n_concurrent++;
    if (!dut.u_layernorm.b_empty && !dut.u_layernorm.u_norm.have_row) n_ln_wait++;
    if (!dut.u_softmax.x_empty && dut.u_softmax.u_norm.state == 2'd0) n_sm_wait++;
    if (dut.u_softmax.u_norm.state == 2'd1 && dut.u_softmax.u_norm.alpha_c != 0) n_alpha_sum++;
    if (dut.u_softmax.g_lane[0].u_exp.vld[2] && !dut.u_softmax.g_lane[0].u_exp.zero2 &&
        dut.u_softmax.g_lane[0].u_exp.alpha_c != 0) n_alpha_exp++;
  end

  function automatic int seg_of(int x);
    int s;
    s = 0;
    if (x >= -768) s = 1;
    if (x >= -538) s = 2;
    if (x >= -192) s = 3;
    if (x >= 0)    s = 4;
    if (x >= 128)  s = 5;
    if (x >= 768)  s = 6;
    return (x < -768) ? 0 : s;
  endfunction

  task automatic host_write(int unit, int addr, fix_t [N-1:0] d);
    @(negedge clk);
    ln_in_we = (unit == 0); sm_in_we = (unit == 1); ge_in_we = (unit == 2);
    ln_in_waddr = AW'(addr); sm_in_waddr = AW'(addr); ge_in_waddr = AW'(addr);
    ln_in_wdata = d; sm_in_wdata = d; ge_in_wdata = d;
    @(posedge clk); #1;
    ln_in_we = 0; sm_in_we = 0; ge_in_we = 0;
  endtask

  task automatic load(int ln_rl, int ln_nr, int sm_rl, int sm_nr, int ge_rl, int ge_nr);
    int bpr;
    bpr = (ln_rl + N - 1) / N;
    for (int a = 0; a < 64; a++) begin
      for (int i = 0; i < N; i++) begin
        gam[a][i] = 16'($urandom_range(0, 511) - 128);
        bet[a][i] = 16'($urandom_range(0, 511) - 256);
      end
      @(negedge clk);
      ln_gb_we = 1; ln_gb_waddr = 6'(a); ln_gb_wgamma = gam[a]; ln_gb_wbeta = bet[a];
      @(posedge clk); #1 ln_gb_we = 0;
    end
    for (int r = 0; r < ln_nr; r++) begin
      int off, spr;
      off = $urandom_range(0, 1000) - 500;
      spr = (r % 4 == 0) ? 60 : 30 + $urandom_range(0, 1500);    // some rows with Var < 1
      for (int b = 0; b < bpr; b++) begin
        for (int i = 0; i < N; i++) ln_in[r * bpr + b][i] = 16'(off + $urandom_range(0, 2 * spr) - spr);
        host_write(0, r * bpr + b, ln_in[r * bpr + b]);
      end
    end
    bpr = (sm_rl + N - 1) / N;
    for (int r = 0; r < sm_nr; r++) begin
      int off;
      off = $urandom_range(0, 4000) - 2000;
      for (int b = 0; b < bpr; b++) begin
        for (int i = 0; i < N; i++) sm_in[r * bpr + b][i] = 16'(off + $urandom_range(0, 1600) - 800);
        host_write(1, r * bpr + b, sm_in[r * bpr + b]);
      end
    end
    bpr = (ge_rl + N - 1) / N;
    for (int a = 0; a < ge_nr * bpr; a++) begin
      for (int i = 0; i < N; i++) ge_in[a][i] = 16'($urandom_range(0, 2559) - 1280);
      host_write(2, a, ge_in[a]);
    end
  endtask

  // read one word of a unit's output BRAM through the top's read port
  task automatic host_read(int unit, int addr, output logic [N-1:0][15:0] d);
    @(negedge clk);
    ln_out_re = (unit == 0); sm_out_re = (unit == 1); ge_out_re = (unit == 2);
    ln_out_raddr = AW'(addr); sm_out_raddr = AW'(addr); ge_out_raddr = AW'(addr);
    @(posedge clk); #1;
    d = (unit == 0) ? ln_out_rdata : (unit == 1) ? sm_out_rdata : ge_out_rdata;
    ln_out_re = 0; sm_out_re = 0; ge_out_re = 0;
  endtask

  task automatic check_ln(int rl, int nr);
    int bpr;
    bpr = (rl + N - 1) / N;
    for (int r = 0; r < nr; r++) begin
      int xs [$];
      longint avg, var_q;
      real s, sq, mean, sd;
      peano_ref_pkg::me_t rs;
      logic [N-1:0][15:0] w;
      xs = {};
      for (int k = 0; k < rl; k++) xs.push_back(int'(ln_in[r * bpr + k / N][k % N]));
      ref_ln_stats(xs, longint'(ln_inv_n), avg, var_q);
      rs = ref_rsqrt(longint'(var_q));
      if (rs.e > 0) n_rs_left++; else n_rs_right++;
      s = 0; sq = 0;
      foreach (xs[k]) begin s += real'(xs[k]) / 256.0; sq += (real'(xs[k]) / 256.0) ** 2; end
      mean = s / rl; sd = $sqrt(sq / rl - mean * mean);
      for (int b = 0; b < bpr; b++) begin
        host_read(0, r * bpr + b, w);
        for (int i = 0; i < N; i++) begin
          int k, want;
          k = b * N + i;
          want = (k < rl) ? ref_ln_elem(xs[k], avg, rs.mant, rs.e, int'(gam[b][i]), int'(bet[b][i])) : 0;
          if (k >= rl) n_pad++;
          checks++;
          if (int'($signed(w[i])) != want) begin
            failures++;
            if (failures < 8) $display("FAIL ln row %0d k %0d: %0d want %0d", r, k, $signed(w[i]), want);
          end
          if (k < rl) begin
            real ng, ex;
            ng = (real'(xs[k]) / 256.0 - mean) / sd * real'(gam[b][i]) / 256.0;
            ex = ng + real'(bet[b][i]) / 256.0;
            if (ng < 0.0) ng = -ng;
            checks++;
            if ((real'($signed(w[i])) / 256.0 - ex) ** 2 > (0.05 * ng + 0.012) ** 2) begin
              failures++;
              if (failures < 8) $display("FAIL ln exact row %0d k %0d: %f want %f", r, k, real'($signed(w[i])) / 256.0, ex);
            end
          end
        end
      end
    end
  endtask

  task automatic check_sm(int rl, int nr);
    int bpr;
    bpr = (rl + N - 1) / N;
    for (int r = 0; r < nr; r++) begin
      int xs [$];
      longint es [$];
      int mx;
      longint tot;
      real rtot, ytot;
      peano_ref_pkg::me_t m;
      logic [N-1:0][15:0] w;
      xs = {}; es = {};
      mx = -40000;
      for (int k = 0; k < rl; k++) begin
        xs.push_back(int'(sm_in[r * bpr + k / N][k % N]));
        if (xs[k] > mx) mx = xs[k];
      end
      tot = 0; rtot = 0;
      for (int k = 0; k < rl; k++) begin
        es.push_back(ref_exp(xs[k], mx, 1'b0));
        if (es[k] == 0) n_cut++;
        tot += es[k];
        rtot += $exp(real'(xs[k] - mx) / 256.0);
      end
      m = ref_msr(longint'(tot), 1'b0);
      ytot = 0;
      for (int b = 0; b < bpr; b++) begin
        host_read(1, r * bpr + b, w);
        for (int i = 0; i < N; i++) begin
          int k;
          longint want;
          k = b * N + i;
          want = (k < rl) ? ((es[k] * m.mant) >> (RF + m.e - SM_OFW)) : 0;
          if (want > 65535) want = 65535;
          if (k >= rl) n_pad++;
          checks++;
          if (longint'(w[i]) != want) begin
            failures++;
            if (failures < 8) $display("FAIL sm row %0d k %0d: %0d want %0d", r, k, w[i], want);
          end
          if (k < rl) begin
            real ex;
            ex = $exp(real'(xs[k] - mx) / 256.0) / rtot;
            ytot += real'(w[i]) / 32768.0;
            checks++;
            if ((real'(w[i]) / 32768.0 - ex) ** 2 > (0.2 * ex + 0.01) ** 2) begin
              failures++;
              if (failures < 8) $display("FAIL sm exact row %0d k %0d: %f want %f", r, k, real'(w[i]) / 32768.0, ex);
            end
          end
        end
      end
      checks++;
      if (ytot < 0.98 || ytot > 1.08) begin
        failures++;
        if (failures < 8) $display("FAIL sm row %0d sums to %f", r, ytot);
      end
    end
  endtask

  task automatic check_ge(int rl, int nr);
    int bpr;
    bpr = (rl + N - 1) / N;
    for (int a = 0; a < nr * bpr; a++) begin
      logic [N-1:0][15:0] w;
      host_read(2, a, w);
      for (int i = 0; i < N; i++) begin
        int want;
        want = ((a % bpr) * N + i < rl) ? ref_gelu(int'(ge_in[a][i])) : 0;
        if ((a % bpr) * N + i < rl) seg_hits[seg_of(int'(ge_in[a][i]))]++;
        else n_pad++;
        checks++;
        if (int'($signed(w[i])) != want) begin
          failures++;
          if (failures < 8) $display("FAIL ge word %0d lane %0d: %0d want %0d", a, i, $signed(w[i]), want);
        end
        if ((a % bpr) * N + i < rl) begin
          real xr;
          xr = real'(ge_in[a][i]) / 256.0;
          checks++;
          if ((real'($signed(w[i])) / 256.0 - gelu_exact(xr)) ** 2 > 0.055 ** 2) begin
            failures++;
            if (failures < 8) $display("FAIL ge exact x %f: %f", xr, real'($signed(w[i])) / 256.0);
          end
        end
      end
    end
  endtask

  task automatic run_round(int ln_rl, int ln_nr, int sm_rl, int sm_nr, int ge_rl, int ge_nr);
    int cyc, dl, ds, dg;
    load(ln_rl, ln_nr, sm_rl, sm_nr, ge_rl, ge_nr);
    @(negedge clk);
    ln_row_len = len_t'(ln_rl); ln_num_rows = len_t'(ln_nr);
    ln_inv_n = (INV_W+1)'(((longint'(1) << (INV_W + 1)) / ln_rl + 1) / 2);
    sm_row_len = len_t'(sm_rl); sm_num_rows = len_t'(sm_nr);
    ge_row_len = len_t'(ge_rl); ge_num_rows = len_t'(ge_nr);
    ln_start = 1; sm_start = 1; ge_start = 1;
    @(negedge clk);
    ln_start = 0; sm_start = 0; ge_start = 0;
    cyc = 1; dl = 0; ds = 0; dg = 0;
    while (ln_busy || sm_busy || ge_busy) begin
      @(negedge clk); cyc++;
      if (ln_busy) dl = cyc;
      if (sm_busy) ds = cyc;
      if (ge_busy) dg = cyc;
    end
    $display("round: layernorm %0dx%0d in %0d clocks, softmax %0dx%0d in %0d, GELU %0dx%0d in %0d",
             ln_nr, ln_rl, dl, sm_nr, sm_rl, ds, ge_nr, ge_rl, dg);
    check_ln(ln_rl, ln_nr);
    check_sm(sm_rl, sm_nr);
    check_ge(ge_rl, ge_nr);
  endtask

  initial begin
    ln_start = 0; sm_start = 0; ge_start = 0;
    ln_in_we = 0; sm_in_we = 0; ge_in_we = 0; ln_gb_we = 0;
    ln_out_re = 0; sm_out_re = 0; ge_out_re = 0;
    ln_row_len = 0; ln_num_rows = 0; ln_inv_n = 0;
    sm_row_len = 0; sm_num_rows = 0; ge_row_len = 0; ge_num_rows = 0;
    ln_in_waddr = 0; sm_in_waddr = 0; ge_in_waddr = 0; ln_gb_waddr = 0;
    ln_out_raddr = 0; sm_out_raddr = 0; ge_out_raddr = 0;
    ln_in_wdata = '0; sm_in_wdata = '0; ge_in_wdata = '0; ln_gb_wgamma = '0; ln_gb_wbeta = '0;
    repeat (3) @(posedge clk);
    rst = 0;
    // DeiT-B: width 768, 197 tokens, MLP 3072
    run_round(768, 64, 197, 197, 3072, 21);
    // DeiT-S: width 384, 197 tokens, MLP 1536
    run_round(384, 100, 197, 100, 1536, 40);
    // ViT-L: width 1024 (a full BRAM of rows), MLP 4096
    run_round(1024, 64, 197, 60, 4096, 16);
    // Swin-B: stage-1 width 128, 7x7 windows (softmax rows of 49), MLP 512
    run_round(128, 200, 49, 300, 512, 100);
    // short jobs, to see the units restart cleanly
    run_round(100, 5, 49, 8, 197, 3);
    begin
      int cnt [10];
      string nm [10];
      cnt = '{n_concurrent, n_ln_wait, n_sm_wait, n_cut, n_alpha_exp, n_alpha_sum,
              n_rs_left, n_rs_right, n_pad, 0};
      nm  = '{"all units busy", "LN bypass waits for stats", "SM side FIFO waits for sum",
              "exp cut to 0", "MSR alpha>0 (exp)", "MSR alpha>0 (sum)", "rsqrt left shift",
              "rsqrt right shift", "padding lanes", ""};
      for (int i = 0; i < 9; i++) begin
        $display("mechanism %-28s %0d", nm[i], cnt[i]);
        checks++;
        if (cnt[i] == 0) begin failures++; $display("FAIL mechanism never happened: %s", nm[i]); end
      end
      for (int s = 0; s < 7; s++) begin
        $display("mechanism GELU segment %0d            %0d", s, seg_hits[s]);
        checks++;
        if (seg_hits[s] == 0) failures++;
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

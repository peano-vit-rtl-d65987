// tb_gelu_pwl -- one PEANO-GELU lane. Sweeps every Q7.8 input in [-6, 6]
// plus random full-range inputs, one per clock. Checks: bit-level agreement
// with the reference model, the 3-clock latency, padding lanes give 0,
// the segment formulas in real arithmetic (within 2 LSB), closeness to the
// exact GELU on [-4, 4] (paper: MSE 2.65e-4 with seven segments) and that
// every one of the seven segments was used.
module tb_gelu_pwl;
  import peano_pkg::*;
  import peano_ref_pkg::*;
  localparam int LAT = 3;
  logic clk = 0, rst = 1;
  always #5 clk = ~clk;
  logic in_valid, en, out_valid;
  fix_t x, y;
  int checks = 0, failures = 0, cyc = 0;
  typedef struct { int want; int xin; bit en; int cyc; } exp_t;
  exp_t q [$];
  int seg_hits [7];
  real se = 0.0;
  int n_se = 0;

  gelu_pwl dut (.*);

  always @(posedge clk) cyc <= cyc + 1;

  function automatic real pwl_real(real v);
    if (v < -3.0)  return 0.0;
    if (v < -2.1)  return -0.0414 * (v + 3.0);
    if (v < -0.75) return -0.0982 * (v + 2.1) - 0.0373;
    if (v < 0.0)   return 0.2266 * (v + 0.75) - 0.17;
    if (v < 0.5)   return 0.6914 * v;
    if (v < 3.0)   return 1.0617 * (v - 0.5) + 0.3457;
    return v;
  endfunction

  function automatic int seg_of(real v);
    if (v < -3.0)  return 0;
    if (v < -2.1)  return 1;
    if (v < -0.75) return 2;
    if (v < 0.0)   return 3;
    if (v < 0.5)   return 4;
    if (v < 3.0)   return 5;
    return 6;
  endfunction

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) if (!rst && out_valid) begin
    exp_t w;
    real xr, yr;
    w = q.pop_front();
    xr = real'(w.xin) / 256.0;
    yr = real'(y) / 256.0;
    checks++;
    if (int'(y) != w.want || cyc - w.cyc != LAT) begin
      failures++;
      if (failures < 8) $display("FAIL x=%0d y=%0d want=%0d", w.xin, y, w.want);
    end
    if (w.en) begin
      checks++;
      if (yr - pwl_real(xr) > 2.0 / 256 || pwl_real(xr) - yr > 2.0 / 256) begin
        failures++;
        if (failures < 8) $display("FAIL pwl x=%f y=%f", xr, yr);
      end
      seg_hits[seg_of(xr)]++;
      if (xr >= -4.0 && xr <= 4.0) begin se += (yr - gelu_exact(xr)) ** 2; n_se++; end
    end
  end

  initial begin
    in_valid = 0; en = 0; x = 0;
    repeat (3) @(posedge clk);
    rst = 0;
    for (int t = 0; t < 3072 + 4000; t++) begin
      int xv;
      @(negedge clk);
      xv = (t < 3072) ? t - 1536 : int'($signed(16'($urandom)));
      x = 16'(xv);
      en = ($urandom_range(0, 15) != 0);
      in_valid = 1;
      q.push_back('{want: en ? ref_gelu(xv) : 0, xin: xv, en: en, cyc: cyc});
    end
    @(negedge clk); in_valid = 0;
    repeat (10) @(posedge clk);
    $display("GELU MSE on [-4,4] = %e (paper: 2.65e-4)", se / n_se);
    checks++;
    if (se / n_se > 6.0e-4) failures++;
    for (int s = 0; s < 7; s++) begin
      checks++;
      if (seg_hits[s] == 0) begin failures++; $display("segment %0d never used", s); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

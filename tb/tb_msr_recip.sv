// tb_msr_recip -- checks MSR-approx and LMSR-approx (two instances) on
// every input up to 2^14 and on random 27-bit inputs: bit-level agreement
// with the reference model, the MSR error bound (the table index keeps
// ALPHA_STAR+1 significant bits, so 1/x is over-estimated by less than
// 1/16 plus table rounding), exact results on 1..31, LMSR at least as close
// as MSR, and the mean square errors on [8, 64] against the paper's
// figures (4.19e-6 for MSR, 3.63e-9 for LMSR at alpha* = 4). Two more
// instances with alpha* = 5 (a 63-entry table) cover the paper's other
// threshold; they must be no worse than alpha* = 4.
module tb_msr_recip;
  import peano_pkg::*;
  import peano_ref_pkg::*;
  logic [26:0] x;
  logic [16:0] mant_m, mant_l;
  logic [4:0]  alpha_m, alpha_l;
  int checks = 0, failures = 0;

  msr_recip #(.XW(27), .LMSR(1'b0)) dut_msr  (.x, .mant(mant_m), .alpha(alpha_m));
  msr_recip #(.XW(27), .LMSR(1'b1)) dut_lmsr (.x, .mant(mant_l), .alpha(alpha_l));

  // alpha* = 5, the other threshold of the paper's accuracy study
  logic [16:0] mant_m5, mant_l5;
  logic [4:0]  alpha_m5, alpha_l5;
  msr_recip #(.XW(27), .ASTAR(5), .LMSR(1'b0)) dut_msr5  (.x, .mant(mant_m5), .alpha(alpha_m5));
  msr_recip #(.XW(27), .ASTAR(5), .LMSR(1'b1)) dut_lmsr5 (.x, .mant(mant_l5), .alpha(alpha_l5));

  function automatic real val(logic [16:0] m, logic [4:0] a);
    return real'(m) * $pow(2.0, real'(-16 - int'(a)));
  endfunction

  task automatic try(longint unsigned v);
    peano_ref_pkg::me_t r; longint m; int a; real want, gm, gl;
    x = 27'(v);
    #1;
    want = 1.0 / real'(v);
    gm = val(mant_m, alpha_m);
    gl = val(mant_l, alpha_l);
    r = ref_msr(v, 1'b0); m = r.mant; a = r.e;
    checks++;
    if (longint'(mant_m) != m || int'(alpha_m) != a) begin
      failures++;
      if (failures < 8) $display("FAIL msr x=%0d mant=%0d/%0d alpha=%0d/%0d", v, mant_m, m, alpha_m, a);
    end
    r = ref_msr(v, 1'b1); m = r.mant; a = r.e;
    checks++;
    if (longint'(mant_l) != m || int'(alpha_l) != a) begin
      failures++;
      if (failures < 8) $display("FAIL lmsr x=%0d mant=%0d/%0d", v, mant_l, m);
    end
    checks++;
    if (gm < want - $pow(2.0, real'(-17 - int'(alpha_m))) || gm > want * (1.0 + 1.0 / 16.0) + $pow(2.0, -16.0)) begin
      failures++;
      if (failures < 8) $display("FAIL bound x=%0d got=%e want=%e", v, gm, want);
    end
    checks++;
    if (fabs(gl - want) > fabs(gm - want) + $pow(2.0, real'(-16 - int'(alpha_l)))) begin
      failures++;
      if (failures < 8) $display("FAIL lmsr worse x=%0d", v);
    end
  endtask

  initial begin
    real se_m, se_l, se_m5, se_l5;
    int n;
    for (longint v = 1; v < (1 << 14); v++) try(v);
    for (int i = 0; i < 5000; i++) try(longint'($urandom_range(1, (1 << 27) - 1)));
    for (longint v = 1; v < 32; v++) begin
      x = 27'(v); #1;
      checks++;
      if (alpha_m != 0 || mant_m != 17'(((1 << 16) + v / 2) / v)) failures++;
    end
    // MSE on [8, 64] with 8 fraction bits of input
    se_m = 0; se_l = 0; se_m5 = 0; se_l5 = 0; n = 0;
    for (longint v = 8 * 256; v <= 64 * 256; v++) begin
      real want;
      x = 27'(v); #1;
      want = 256.0 / real'(v);
      se_m += (256.0 * val(mant_m, alpha_m) - want) ** 2;
      se_l += (256.0 * val(mant_l, alpha_l) - want) ** 2;
      se_m5 += (256.0 * val(mant_m5, alpha_m5) - want) ** 2;
      se_l5 += (256.0 * val(mant_l5, alpha_l5) - want) ** 2;
      n++;
    end
    $display("alpha*=5: MSR MSE %e (paper 4.03e-6), LMSR %e (paper 3.58e-9)", se_m5 / n, se_l5 / n);
    // a larger threshold keeps one more bit, so it cannot be worse
    checks++;
    if (se_m5 > se_m || se_l5 > se_l * 1.05 || se_m5 / n > 2.0e-5 || se_l5 > se_m5 / 10.0) failures++;
    $display("MSR MSE on [8,64] = %e (paper 4.19e-6), LMSR = %e (paper 3.63e-9)", se_m / n, se_l / n);
    checks++;
    if (se_m / n > 2.0e-5 || se_l / n > se_m / n / 10.0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #100000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

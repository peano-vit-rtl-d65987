// tb_rsqrt_approx -- sweeps variances from one LSB to 2^31 (every value up
// to 4096, then random and power-of-two values) and checks the mantissa and
// exponent against the reference model, the result against 1/sqrt(var)
// (the log2 estimate k + x never exceeds log2, so the result is at most
// about 4.5% high with the mantissa kept to m+1 bits, and the m-bit
// table truncation makes it at most 4.4% low),
// exact results at
// powers of four, and the mean square error over [1, 128] for m = 4
// against the paper's 9.56e-6 (allowing for the Q.16 input grid). Two more
// instances with m = 3 and m = 5 reproduce the paper's table-size study:
// m = 3 must be clearly worse than m = 4 and m = 5 no more than 10% worse
// (it is about 4% worse: see the comment at the check), all near the
// published values.
module tb_rsqrt_approx;
  import peano_pkg::*;
  import peano_ref_pkg::*;
  logic [31:0] var_in;
  logic [15:0] mant;
  logic signed [7:0] e;
  int checks = 0, failures = 0;
  real mse_sum = 0.0;
  int mse_n = 0;

  rsqrt_approx dut (.var_in, .mant, .e);
  // the other table sizes of the paper's accuracy study (m = 3 and m = 5)
  logic [15:0] mant3, mant5;
  logic signed [7:0] e3, e5;
  rsqrt_approx #(.M(3)) dut_m3 (.var_in, .mant(mant3), .e(e3));
  rsqrt_approx #(.M(5)) dut_m5 (.var_in, .mant(mant5), .e(e5));
  real mse3 = 0.0, mse5 = 0.0;

  task automatic try(longint unsigned v);
    peano_ref_pkg::me_t r; longint m; int ee; real got, want;
    var_in = 32'(v);
    #1;
    r = ref_rsqrt(v); m = r.mant; ee = r.e;
    got  = real'(mant) * $pow(2.0, real'(int'(e) - 15));
    want = 1.0 / $sqrt(real'(v) / 65536.0);
    checks++;
    if (longint'(mant) != m || int'(e) != ee) begin
      failures++;
      if (failures < 8) $display("FAIL var=%0d mant=%0d/%0d e=%0d/%0d", v, mant, m, e, ee);
    end
    checks++;
    if (got > want * 1.045 || got < want * 0.95) begin
      failures++;
      if (failures < 8) $display("FAIL accuracy var=%0d got=%f want=%f", v, got, want);
    end
  endtask

  initial begin
    for (longint v = 1; v <= 4096; v++) try(v);
    for (int i = 0; i < 4000; i++) try(longint'($urandom) & 64'h7FFF_FFFF | 1);
    for (int k = 0; k < 31; k++) try(longint'(1) << k);
    // powers of four are exact
    for (int k = 0; k < 16; k++) begin
      var_in = 32'(longint'(1) << (2 * k)); #1;
      checks++;
      if (mant != 16'h8000 || int'(e) != 8 - k) failures++;
    end
    // MSE on [1, 128]
    for (longint v = 65536; v <= 128 * 65536; v += 97) begin
      real got, want;
      var_in = 32'(v); #1;
      got  = real'(mant) * $pow(2.0, real'(int'(e) - 15));
      want = 1.0 / $sqrt(real'(v) / 65536.0);
      mse_sum += (got - want) ** 2; mse_n++;
      mse3 += (real'(mant3) * $pow(2.0, real'(int'(e3) - 15)) - want) ** 2;
      mse5 += (real'(mant5) * $pow(2.0, real'(int'(e5) - 15)) - want) ** 2;
    end
    mse3 /= mse_n; mse5 /= mse_n;
    $display("rsqrt MSE on [1,128]: m=3 %e (paper 4.93e-5), m=4 %e (paper 9.56e-6), m=5 %e (paper 7.86e-6)",
             mse3, mse_sum / mse_n, mse5);
    checks++;
    if (mse_sum / mse_n > 3.0e-5) failures++;
    // m = 3 -> 4 must help clearly. Beyond m = 4 the log2 estimate's own
    // error dominates; truncating v to m bits biases the result low and
    // partly cancels that estimate's high bias, so m = 5 ends up about as
    // good as m = 4 here (the paper reports a small gain).
    checks++;
    if (!(mse3 > 2.0 * mse_sum / mse_n && mse5 < 1.1 * mse_sum / mse_n)) failures++;
    checks++;
    if (mse3 > 1.5e-4 || mse5 > 2.5e-5) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #10000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

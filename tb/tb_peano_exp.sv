// tb_peano_exp -- one PEANOexp lane. Sweeps x - max from -6 to 0 in every
// Q7.8 step (so xt = x - max + 2 covers [-3, 2] and the zero region below
// it), with random maxima, one element per clock. Checks: bit-level
// agreement with the reference model, the 4-clock latency, e = 0 below
// xt = -3 and for padding lanes, and accuracy: within MSR's 1/16 (+7%)
// above the real Pade value, and within 0.03 + 7% of e^xt (the Pade
// approximant itself is 0.027 high at xt = -3).
module tb_peano_exp;
  import peano_pkg::*;
  import peano_ref_pkg::*;
  localparam int LAT = 4;
  logic clk = 0, rst = 1;
  always #5 clk = ~clk;
  logic in_valid, en, out_valid;
  fix_t x, xmax;
  logic [15:0] e;
  int checks = 0, failures = 0, zeros = 0;
  int cyc = 0;
  typedef struct { longint want; real real_want; int cyc; } exp_t;   // real_want holds xt

  function automatic real pade(real v);
    return (12.0 + 6.0 * v + v * v) / (12.0 - 6.0 * v + v * v);
  endfunction
  exp_t q [$];

  peano_exp dut (.*);

  always @(posedge clk) cyc <= cyc + 1;

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) if (!rst && out_valid) begin
    exp_t w;
    real got;
    w = q.pop_front();
    got = real'(e) / 8192.0;
    checks++;
    if (longint'(e) != w.want || cyc - w.cyc != LAT) begin
      failures++;
      if (failures < 8) $display("FAIL e=%0d want=%0d lat=%0d", e, w.want, cyc - w.cyc);
    end
    if (w.want == 0) zeros++;
    checks++;
    if (w.real_want > -50.0 && (got > pade(w.real_want) * 1.07 + 0.001 || got < pade(w.real_want) - 0.001
        || got > $exp(w.real_want) * 1.07 + 0.03 || got < $exp(w.real_want) * 0.93 - 0.03)) begin
      failures++;
      if (failures < 8) $display("FAIL accuracy xt=%f got=%f pade=%f", w.real_want, got, pade(w.real_want));
    end
  end

  initial begin
    in_valid = 0; en = 0; x = 0; xmax = 0;
    repeat (3) @(posedge clk);
    rst = 0;
    for (int d = -6 * 256; d <= 0; d++) begin
      int mx;
      @(negedge clk);
      mx = $urandom_range(0, 2000) - 1000;
      xmax = 16'(mx); x = 16'(mx + d);
      en = ($urandom_range(0, 15) != 0);
      in_valid = 1;
      q.push_back('{want: en ? ref_exp(mx + d, mx, 1'b0) : 0,
                    real_want: (en && d + 512 >= -768) ? real'(d + 512) / 256.0 : -100.0,
                    cyc: cyc});
    end
    @(negedge clk); in_valid = 0;
    repeat (10) @(posedge clk);
    checks++;
    if (q.size() != 0 || zeros < 100) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

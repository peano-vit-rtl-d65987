// tb_ln_sumsq_lane -- random Q7.8 inputs (including the most negative
// value) with the lane enabled and disabled; checks x and x^2 one clock
// later.
module tb_ln_sumsq_lane;
  import peano_pkg::*;
  logic clk = 0;
  always #5 clk = ~clk;
  logic en;
  fix_t x, s;
  logic signed [2*DW:0] q;
  int checks = 0, failures = 0;

  ln_sumsq_lane dut (.*);

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int t = 0; t < 2000; t++) begin
      int xv; bit e;
      @(negedge clk);
      xv = (t == 0) ? -32768 : (t == 1) ? 32767 : int'($signed(16'($urandom)));
      e  = (t < 2) || ($urandom_range(0, 3) != 0);
      x = 16'(xv); en = e;
      @(posedge clk); #1;
      checks++;
      if (s != (e ? 16'(xv) : 16'(0)) || q != (e ? 33'(longint'(xv) * xv) : 33'(0))) begin
        failures++;
        if (failures < 5) $display("FAIL x=%0d s=%0d q=%0d", xv, s, q);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

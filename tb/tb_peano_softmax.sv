// tb_peano_softmax -- runs the softmax unit checks of peano_softmax_check at the
// default 16 lanes and again at 8 lanes, since the lane count N is a
// parameter of the design ("increasing N" trades resources for speed), and
// at the paper's other tuning knobs: each check instance also runs a second
// unit, here LMSR at alpha* = 4 (16 lanes), LMSR at alpha* = 5 (8 lanes)
// and MSR at alpha* = 5 (a third 16-lane instance), each checked bit for bit
// against the reference model at that setting. All instances run at the
// same time, each with its own clock and modelled BRAMs; the result line
// sums their counts. A watchdog ends a hung run.
module tb_peano_softmax;
  int c16, f16, c8, f8, ca, fa;
  logic fin16, fin8, fina;

  peano_softmax_check #(.N(16), .AW(10)) u_n16 (.n_checks(c16), .n_failures(f16), .finished(fin16));
  peano_softmax_check #(.N(8),  .AW(11), .ASTAR2(5)) u_n8 (.n_checks(c8),  .n_failures(f8),  .finished(fin8));
  peano_softmax_check #(.N(16), .AW(10), .LMSR2(1'b0), .ASTAR2(5)) u_a5 (
    .n_checks(ca), .n_failures(fa), .finished(fina));

  logic clk = 0;
  always #5 clk = ~clk;

  initial begin
    repeat (600000) @(posedge clk);
    $display("watchdog: run did not finish");
    $display("TB_RESULT checks=%0d failures=%0d", c16 + c8 + ca, f16 + f8 + fa + 1);
    $finish;
  end

  initial begin
    wait (fin16 && fin8 && fina);
    $display("16 lanes: %0d checks, %0d failures; 8 lanes: %0d checks, %0d failures; MSR alpha* 5: %0d checks, %0d failures",
             c16, f16, c8, f8, ca, fa);
    $display("TB_RESULT checks=%0d failures=%0d", c16 + c8 + ca, f16 + f8 + fa);
    $finish;
  end
endmodule

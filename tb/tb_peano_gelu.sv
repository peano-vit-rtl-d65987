// tb_peano_gelu -- runs the gelu unit checks of peano_gelu_check at the
// default 16 lanes and again at 8 lanes, since the lane count N is a
// parameter of the design ("increasing N" trades resources for speed). Both
// instances run at the same time, each with its own clock and modelled
// BRAMs; the result line sums their counts. A watchdog ends a hung run.
module tb_peano_gelu;
  int c16, f16, c8, f8;
  logic fin16, fin8;

  peano_gelu_check #(.N(16), .AW(10)) u_n16 (.n_checks(c16), .n_failures(f16), .finished(fin16));
  peano_gelu_check #(.N(8),  .AW(11)) u_n8  (.n_checks(c8),  .n_failures(f8),  .finished(fin8));

  logic clk = 0;
  always #5 clk = ~clk;

  initial begin
    repeat (600000) @(posedge clk);
    $display("watchdog: run did not finish");
    $display("TB_RESULT checks=%0d failures=%0d", c16 + c8, f16 + f8 + 1);
    $finish;
  end

  initial begin
    wait (fin16 && fin8);
    $display("16 lanes: %0d checks, %0d failures; 8 lanes: %0d checks, %0d failures", c16, f16, c8, f8);
    $display("TB_RESULT checks=%0d failures=%0d", c16 + c8, f16 + f8);
    $finish;
  end
endmodule

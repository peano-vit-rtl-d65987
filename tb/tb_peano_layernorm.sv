// tb_peano_layernorm -- runs the layernorm unit checks of peano_layernorm_check at the
// default 16 lanes and again at 8 lanes, since the lane count N is a
// parameter of the design ("increasing N" trades resources for speed), and
// at the paper's other layer-norm knob, the rsqrt table size m: 16 lanes at
// m = 4, 8 lanes at m = 3 and 16 lanes at m = 5, each checked bit for bit
// against the reference model at that m. All instances run at the same
// time, each with its own clock and modelled BRAMs; the result line sums
// their counts. A watchdog ends a hung run.
module tb_peano_layernorm;
  int c16, f16, c8, f8, c5, f5;
  logic fin16, fin8, fin5;

  peano_layernorm_check #(.N(16), .AW(10)) u_n16 (.n_checks(c16), .n_failures(f16), .finished(fin16));
  peano_layernorm_check #(.N(8),  .AW(11), .M(3)) u_n8 (.n_checks(c8),  .n_failures(f8),  .finished(fin8));
  peano_layernorm_check #(.N(16), .AW(10), .M(5)) u_m5 (.n_checks(c5),  .n_failures(f5),  .finished(fin5));

  logic clk = 0;
  always #5 clk = ~clk;

  initial begin
    repeat (600000) @(posedge clk);
    $display("watchdog: run did not finish");
    $display("TB_RESULT checks=%0d failures=%0d", c16 + c8 + c5, f16 + f8 + f5 + 1);
    $finish;
  end

  initial begin
    wait (fin16 && fin8 && fin5);
    $display("16 lanes m=4: %0d checks, %0d failures; 8 lanes m=3: %0d checks, %0d failures; 16 lanes m=5: %0d checks, %0d failures",
             c16, f16, c8, f8, c5, f5);
    $display("TB_RESULT checks=%0d failures=%0d", c16 + c8 + c5, f16 + f8 + f5);
    $finish;
  end
endmodule

// tb_sync_fifo -- random push/pop traffic against a queue model; checks the
// head element, empty, full, count and free every clock, at depth 5 (not a
// power of two) so the pointer wrap is exercised.
module tb_sync_fifo;
  localparam int DEPTH = 5;
  logic clk = 0, rst = 1;
  always #5 clk = ~clk;
  logic push, pop, empty, full;
  logic [15:0] din, dout;
  logic [2:0] count, free;
  logic [15:0] q [$];
  int checks = 0, failures = 0;
  int fulls = 0;

  sync_fifo #(.T(logic [15:0]), .DEPTH(DEPTH)) dut (.*);

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(logic c, string what);
    checks++;
    if (!c) begin
      failures++;
      if (failures < 10) $display("FAIL %s at %0t", what, $time);
    end
  endtask

  initial begin
    push = 0; pop = 0; din = 0;
    repeat (3) @(posedge clk);
    rst = 0;
    for (int t = 0; t < 3000; t++) begin
      @(negedge clk);
      chk(empty == (q.size() == 0), "empty");
      chk(full == (q.size() == DEPTH), "full");
      chk(count == 3'(q.size()), "count");
      chk(free == 3'(DEPTH - q.size()), "free");
      if (q.size() > 0) chk(dout == q[0], "head");
      if (full) fulls++;
      // bias towards filling in the first half, draining in the second
      pop  = (q.size() > 0) && ($urandom_range(0, 99) < ((t % 400) < 200 ? 30 : 70));
      push = ((q.size() < DEPTH) || pop) && ($urandom_range(0, 99) < ((t % 400) < 200 ? 70 : 30));
      din  = 16'($urandom);
      @(posedge clk);
      if (pop)  void'(q.pop_front());
      if (push) q.push_back(din);
    end
    chk(fulls > 0, "full reached");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

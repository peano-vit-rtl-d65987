// tb_softmax_max -- random rows of 1 to 6 beats with random lane masks
// (at least one lane valid per beat) and random gaps between beats;
// checks that exactly one row maximum appears per row, equal to the
// maximum over the valid lanes only.
module tb_softmax_max;
  import peano_pkg::*;
  localparam int N = 16;
  logic clk = 0, rst = 1;
  always #5 clk = ~clk;
  logic in_valid, in_last, out_valid;
  fix_t [N-1:0] in_data;
  logic [N-1:0] in_mask;
  fix_t out_max;
  int checks = 0, failures = 0;
  int q [$];

  softmax_max #(.N(N)) dut (.*);

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) if (!rst && out_valid) begin
    checks++;
    if (q.size() == 0 || int'(out_max) != q.pop_front()) begin
      failures++;
      if (failures < 8) $display("FAIL max=%0d", out_max);
    end
  end

  initial begin
    in_valid = 0; in_last = 0; in_data = '0; in_mask = '0;
    repeat (3) @(posedge clk);
    rst = 0;
    for (int r = 0; r < 300; r++) begin
      int beats, m;
      beats = $urandom_range(1, 6);
      m = -40000;
      for (int b = 0; b < beats; b++) begin
        @(negedge clk);
        in_valid = 0;
        while ($urandom_range(0, 3) == 0) begin @(negedge clk); end
        in_valid = 1;
        in_last  = (b == beats - 1);
        in_mask  = N'($urandom);
        if (in_mask == '0) in_mask[0] = 1'b1;
        for (int i = 0; i < N; i++) begin
          in_data[i] = (r == 0) ? 16'sh8000 : 16'($urandom);
          if (in_mask[i] && int'(in_data[i]) > m) m = int'(in_data[i]);
        end
        // a large value on a masked-off lane must be ignored
        if (!in_mask[N-1]) in_data[N-1] = 16'sh7FFF;
      end
      q.push_back(m);
    end
    @(negedge clk); in_valid = 0;
    repeat (10) @(posedge clk);
    checks++;
    if (q.size() != 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

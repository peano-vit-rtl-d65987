// tb_adder_tree -- drives one random beat of 16 signed 16-bit values per
// clock (with gaps) into the adder tree and checks every sum, its tag and
// that it appears exactly log2(16) = 4 clocks after its beat.
module tb_adder_tree;
  localparam int N = 16, W = 16, LAT = 4;
  logic clk = 0, rst = 1;
  always #5 clk = ~clk;
  logic in_valid, out_valid;
  logic signed [N-1:0][W-1:0] in_data;
  logic [0:0] in_tag, out_tag;
  logic signed [W+LAT-1:0] out_sum;
  int checks = 0, failures = 0;
  longint exp_sum [$];
  int exp_cyc [$];
  logic exp_tag [$];
  int cyc = 0;

  adder_tree #(.N(N), .W(W), .TAGW(1)) dut (.*);

  always @(posedge clk) cyc <= cyc + 1;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) if (!rst && out_valid) begin
    checks++;
    if (exp_sum.size() == 0) failures++;
    else begin
      longint s; int c; logic t;
      s = exp_sum.pop_front(); c = exp_cyc.pop_front(); t = exp_tag.pop_front();
      if (out_sum != s || cyc - c != LAT || out_tag[0] != t) begin
        failures++;
        $display("FAIL sum %0d exp %0d latency %0d", out_sum, s, cyc - c);
      end
    end
  end

  initial begin
    in_valid = 0; in_data = '0; in_tag = 0;
    repeat (3) @(posedge clk);
    rst = 0;
    for (int t = 0; t < 1000; t++) begin
      longint s;
      @(negedge clk);
      in_valid = ($urandom_range(0, 3) != 0);
      s = 0;
      for (int i = 0; i < N; i++) begin
        in_data[i] = (t < 5) ? 16'sh8000 : W'($urandom);   // extremes first
        s += longint'($signed(in_data[i]));
      end
      in_tag = 1'($urandom);
      if (in_valid) begin exp_sum.push_back(s); exp_cyc.push_back(cyc); exp_tag.push_back(in_tag[0]); end
    end
    @(negedge clk); in_valid = 0;
    repeat (10) @(posedge clk);
    checks++;
    if (exp_sum.size() != 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

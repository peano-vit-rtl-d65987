// tb_act_bram -- checks the activation BRAM: writes random words to random
// addresses, reads them back (one clock read latency) and compares with a
// model array; also checks that a read and a write in the same clock to
// different addresses do not disturb each other.
module tb_act_bram;
  localparam int WORDS = 64, WIDTH = 256;
  logic clk = 0;
  always #5 clk = ~clk;
  logic we, re;
  logic [5:0] waddr, raddr;
  logic [WIDTH-1:0] wdata, rdata;
  logic [WIDTH-1:0] model [WORDS];
  int checks = 0, failures = 0;

  act_bram #(.WORDS(WORDS), .WIDTH(WIDTH)) dut (.*);

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic logic [WIDTH-1:0] rnd();
    logic [WIDTH-1:0] v;
    for (int i = 0; i < WIDTH / 32; i++) v[32*i +: 32] = $urandom;
    return v;
  endfunction

  initial begin
    we = 0; re = 0; waddr = 0; raddr = 0; wdata = 0;
    // fill
    for (int a = 0; a < WORDS; a++) begin
      @(negedge clk); we = 1; waddr = 6'(a); wdata = rnd(); model[a] = wdata;
    end
    @(negedge clk); we = 0;
    // random read / write mix
    for (int t = 0; t < 500; t++) begin
      int ra;
      @(negedge clk);
      ra = $urandom_range(0, WORDS - 1);
      re = 1; raddr = 6'(ra);
      we = $urandom_range(0, 1) == 1;
      waddr = 6'($urandom_range(0, WORDS - 1));
      if (waddr == raddr) waddr = waddr + 1'b1;
      wdata = rnd();
      @(posedge clk); #1;
      if (we) model[waddr] = wdata;
      checks++;
      if (rdata !== model[ra]) begin
        failures++;
        if (failures < 5) $display("mismatch at %0d", ra);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

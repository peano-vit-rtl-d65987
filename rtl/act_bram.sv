// act_bram -- activation memory (the "Input/Output Activation BRAM" of each
// PEANO-ViT unit).
//
// Simple dual-port RAM of WORDS beats, each LOP activations wide: one write
// port and one read port with a registered (one-clock) read, the behaviour
// of an FPGA block RAM. The paper names these memories but gives no size;
// WORDS is this design's choice. No reset: contents are whatever was
// written.
module act_bram #(
  parameter int unsigned WORDS = 4096,
  parameter int unsigned WIDTH = 256,
  localparam int unsigned AW   = $clog2(WORDS)
) (
  input  logic             clk,
  input  logic             we,
  input  logic [AW-1:0]    waddr,
  input  logic [WIDTH-1:0] wdata,
  input  logic             re,
  input  logic [AW-1:0]    raddr,
  output logic [WIDTH-1:0] rdata
);
  logic [WIDTH-1:0] mem [WORDS];

  always_ff @(posedge clk) begin
    if (we) mem[waddr] <= wdata;
    if (re) rdata <= mem[raddr];
  end
endmodule

// sync_fifo -- single-clock first-word-fall-through FIFO.
//
// These queues decouple the reading, computing and storing stages of every
// PEANO-ViT unit (the paper places FIFOs between all of them). The head
// element is visible on 'dout' whenever 'empty' is low; 'pop' removes it and
// 'push' appends 'din' in the same clock, both allowed together. 'count' and
// 'free' let producers with a fixed-latency pipeline reserve space ahead
// (credit flow control). Depth and element type are parameters; the storage
// is a plain array that maps to distributed RAM or BRAM. Synchronous
// active-high reset empties the queue. Pushing when full or popping when
// empty is a protocol error and is caught by the assertions.
module sync_fifo #(
  parameter type         T     = logic [15:0],
  parameter int unsigned DEPTH = 16,
  localparam int unsigned CW   = $clog2(DEPTH + 1)
) (
  input  logic          clk,
  input  logic          rst,
  input  logic          push,
  input  T              din,
  input  logic          pop,
  output T              dout,
  output logic          empty,
  output logic          full,
  output logic [CW-1:0] count,
  output logic [CW-1:0] free
);
  localparam int unsigned AW = (DEPTH > 1) ? $clog2(DEPTH) : 1;

  T              mem [DEPTH];
  logic [AW-1:0] rd_ptr, wr_ptr;

  function automatic logic [AW-1:0] inc(logic [AW-1:0] p);
    return (p == AW'(DEPTH - 1)) ? '0 : p + AW'(1);
  endfunction

  always_ff @(posedge clk) begin
    if (rst) begin
      rd_ptr <= '0;
      wr_ptr <= '0;
      count  <= '0;
    end else begin
      if (push) begin
        mem[wr_ptr] <= din;
        wr_ptr      <= inc(wr_ptr);
      end
      if (pop) rd_ptr <= inc(rd_ptr);
      count <= count + CW'(push) - CW'(pop);
    end
  end

  assign dout  = mem[rd_ptr];
  assign empty = (count == '0);
  assign full  = (count == CW'(DEPTH));
  assign free  = CW'(DEPTH) - count;

  a_no_overflow:  assert property (@(posedge clk) disable iff (rst) push |-> (!full || pop));
  a_no_underflow: assert property (@(posedge clk) disable iff (rst) pop |-> !empty);
endmodule

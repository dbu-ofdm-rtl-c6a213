// dbu_fifo: synchronous first-word-fall-through FIFO.
//
// Holds up to DEPTH words of WIDTH bits in a register array (no RAM macro).
// `dout` always shows the oldest word; `pop` drops it at the clock edge.
// Push and pop may happen in the same cycle, also when full (the pop frees
// the place). The pointers wrap at DEPTH, which need not be a power of two.
// Pushing into a full FIFO or popping an empty one is an error, caught by
// assertions. Reset empties the FIFO.
//
// In a merged Householder module this is the input FIFO that keeps the
// samples of x_{k-1} until their correction term is known. The paper names
// the FIFO; its depth and interface are this design's.
module dbu_fifo #(
  parameter int unsigned WIDTH = 20,
  parameter int unsigned DEPTH = 214
) (
  input  logic                         clk,
  input  logic                         rst_n,
  input  logic                         push,
  input  logic [WIDTH-1:0]             din,
  input  logic                         pop,
  output logic [WIDTH-1:0]             dout,
  output logic [$clog2(DEPTH+1)-1:0]   count,
  output logic                         empty,
  output logic                         full
);
  localparam int unsigned AW = (DEPTH > 1) ? $clog2(DEPTH) : 1;

  logic [WIDTH-1:0] mem [DEPTH];
  logic [AW-1:0]    wptr, rptr;

  assign dout  = mem[rptr];
  localparam int unsigned CW = $clog2(DEPTH+1);

  assign empty = (count == '0);
  assign full  = (count == CW'(DEPTH));

  function automatic logic [AW-1:0] nxt(input logic [AW-1:0] p);
    return (p == AW'(DEPTH - 1)) ? '0 : p + 1'b1;
  endfunction

  always_ff @(posedge clk) begin
    if (push) mem[wptr] <= din;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wptr  <= '0;
      rptr  <= '0;
      count <= '0;
    end else begin
      if (push) wptr <= nxt(wptr);
      if (pop)  rptr <= nxt(rptr);
      count <= count + CW'(push) - CW'(pop);
    end
  end

  a_no_overflow:  assert property (@(posedge clk) disable iff (!rst_n) push && full |-> pop)
    else $error("dbu_fifo: push into full FIFO");
  a_no_underflow: assert property (@(posedge clk) disable iff (!rst_n) pop |-> !empty)
    else $error("dbu_fifo: pop from empty FIFO");
endmodule
